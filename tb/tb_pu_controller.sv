// tb_pu_controller: self-checking test of the PU tiling sequencer.
// The decoders are modelled by two arrays with the 2-cycle read latency,
// the VMAC array by a pulse N+1 cycles after dp_start and the
// accumulator by row_valid one cycle after drain. For a 2 x 3 x 2 tile
// problem it checks: each LOAD reads the right A and B tile rows in order
// and fills mat_in rows 0..N-1; one tile product per (i, j, k); acc_clear
// exactly on the first k tile; every output row address written once to
// the chosen decoder; done pulses and busy drops.
module tb_pu_controller;
  timeunit 1ns;
  timeprecision 1ps;
  import edgebert_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic finish_tb();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  function automatic real p2r(int e);
    real r = 1.0;
    for (int i = 0; i < e; i++) r = r * 2.0;
    for (int i = 0; i > e; i--) r = r / 2.0;
    return r;
  endfunction

  // reference decode of an FP8 code {s, e[3:0], m[2:0]} with exponent bias
  function automatic real fp8r(logic [7:0] v, int bias);
    if (v[6:3] == 4'd0) return 0.0;
    return (v[7] ? -1.0 : 1.0) * (1.0 + real'(v[2:0]) / 8.0) * p2r(int'(v[6:3]) - bias);
  endfunction

  function automatic real rabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // watchdog
  initial begin
    #(2000000);
    failures++;
    $display("FAIL: watchdog expired");
    finish_tb();
  end

  localparam int N = 16, AW = 13;
  logic rst_n, start, busy, done, dec0_re, dec1_re, dec0_rvalid, dec1_rvalid;
  logic [AW-1:0] dec0_raddr, dec1_raddr, enc_addr;
  logic ld0_valid, ld1_valid, dp_start, dp_out_valid, acc_valid, acc_clear, drain, row_valid, enc_valid, enc_dec;
  logic [3:0] ld0_idx, ld1_idx, drain_row;
  pu_cfg_t cfg;
  pu_controller #(.N(N), .AW(AW)) dut (.clk, .rst_n, .start, .cfg, .busy, .done,
    .dec0_re, .dec0_raddr, .dec1_re, .dec1_raddr, .dec0_rvalid, .dec1_rvalid,
    .ld0_valid, .ld0_idx, .ld1_valid, .ld1_idx, .dp_start, .dp_out_valid,
    .acc_valid, .acc_clear, .drain, .drain_row, .row_valid, .enc_valid, .enc_dec, .enc_addr);

  // decoder and datapath models
  logic [1:0] rv0, rv1;
  logic [AW-1:0] ra0 [2], ra1 [2];
  int dp_cnt;
  always_ff @(posedge clk) begin
    rv0 <= {rv0[0], dec0_re}; rv1 <= {rv1[0], dec1_re};
    ra0[0] <= dec0_raddr; ra0[1] <= ra0[0];
    ra1[0] <= dec1_raddr; ra1[1] <= ra1[0];
    row_valid <= drain;
    if (dp_start) dp_cnt <= N + 1;
    else if (dp_cnt > 0) dp_cnt <= dp_cnt - 1;
  end
  assign dec0_rvalid = rv0[1];
  assign dec1_rvalid = rv1[1];
  assign dp_out_valid = (dp_cnt == 1);

  localparam int MT = 2, NT = 3, KT = 2;
  int n_dp, n_acc, n_clear, n_enc, n_ld0, ld_err, n_done;
  int written [int];
  int ti, tj, tk;

  // scoreboard: track which tile the controller should be loading
  always @(posedge clk) if (rst_n) begin
    if (ld0_valid) begin
      automatic int base_a = 100 + ((ti * KT + tk) * N);
      automatic int base_b = 2000 + ((tj * KT + tk) * N);
      if (ra0[1] != AW'(base_a + int'(ld0_idx)) || ra1[1] != AW'(base_b + int'(ld1_idx)) || ld0_idx != ld1_idx)
        ld_err++;
      n_ld0++;
    end
    if (dp_start) n_dp++;
    if (acc_valid) begin
      n_acc++;
      if (acc_clear) n_clear++;
      if (acc_clear != (tk == 0)) ld_err++;
      if (tk == KT - 1) begin
        tk = 0;
      end else tk++;
    end
    if (enc_valid) begin
      n_enc++;
      if (!enc_dec) ld_err++;
      written[int'(enc_addr)] = 1;
      if (n_enc % N == 0) begin
        if (tj == NT - 1) begin tj = 0; ti++; end else tj++;
      end
    end
    if (done) n_done++;
  end

  initial begin
    rst_n = 0; start = 0; cfg = '0; dp_cnt = 0; rv0 = '0; rv1 = '0;
    n_dp = 0; n_acc = 0; n_clear = 0; n_enc = 0; n_ld0 = 0; ld_err = 0; n_done = 0; ti = 0; tj = 0; tk = 0;
    cfg.mt = 8'(MT); cfg.nt = 8'(NT); cfg.kt = 8'(KT);
    cfg.base_a = 13'd100; cfg.base_b = 13'd2000; cfg.base_c = 13'd4000; cfg.dest_dec = 1'b1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    start = 1;
    @(negedge clk);
    start = 0;
    chk(busy, "busy after start");
    wait (done);
    @(negedge clk);
    @(negedge clk);
    chk(!busy, "idle after done");
    chk(n_done == 1, "one done pulse");
    chk(n_dp == MT * NT * KT, $sformatf("%0d tile products", n_dp));
    chk(n_ld0 == MT * NT * KT * N, $sformatf("%0d rows loaded", n_ld0));
    chk(n_acc == MT * NT * KT, "accumulations");
    chk(n_clear == MT * NT, "accumulator clears");
    chk(n_enc == MT * NT * N, $sformatf("%0d rows written", n_enc));
    chk(ld_err == 0, $sformatf("%0d address/order errors", ld_err));
    for (int i = 0; i < MT; i++)
      for (int j = 0; j < NT; j++)
        for (int r = 0; r < N; r++)
          chk(written.exists(4000 + (i * NT + j) * N + r), $sformatf("row C(%0d,%0d)[%0d] written", i, j, r));
    finish_tb();
  end
endmodule
