// tb_sfu: self-checking test of the whole special function unit: the
// controller, the four compute units, the aux buffer and the DVFS
// controller behind the shared decoder ports. Decoders are modelled as two
// arrays with 2-cycle reads. The sequence: residual add (values checked,
// written to decoder 1); an early-exit check at layer 1 in latency-aware
// mode that predicts an exit layer from the LUT and makes the DVFS
// controller scale V/F (done only after the search); an exit at the
// predicted layer raising irq; a softmax on a null head that is skipped
// and zero-fills the context; a softmax on a live head; standby.
module tb_sfu;
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
    #(3000000);
    failures++;
    $display("FAIL: watchdog expired");
    finish_tb();
  end

  localparam int N = 16, AW = 13;
  logic rst_n, start, busy, done;
  sfu_cfg_t cfg;
  logic dec0_re, dec1_re, wr_valid, wr_dec, aux_we, irq, ee_exit, head_skipped;
  logic [AW-1:0] dec0_raddr, dec1_raddr, wr_addr;
  logic [N-1:0][7:0] dec0_rvec, dec1_rvec, wr_vec;
  logic dec0_rvalid, dec1_rvalid;
  logic [9:0] aux_waddr, dvfs_lut_base;
  logic [3:0] aux_wlane, pred_layer, ldo_code;
  logic [15:0] aux_wdata;
  q88_t entropy;
  logic [31:0] skip_count, cycles_per_layer, scale_count;
  logic wake, sentence_done, standby, us_tick, pll_locked, vf_ready;
  logic [19:0] t_target_us;
  logic [7:0] dvfs_lut_len;
  logic [11:0] pll_freq_mhz;
  logic [1:0] dvfs_state;
  sfu #(.N(N), .AW(AW)) dut (.clk, .rst_n, .start, .cfg, .busy, .done,
    .dec0_re, .dec0_raddr, .dec1_re, .dec1_raddr, .dec0_rvalid, .dec0_rvec, .dec1_rvalid, .dec1_rvec,
    .wr_valid, .wr_dec, .wr_addr, .wr_vec, .aux_we, .aux_waddr, .aux_wlane, .aux_wdata,
    .irq, .ee_exit, .entropy, .pred_layer, .head_skipped, .skip_count,
    .wake, .sentence_done, .standby, .us_tick, .t_target_us, .cycles_per_layer, .dvfs_lut_base, .dvfs_lut_len,
    .pll_locked, .ldo_code, .pll_freq_mhz, .vf_ready, .dvfs_state, .scale_count);

  logic [N-1:0][7:0] mem [2][1024];
  logic [N-1:0][7:0] res [2][1024];
  logic [1:0] v0, v1;
  logic [AW-1:0] a0 [2], a1 [2];
  int n_wr [2], n_irq;
  always_ff @(posedge clk) begin
    v0 <= {v0[0], dec0_re}; v1 <= {v1[0], dec1_re};
    a0[0] <= dec0_raddr; a0[1] <= a0[0]; a1[0] <= dec1_raddr; a1[1] <= a1[0];
    if (wr_valid && rst_n) begin res[wr_dec][wr_addr[9:0]] <= wr_vec; n_wr[wr_dec] <= n_wr[wr_dec] + 1; end
    if (irq && rst_n) n_irq <= n_irq + 1;
  end
  assign dec0_rvalid = v0[1];
  assign dec1_rvalid = v1[1];
  assign dec0_rvec = mem[0][a0[1][9:0]];
  assign dec1_rvec = mem[1][a1[1][9:0]];

  task automatic aux_put(int word, int lane, int val);
    aux_we = 1; aux_waddr = 10'(word); aux_wlane = 4'(lane); aux_wdata = 16'(val);
    @(negedge clk);
    aux_we = 0;
  endtask

  task automatic run();
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    int sc0;
    rst_n = 0; start = 0; cfg = '0; aux_we = 0; aux_waddr = '0; aux_wlane = '0; aux_wdata = '0;
    wake = 0; sentence_done = 0; standby = 0; us_tick = 0; pll_locked = 1;
    t_target_us = 20'd50; cycles_per_layer = 32'd2000; dvfs_lut_base = 10'd200; dvfs_lut_len = 8'd16;
    v0 = '0; v1 = '0; n_wr[0] = 0; n_wr[1] = 0; n_irq = 0;
    for (int d = 0; d < 2; d++) for (int i = 0; i < 1024; i++) begin mem[d][i] = '0; res[d][i] = '0; end
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < N; j++) begin
        mem[0][i][j] = {1'($urandom), 4'($urandom_range(10, 5)), 3'($urandom)};
        mem[1][i][j] = {1'($urandom), 4'($urandom_range(10, 5)), 3'($urandom)};
      end
    for (int j = 0; j < N; j++) mem[0][20][j] = (j < 4) ? {1'b0, 4'd8, 3'(j)} : 8'h00;  // flat logits
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) aux_put(100 + i / N, i % N, 6);                      // EE LUT: exit at layer 6
    for (int i = 0; i < 16; i++) aux_put(200 + i / N, i % N, {4'(i / 2 + 2), 12'(100 + 60 * i)});  // V/F LUT
    aux_put(300 + 2, 5, 256);                                                       // live head span mask
    wake = 1; @(negedge clk); wake = 0;
    repeat (105) @(negedge clk);
    chk(vf_ready && ldo_code == 12 && pll_freq_mhz == 1000, "nominal V/F after wake");

    // residual add
    cfg.op = SFU_OP_ADD; cfg.src0 = 13'd0; cfg.src1 = 13'd0; cfg.dst = 13'd500; cfg.dst_dec = 1'b1;
    cfg.rows = 8'd1; cfg.row_vecs = 8'd8; cfg.bias_in = 6'sd8; cfg.bias_out = 6'sd8;
    run();
    chk(n_wr[1] == 8, "add wrote 8 vectors to decoder 1");
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < N; j++) begin
        automatic real x = fp8r(mem[0][i][j], 8) + fp8r(mem[1][i][j], 8);
        chk(rabs(fp8r(res[1][500 + i][j], 8) - x) <= 0.126 * rabs(x) + 0.02, "add value");
      end

    // early-exit check, layer 1, latency-aware: no exit, prediction, DVFS scaling
    sc0 = scale_count;
    cfg = '0; cfg.op = SFU_OP_EE; cfg.src0 = 13'd20; cfg.bias_in = 6'sd8; cfg.classes = 5'd4;
    cfg.threshold = 16'd0; cfg.layer = 4'd1; cfg.lai = 1'b1; cfg.aux_base = 10'd100; cfg.lut_shift = 4'd6;
    cfg.lut_len = 8'd16;
    run();
    chk(n_irq == 0 && !ee_exit, "no exit at layer 1");
    chk(entropy > 16'd300 && entropy < 16'd360, $sformatf("entropy of 4 near-equal logits %0d (ln 4 = 355)", entropy));
    chk(pred_layer == 4'd6, "predicted exit layer");
    chk(scale_count == sc0 + 1 && dvfs_state == 2'd3, "DVFS scaled");
    // 5 remaining layers x 2000 cycles in 50 us -> 200 MHz -> LUT entry 2 (220 MHz)
    chk(pll_freq_mhz == 12'd220 && ldo_code == 4'd3, $sformatf("V/F %0d MHz code %0d", pll_freq_mhz, ldo_code));

    // layer 6 exits
    cfg.layer = 4'd6;
    run();
    chk(n_irq == 1 && ee_exit, "exit at the predicted layer raises irq");

    // softmax on a null head
    cfg = '0; cfg.op = SFU_OP_SOFTMAX; cfg.aux_base = 10'd400; cfg.zero_dst = 13'd600; cfg.zero_len = 13'd5;
    cfg.zero_dec = 1'b0; cfg.rows = 8'd1; cfg.row_vecs = 8'd4; cfg.dst = 13'd700; cfg.bias_in = 6'sd8; cfg.bias_out = 6'sd10;
    for (int w = 400; w < 408; w++) for (int l = 0; l < N; l++) aux_put(w, l, 0);   // all-zero span mask
    for (int i = 600; i < 605; i++) res[0][i] = '1;
    run();
    chk(head_skipped && skip_count == 1, "null head skipped");
    chk(n_wr[0] == 5, $sformatf("%0d zero vectors", n_wr[0]));
    for (int i = 600; i < 605; i++) chk(res[0][i] == '0, "context zeroed");
    // live head
    cfg.aux_base = 10'd300; cfg.src0 = 13'd0;
    run();
    chk(!head_skipped && skip_count == 1 && n_wr[0] == 9, "live head runs the softmax");
    sentence_done = 1; @(negedge clk); sentence_done = 0;
    chk(pll_freq_mhz == 12'd1000, "nominal after the sentence");
    standby = 1; @(negedge clk); standby = 0;
    chk(dvfs_state == 2'd0 && ldo_code == 4'd0, "standby");
    finish_tb();
  end
endmodule
