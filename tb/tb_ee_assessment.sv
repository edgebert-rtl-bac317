// tb_ee_assessment: self-checking test of the entropy-based early-exit unit.
// Random logits vectors: the entropy output must match
// H = ln(sum e^x) - sum x e^x / sum e^x computed in real numbers; the exit
// flag and irq follow H < E_T (cases chosen away from the threshold); in
// latency-aware mode layer 1 reads the predictor LUT at the index derived
// from H and raises pred_valid with the LUT's exit layer, and a later layer
// at or beyond the prediction exits even with high entropy.
module tb_ee_assessment;
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

  // memory models: decoder read latency 2, aux read latency 1
  localparam int N = 16, AW = 13;
  logic rst_n, start, busy, done;
  sfu_cfg_t cfg;
  logic [N-1:0][7:0]  mem0 [1024];
  logic [N-1:0][7:0]  mem1 [1024];
  logic [N-1:0][15:0] aux [1024];
  logic [N-1:0][7:0]  res [1024];
  logic [N-1:0][7:0] rd_vec, rd_vec1;
  logic [1:0] rv;
  logic [AW-1:0] ra [2], ra1 [2];
  logic rd_valid;
  logic aux_rvalid;
  logic [N-1:0][15:0] aux_rdata;
  int n_wr;
  task automatic go();
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
  endtask
  function automatic logic [7:0] rnd8(int elo, int ehi);
    logic [7:0] v = 8'($urandom);
    v[6:3] = 4'($urandom_range(ehi, elo));
    return v;
  endfunction

  logic rd_req, aux_re, exit_o, irq, pred_valid;
  logic [AW-1:0] rd_addr;
  logic [AUX_AW-1:0] aux_addr;
  q88_t entropy;
  logic [3:0] pred_layer;
  logic wr_valid;
  logic [AW-1:0] wr_addr;
  logic [N-1:0][7:0] wr_vec;
  assign wr_valid = 1'b0; assign wr_addr = '0; assign wr_vec = '0;
  ee_assessment #(.N(N), .AW(AW)) dut (.clk, .rst_n, .start, .cfg, .busy, .done, .rd_req, .rd_addr, .rd_valid, .rd_vec,
    .aux_re, .aux_addr, .aux_rvalid, .aux_rdata, .exit_o, .irq, .entropy, .pred_valid, .pred_layer);

  always_ff @(posedge clk) begin
    rv <= {rv[0], rd_req};
    ra[0] <= rd_addr; ra[1] <= ra[0];
    aux_rvalid <= aux_re;
    if (aux_re) aux_rdata <= aux[aux_addr];
    if (wr_valid) begin res[wr_addr[9:0]] <= wr_vec; n_wr <= n_wr + 1; end
  end
  assign rd_valid = rv[1];
  assign rd_vec = mem0[ra[1][9:0]];

  int n_irq, n_pred;
  always @(posedge clk) begin if (irq) n_irq++; if (pred_valid) n_pred++; end
  initial begin
    n_irq = 0; n_pred = 0;
    rst_n = 0; start = 0; cfg = '0; rv = '0; n_wr = 0; aux_rvalid = 0; aux_rdata = '0;
    for (int i = 0; i < 1024; i++) begin mem0[i] = '0; mem1[i] = '0; aux[i] = '0; res[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;

    for (int i = 0; i < 32; i++) begin aux[64 + i / N][i % N] = 16'(2 + i % 10); end
    cfg.op = SFU_OP_EE; cfg.bias_in = 6'sd8; cfg.aux_base = 10'd64; cfg.lut_shift = 4'd5; cfg.lut_len = 8'd32;
    for (int t = 0; t < 60; t++) begin
      automatic real mx = -1.0e9, s = 0.0, p = 0.0, hh;
      automatic int ncls = (t % 3 == 0) ? 2 : (t % 3 == 1) ? 3 : 16;
      automatic int irq0 = n_irq, pred0 = n_pred;
      for (int j = 0; j < N; j++) mem0[t][j] = rnd8(4, 11);
      for (int j = 0; j < ncls; j++) if (fp8r(mem0[t][j], 8) > mx) mx = fp8r(mem0[t][j], 8);
      for (int j = 0; j < ncls; j++) begin
        automatic real e = $exp(fp8r(mem0[t][j], 8) - mx);
        s += e; p += (fp8r(mem0[t][j], 8) - mx) * e;
      end
      hh = $ln(s) - p / s;
      cfg.src0 = 13'(t); cfg.classes = 5'(ncls);
      cfg.lai = (t >= 40); cfg.layer = (t >= 50) ? 4'd12 : 4'd1;
      cfg.threshold = q88_t'((t % 2 == 0) ? int'((hh + 0.15) * 256.0) : int'((hh - 0.15) * 256.0));
      go();
      chk(rabs(real'(entropy) / 256.0 - hh) <= 0.06, $sformatf("entropy %f vs %f", real'(entropy) / 256.0, hh));
      if (t >= 50) begin
        chk(exit_o, "latency-aware exit at or beyond the predicted layer");
      end else begin
        chk(exit_o == (t % 2 == 0), $sformatf("exit decision H=%f", hh));
      end
      chk((n_irq - irq0) == int'(exit_o), "irq pulse on exit");
      if (t >= 40 && t < 50 && t % 2 == 1) begin
        automatic int idx = int'(entropy) >> 5;
        if (idx > 31) idx = 31;
        chk(n_pred - pred0 == 1, "prediction after layer 1");
        chk(pred_layer == 4'(2 + idx % 10), $sformatf("predicted layer %0d, LUT index %0d", pred_layer, idx));
      end
    end
    finish_tb();
  end
endmodule
