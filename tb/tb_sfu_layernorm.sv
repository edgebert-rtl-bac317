// tb_sfu_layernorm: self-checking test of layer normalization.
// Rows of D = 64 random FP8 elements, random gamma/beta (Q8.8) in the aux
// model. Each output must match (x - mean)/sqrt(var) * gamma + beta computed
// in real numbers, within FP8 quantization plus the error of the table-based
// reciprocal square root.
module tb_sfu_layernorm;
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

  logic rd_req, wr_valid, aux_re;
  logic [AW-1:0] rd_addr, wr_addr;
  logic [AUX_AW-1:0] aux_addr;
  logic [N-1:0][7:0] wr_vec;
  sfu_layernorm #(.N(N), .AW(AW)) dut (.clk, .rst_n, .start, .cfg, .busy, .done, .rd_req, .rd_addr, .rd_valid, .rd_vec,
    .aux_re, .aux_addr, .aux_rvalid, .aux_rdata, .wr_valid, .wr_addr, .wr_vec);

  always_ff @(posedge clk) begin
    rv <= {rv[0], rd_req};
    ra[0] <= rd_addr; ra[1] <= ra[0];
    aux_rvalid <= aux_re;
    if (aux_re) aux_rdata <= aux[aux_addr];
    if (wr_valid) begin res[wr_addr[9:0]] <= wr_vec; n_wr <= n_wr + 1; end
  end
  assign rd_valid = rv[1];
  assign rd_vec = mem0[ra[1][9:0]];

  localparam int RV = 4, ROWS = 3;
  initial begin
    rst_n = 0; start = 0; cfg = '0; rv = '0; n_wr = 0; aux_rvalid = 0; aux_rdata = '0;
    for (int i = 0; i < 1024; i++) begin mem0[i] = '0; mem1[i] = '0; aux[i] = '0; res[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;

    for (int i = 0; i < ROWS * RV; i++)
      for (int j = 0; j < N; j++) mem0[i][j] = rnd8(6, 10);
    for (int v = 0; v < RV; v++)
      for (int j = 0; j < N; j++) begin
        aux[40 + 2 * v][j]     = 16'($urandom_range(384, 128));                 // gamma 0.5 .. 1.5
        aux[40 + 2 * v + 1][j] = 16'($signed(16'($urandom_range(256, 0)) - 16'sd128)); // beta -0.5 .. 0.5
      end
    cfg.op = SFU_OP_LNORM; cfg.src0 = 13'd0; cfg.dst = 13'd500; cfg.rows = 8'(ROWS); cfg.row_vecs = 8'(RV);
    cfg.bias_in = 6'sd8; cfg.bias_out = 6'sd8; cfg.inv_len = 16'd1024; cfg.aux_base = 10'd40;
    go();
    chk(n_wr == ROWS * RV, $sformatf("%0d vectors written", n_wr));
    for (int r = 0; r < ROWS; r++) begin
      automatic real s = 0.0, s2 = 0.0, mean, sd;
      for (int v = 0; v < RV; v++)
        for (int j = 0; j < N; j++) begin
          s  += fp8r(mem0[r * RV + v][j], 8);
          s2 += fp8r(mem0[r * RV + v][j], 8) ** 2;
        end
      mean = s / (RV * N);
      sd = (s2 / (RV * N) - mean * mean) ** 0.5;
      for (int v = 0; v < RV; v++)
        for (int j = 0; j < N; j++) begin
          automatic real g = real'($signed(aux[40 + 2 * v][j])) / 256.0;
          automatic real b = real'($signed(aux[40 + 2 * v + 1][j])) / 256.0;
          automatic real y = (fp8r(mem0[r * RV + v][j], 8) - mean) / sd * g + b;
          automatic real h = fp8r(res[500 + r * RV + v][j], 8);
          chk(rabs(h - y) <= 0.15 * rabs(y) + 0.06, $sformatf("row %0d elem %0d: %f vs %f", r, v * N + j, h, y));
        end
    end
    finish_tb();
  end
endmodule
