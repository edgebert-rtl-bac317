// tb_sfu_softmax: self-checking test of softmax with attention-span
// masking. Random score rows (T = 64 tokens) and a random span mask m(d)
// in the aux model; each output must equal exp(a_j - max) / sum * m(|i-j|)
// computed in real numbers, within FP8 quantization and the table-based
// exp/ln error. Also checks the three-pass read count.
module tb_sfu_softmax;
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
  sfu_softmax #(.N(N), .AW(AW)) dut (.clk, .rst_n, .start, .cfg, .busy, .done, .rd_req, .rd_addr, .rd_valid, .rd_vec,
    .aux_re, .aux_addr, .aux_rvalid, .aux_rdata, .wr_valid, .wr_addr, .wr_vec);

  always_ff @(posedge clk) begin
    rv <= {rv[0], rd_req};
    ra[0] <= rd_addr; ra[1] <= ra[0];
    aux_rvalid <= aux_re;
    if (aux_re) aux_rdata <= aux[aux_addr];
    if (wr_valid && rst_n) begin res[wr_addr[9:0]] <= wr_vec; n_wr <= n_wr + 1; end
  end
  assign rd_valid = rv[1];
  assign rd_vec = mem0[ra[1][9:0]];

  localparam int RV = 4, ROWS = 5, T_MAX = 128;
  int n_rd;
  real m [T_MAX];
  always @(posedge clk) if (rd_req) n_rd++;
  initial begin
    n_rd = 0;
    rst_n = 0; start = 0; cfg = '0; rv = '0; n_wr = 0; aux_rvalid = 0; aux_rdata = '0;
    for (int i = 0; i < 1024; i++) begin mem0[i] = '0; mem1[i] = '0; aux[i] = '0; res[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;

    for (int i = 0; i < ROWS * RV; i++)
      for (int j = 0; j < N; j++) mem0[i][j] = rnd8(4, 10);
    for (int d = 0; d < T_MAX; d++) begin
      automatic int q = (d < 20) ? 256 : (d < 40) ? $urandom_range(256, 0) : 0;
      aux[8 + d / N][d % N] = 16'(q);
      m[d] = real'(q) / 256.0;
    end
    cfg.op = SFU_OP_SOFTMAX; cfg.src0 = 13'd0; cfg.dst = 13'd700; cfg.rows = 8'(ROWS); cfg.row_vecs = 8'(RV);
    cfg.bias_in = 6'sd8; cfg.bias_out = 6'sd10; cfg.aux_base = 10'd8; cfg.row0 = 8'd30;
    go();
    chk(n_wr == ROWS * RV, $sformatf("%0d vectors written", n_wr));
    chk(n_rd == 3 * ROWS * RV, $sformatf("%0d reads, expected three passes", n_rd));
    for (int r = 0; r < ROWS; r++) begin
      automatic real mx = -1.0e9, s = 0.0;
      for (int j = 0; j < RV * N; j++) if (fp8r(mem0[r * RV + j / N][j % N], 8) > mx) mx = fp8r(mem0[r * RV + j / N][j % N], 8);
      for (int j = 0; j < RV * N; j++) s += $exp(fp8r(mem0[r * RV + j / N][j % N], 8) - mx);
      for (int j = 0; j < RV * N; j++) begin
        automatic int dd = (30 + r > j) ? 30 + r - j : j - 30 - r;
        automatic real p = $exp(fp8r(mem0[r * RV + j / N][j % N], 8) - mx) / s * m[dd];
        automatic real h = fp8r(res[700 + r * RV + j / N][j % N], 10);
        chk(rabs(h - p) <= 0.15 * p + 0.004, $sformatf("row %0d col %0d: %f vs %f", r, j, h, p));
      end
    end
    finish_tb();
  end
endmodule
