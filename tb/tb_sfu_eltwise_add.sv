// tb_sfu_eltwise_add: self-checking test of the residual (element-wise)
// adder. Two random FP8 matrices sit in decoder models (2-cycle reads); the
// unit must write their sum, quantized with the output bias, to every
// destination vector once, and finish in about one vector per cycle.
module tb_sfu_eltwise_add;
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
    #(1000000);
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

  logic rd_req, wr_valid;
  logic [AW-1:0] rd_addr0, rd_addr1, wr_addr;
  logic [N-1:0][7:0] wr_vec;
  sfu_eltwise_add #(.N(N), .AW(AW)) dut (.clk, .rst_n, .start, .cfg, .busy, .done, .rd_req, .rd_addr0, .rd_addr1,
    .rd_valid, .rd_vec0(rd_vec), .rd_vec1, .wr_valid, .wr_addr, .wr_vec);

  always_ff @(posedge clk) begin
    rv <= {rv[0], rd_req};
    ra[0] <= rd_addr0; ra[1] <= ra[0];
    ra1[0] <= rd_addr1; ra1[1] <= ra1[0];
    if (wr_valid) begin res[wr_addr[9:0]] <= wr_vec; n_wr <= n_wr + 1; end
  end
  assign rd_valid = rv[1];
  assign rd_vec = mem0[ra[1][9:0]];
  assign rd_vec1 = mem1[ra1[1][9:0]];

  int t0;
  initial begin
    rst_n = 0; start = 0; cfg = '0; rv = '0; n_wr = 0; aux_rvalid = 0; aux_rdata = '0;
    for (int i = 0; i < 1024; i++) begin mem0[i] = '0; mem1[i] = '0; aux[i] = '0; res[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;

    for (int i = 0; i < 48; i++)
      for (int j = 0; j < N; j++) begin mem0[100 + i][j] = rnd8(3, 11); mem1[300 + i][j] = rnd8(3, 11); end
    cfg.op = SFU_OP_ADD; cfg.src0 = 13'd100; cfg.src1 = 13'd300; cfg.dst = 13'd600;
    cfg.rows = 8'd4; cfg.row_vecs = 8'd12; cfg.bias_in = 6'sd8; cfg.bias_out = 6'sd7;
    t0 = 0;
    fork
      go();
      begin @(posedge start); while (!done) begin @(posedge clk); t0++; end end
    join
    chk(n_wr == 48, $sformatf("%0d vectors written", n_wr));
    chk(t0 <= 48 + 6, $sformatf("%0d cycles for 48 vectors", t0));
    for (int i = 0; i < 48; i++)
      for (int j = 0; j < N; j++) begin
        automatic real x = fp8r(mem0[100 + i][j], 8) + fp8r(mem1[300 + i][j], 8);
        if (x > 127.99) x = 127.99;
        if (x < -128.0) x = -128.0;
        chk(rabs(fp8r(res[600 + i][j], 7) - x) <= 0.126 * rabs(x) + 0.02,
            $sformatf("sum[%0d][%0d] %f vs %f", i, j, fp8r(res[600 + i][j], 7), x));
      end
    finish_tb();
  end
endmodule
