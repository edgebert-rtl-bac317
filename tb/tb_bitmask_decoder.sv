// tb_bitmask_decoder: self-checking test of bit-mask decompression.
// A reference encoder in the testbench packs random sparse FP8 vectors
// (mask bit per non-zero, non-zeros in banks 0..popcount-1) and writes them.
// Back-to-back reads must return the dense vectors with the 2-cycle latency
// (cycle 0 mask read, cycle 1 bank enables, cycle 2 output), one per cycle.
module tb_bitmask_decoder;
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
  logic we, re, rvalid;
  logic [AW-1:0] waddr, raddr;
  logic [N-1:0] wmask, rmask;
  logic [N-1:0][7:0] wdata, rvec;
  bitmask_decoder #(.N(N)) dut (.clk, .rst_n, .we, .waddr, .wmask, .wdata, .re, .raddr, .rvalid, .rvec, .rmask);
  logic rst_n;

  logic [N-1:0][7:0] dense [40];
  int nread, lat;

  initial begin
    rst_n = 0; we = 0; re = 0; waddr = '0; raddr = '0; wmask = '0; wdata = '0;
    for (int i = 0; i < 40; i++)
      for (int j = 0; j < N; j++) begin
        dense[i][j] = 8'($urandom);
        if ($urandom_range(99) < 60) dense[i][j][6:3] = 4'd0;
        if (dense[i][j][6:3] == 4'd0) dense[i][j] = 8'h00;
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 40; i++) begin
      automatic int idx = 0;
      we = 1; waddr = AW'(1000 + i); wmask = '0; wdata = '0;
      for (int j = 0; j < N; j++)
        if (dense[i][j] != 8'h00) begin wmask[j] = 1'b1; wdata[idx] = dense[i][j]; idx++; end
      @(negedge clk);
    end
    we = 0;
    // single read: latency
    re = 1; raddr = AW'(1000);
    @(negedge clk); re = 0;
    lat = 1;
    while (!rvalid && lat < 10) begin @(negedge clk); lat++; end
    chk(lat == 2, $sformatf("latency %0d, expected 2", lat));
    chk(rvec == dense[0], "first vector");
    // streamed reads, one per cycle
    nread = 0;
    for (int i = 0; i < 41; i++) begin
      re = (i < 40); raddr = AW'(1000 + i);
      @(negedge clk);
      if (i >= 1) begin
        chk(rvalid, "stream valid");
        chk(rvec == dense[i - 1], $sformatf("vector %0d", i - 1));
        for (int j = 0; j < N; j++) chk(rmask[j] == (dense[i - 1][j] != 8'h00), "mask out");
        nread++;
      end
    end
    chk(nread == 40, "all vectors streamed");
    finish_tb();
  end
endmodule
