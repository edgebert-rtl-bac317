// tb_aux_buffer: self-checking test of the SFU auxiliary buffer (32 KB,
// 1024 words of N 16-bit lanes). Lane writes to random words, then word
// reads with one-cycle latency must return every lane written.
module tb_aux_buffer;
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

  localparam int N = 16, AW = 10;
  logic rst_n, we, re, rvalid;
  logic [AW-1:0] waddr, raddr;
  logic [3:0] wlane;
  logic [15:0] wdata;
  logic [N-1:0][15:0] rdata;
  aux_buffer #(.N(N)) dut (.clk, .rst_n, .we, .waddr, .wlane, .wdata, .re, .raddr, .rvalid, .rdata);

  logic [N-1:0][15:0] ref_w [16];

  initial begin
    rst_n = 0; we = 0; re = 0; waddr = '0; raddr = '0; wlane = '0; wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < 16; w++)
      for (int l = 0; l < N; l++) begin
        ref_w[w][l] = 16'($urandom);
        we = 1; waddr = AW'(w * 64 + 3); wlane = 4'(l); wdata = ref_w[w][l];
        @(negedge clk);
      end
    we = 0;
    for (int w = 0; w < 16; w++) begin
      re = 1; raddr = AW'(w * 64 + 3);
      @(negedge clk);
      chk(rvalid, "read valid");
      chk(rdata == ref_w[w], $sformatf("word %0d", w));
    end
    re = 0;
    @(negedge clk);
    chk(!rvalid, "valid drops");
    finish_tb();
  end
endmodule
