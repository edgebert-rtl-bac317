// tb_decoder_sram: self-checking test of the mask buffer and the N data
// banks of one decoder. Writes random entries at random addresses (the
// default 8192-entry depth), reads them back with one-cycle latency, and
// checks that a bank whose enable is low keeps its last output.
module tb_decoder_sram;
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
  logic we, mre;
  logic [AW-1:0] waddr, maddr, daddr;
  logic [N-1:0] wmask, rmask, bank_en;
  logic [N-1:0][7:0] wdata, rdata;
  decoder_sram #(.N(N)) dut (.clk, .we, .waddr, .wmask, .wdata, .mre, .maddr, .rmask, .daddr, .bank_en, .rdata);

  logic [AW-1:0] addrs [64];
  logic [N-1:0] masks [64];
  logic [N-1:0][7:0] datas [64];

  initial begin
    we = 0; mre = 0; waddr = '0; maddr = '0; daddr = '0; wmask = '0; wdata = '0; bank_en = '0;
    for (int i = 0; i < 64; i++) begin
      addrs[i] = AW'(i * 127 + $urandom_range(126));
      masks[i] = N'($urandom);
      for (int b = 0; b < N; b++) datas[i][b] = 8'($urandom);
    end
    @(negedge clk);
    for (int i = 0; i < 64; i++) begin
      we = 1; waddr = addrs[i]; wmask = masks[i]; wdata = datas[i];
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < 64; i++) begin
      mre = 1; maddr = addrs[i]; daddr = addrs[i]; bank_en = '1;
      @(negedge clk);
      chk(rmask == masks[i], $sformatf("mask %0d", i));
      chk(rdata == datas[i], $sformatf("data %0d", i));
    end
    // disabled banks hold their output
    mre = 0; bank_en = 16'h00ff; daddr = addrs[0];
    @(negedge clk);
    for (int b = 0; b < N; b++)
      chk(rdata[b] == ((b < 8) ? datas[0][b] : datas[63][b]), $sformatf("bank enable %0d", b));
    finish_tb();
  end
endmodule
