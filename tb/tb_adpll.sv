// tb_adpll: self-checking test of the ADPLL behavioural model. The output
// clock period must match the requested frequency (1000, 500, 200 MHz),
// lock must rise 50 ns after a frequency change and drop at the change, and
// 0 MHz stops the clock.
module tb_adpll;
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
    #(100000);
    failures++;
    $display("FAIL: watchdog expired");
    finish_tb();
  end

  logic [11:0] freq_mhz;
  logic clk_out, locked;
  adpll dut (.freq_mhz, .clk_out, .locked);
  task automatic measure(int mhz);
    realtime t0, t1;
    freq_mhz = 12'(mhz);
    #1;
    chk(!locked, "lock drops on a change");
    #45;
    chk(!locked, "not locked before 50 ns");
    #10;
    chk(locked, "locked after 50 ns");
    @(posedge clk_out); t0 = $realtime;
    repeat (10) @(posedge clk_out);
    t1 = $realtime;
    chk(((t1 - t0) / 10.0 - 1000.0 / mhz) < 0.01 && ((t1 - t0) / 10.0 - 1000.0 / mhz) > -0.01,
        $sformatf("%0d MHz: period %f ns", mhz, (t1 - t0) / 10.0));
  endtask
  int edges;
  always @(posedge clk_out) edges++;
  initial begin
    edges = 0;
    freq_mhz = 12'd0;
    #10;
    measure(1000);
    measure(500);
    measure(200);
    freq_mhz = 12'd0;
    #10 edges = 0;
    #100;
    chk(edges == 0 && !locked, "0 MHz stops the clock");
    finish_tb();
  end
endmodule
