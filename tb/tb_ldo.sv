// tb_ldo: self-checking test of the LDO behavioural model. The output
// starts at 0.5 V, ramps 25 mV per 1.9 ns to 500 + 25*code mV, clamps codes
// above 12 (0.8 V), and reports settled only at the target.
module tb_ldo;
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

  logic [3:0] code;
  logic [9:0] vdd_mv;
  logic settled;
  ldo dut (.code, .vdd_mv, .settled);
  initial begin
    code = 4'd0;
    #10;
    chk(vdd_mv == 10'd500 && settled, "0.5 V at code 0");
    code = 4'd12;
    #10;
    chk(!settled && vdd_mv > 10'd500 && vdd_mv < 10'd800, $sformatf("ramping: %0d mV", vdd_mv));
    #20;
    chk(vdd_mv == 10'd800 && settled, $sformatf("0.8 V reached: %0d mV", vdd_mv));
    code = 4'd15;
    #30;
    chk(vdd_mv == 10'd800, "codes above 12 clamp");
    code = 4'd4;
    #30;
    chk(vdd_mv == 10'd600 && settled, $sformatf("down to 0.6 V: %0d mV", vdd_mv));
    finish_tb();
  end
endmodule
