// ldo: behavioural model of the accelerator's fast-switching digital LDO
// regulator; not synthesizable logic.
//
// The real regulator is an array of standard power-header cells spread over
// the accelerator, switched by a control loop; it regulates VDD between
// 0.50 V and 0.80 V in 25 mV steps and slews at 3.8 ns per 50 mV (both the
// paper's numbers). This model keeps the real part's digital interface, a
// 4-bit target code (VDD = 500 mV + 25 mV * code, codes above 12 clamp to
// 0.80 V), and models the output as an integer millivolt value that moves
// one 25 mV step every STEP_PS picoseconds toward the target. `settled` is
// high while the output equals the target.
module ldo #(
  parameter int STEP_MV = 25,
  parameter int STEP_PS = 1900,       // 3.8 ns / 50 mV
  parameter int MAX_CODE = 12
) (
  input  logic [3:0] code,
  output logic [9:0] vdd_mv,
  output logic       settled
);
  timeunit 1ps;
  timeprecision 1ps;

  logic [9:0] target;
  assign target  = 10'(500 + STEP_MV * ((int'(code) > MAX_CODE) ? MAX_CODE : int'(code)));
  assign settled = (vdd_mv == target);

  initial vdd_mv = 10'd500;

  always begin
    #(STEP_PS);
    if (vdd_mv < target)      vdd_mv = vdd_mv + 10'(STEP_MV);
    else if (vdd_mv > target) vdd_mv = vdd_mv - 10'(STEP_MV);
  end
endmodule
