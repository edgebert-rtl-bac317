// tb_activation_unit: self-checking test of the ReLU/GELU activation unit.
// Random FP8 rows pass through each mode. Pass-through and ReLU are checked
// bit-exactly; GELU is checked against a real-number model
// x * clamp(0.5 + 0.28367 x, 0, 1) (the sigmoid approximation of GELU),
// quantized to FP8, within the FP8 mantissa step plus the Q8.8 rounding.
// Combinational DUT.
module tb_activation_unit;
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

  localparam int N = 16;
  act_mode_e mode;
  ebias_t bias;
  logic [N-1:0][7:0] in_row, out_row;
  activation_unit #(.N(N)) dut (.mode, .bias, .in_row, .out_row);

  initial begin
    mode = ACT_NONE; bias = 6'sd8; in_row = '0;
    for (int t = 0; t < 300; t++) begin
      for (int j = 0; j < N; j++) begin
        in_row[j] = 8'($urandom);
        in_row[j][6:3] = 4'($urandom_range(13, 0));
      end
      mode = ACT_NONE; #1;
      chk(out_row == in_row, "no activation passes the row");
      mode = ACT_RELU; #1;
      for (int j = 0; j < N; j++)
        chk(out_row[j] == (in_row[j][7] ? 8'h00 : in_row[j]), $sformatf("relu %h -> %h", in_row[j], out_row[j]));
      mode = ACT_GELU; #1;
      for (int j = 0; j < N; j++) begin
        automatic real x = fp8r(in_row[j], 8);
        automatic real h = 0.5 + 0.28367 * x;
        automatic real y;
        if (h < 0.0) h = 0.0;
        if (h > 1.0) h = 1.0;
        y = x * h;
        chk(rabs(fp8r(out_row[j], 8) - y) <= 0.13 * rabs(y) + 0.03,
            $sformatf("gelu(%f) = %f, hardware %f", x, y, fp8r(out_row[j], 8)));
      end
    end
    finish_tb();
  end
endmodule
