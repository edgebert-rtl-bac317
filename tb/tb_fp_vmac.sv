// tb_fp_vmac: self-checking test of the FP8 vector MAC.
// Drives random FP8 vectors (about a quarter of the elements zero, as the
// pruned weights are) with random per-operand exponent biases and compares
// the Q16.16 dot product with a real-number model: each product is exact,
// and the hardware may lose at most one LSB per element on right shifts.
// Also checks that an all-maximum input saturates and that zero operands
// give zero. Combinational DUT: values are sampled 1 ns after driving.
module tb_fp_vmac;
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
  logic [N-1:0][7:0] in0, in1;
  logic signed [6:0] shift_adj;
  logic signed [31:0] sum;
  fp_vmac #(.N(N)) dut (.in0, .in1, .shift_adj, .sum);

  function automatic logic [7:0] rnd_fp8(int emax);
    logic [7:0] v;
    v = 8'($urandom);
    if ($urandom_range(3) == 0) v[6:3] = 4'd0;
    else v[6:3] = 4'($urandom_range(emax, 1));
    return v;
  endfunction

  initial begin
    in0 = '0; in1 = '0; shift_adj = '0;
    for (int t = 0; t < 400; t++) begin
      automatic int b0 = $urandom_range(9, 7);
      automatic int b1 = $urandom_range(9, 7);
      automatic real r = 0.0;
      for (int k = 0; k < N; k++) begin
        in0[k] = rnd_fp8(11);
        in1[k] = rnd_fp8(11);
        r += fp8r(in0[k], b0) * fp8r(in1[k], b1);
      end
      shift_adj = 7'(10 - b0 - b1);
      #1;
      chk(rabs(real'(sum) - r * 65536.0) <= real'(N + 1),
          $sformatf("dot product %0d vs %f", sum, r * 65536.0));
    end
    // saturation
    for (int k = 0; k < N; k++) begin in0[k] = 8'h7f; in1[k] = 8'h7f; end
    shift_adj = 7'sd10;
    #1 chk(sum == 32'sh7fff_ffff, "positive saturation");
    for (int k = 0; k < N; k++) in1[k] = 8'hff;
    #1 chk(sum == 32'sh8000_0000, "negative saturation");
    // zero operand (zero exponent) contributes nothing
    for (int k = 0; k < N; k++) in1[k] = 8'h07;
    #1 chk(sum == 0, "zero exponent gives zero");
    finish_tb();
  end
endmodule
