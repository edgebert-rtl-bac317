// fp_vmac: FP8 vector multiply-accumulate (one "VMAC" of the PU datapath).
//
// Computes sum_k in0[k]*in1[k] over N lanes. Each lane adds the two 4-bit
// exponents, multiplies the two 4-bit significands (hidden one included) and
// shifts the 8-bit product into a 32-bit fixed-point word with 16 fractional
// bits; an adder tree then sums the N lanes. This lane structure (exponent
// add, mantissa multiply, shift, adder tree) and the 32-bit fixed-point
// accumulation follow the paper; the binary point, the truncation of bits
// shifted out and the saturation of the sum are this design's choices.
//
// shift_adj = ACC_FRAC - 6 - bias0 - bias1 folds both per-layer exponent
// biases into one shift offset. Purely combinational.
module fp_vmac #(
  parameter int N = edgebert_pkg::N_DEF
) (
  input  logic [N-1:0][7:0]   in0,
  input  logic [N-1:0][7:0]   in1,
  input  logic signed [6:0]   shift_adj,
  output logic signed [31:0]  sum
);
  timeunit 1ns;
  timeprecision 1ps;
  logic signed [31:0] prod [N];
  logic signed [39:0] total;

  always_comb begin
    for (int k = 0; k < N; k++) begin
      automatic logic [3:0] e0 = in0[k][6:3];
      automatic logic [3:0] e1 = in1[k][6:3];
      automatic logic [7:0] pm = {1'b1, in0[k][2:0]} * {1'b1, in1[k][2:0]};
      automatic int sh = int'(e0) + int'(e1) + int'(shift_adj);
      automatic logic [31:0] mag;
      if (e0 == 0 || e1 == 0)   mag = '0;
      else if (sh > 23)         mag = 32'h7fff_ffff;
      else if (sh >= 0)         mag = 32'(pm) << sh;
      else if (sh > -8)         mag = 32'(pm) >> (-sh);
      else                      mag = '0;
      prod[k] = (in0[k][7] ^ in1[k][7]) ? -$signed(mag) : $signed(mag);
    end
    total = '0;
    for (int k = 0; k < N; k++) total += 40'(prod[k]);
    if (total > 40'sh00_7fff_ffff)       sum = 32'sh7fff_ffff;
    else if (total < -40'sh00_8000_0000) sum = 32'sh8000_0000;
    else                                  sum = total[31:0];
  end
endmodule
