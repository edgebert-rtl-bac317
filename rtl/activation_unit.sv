// activation_unit: element-wise non-linearity on one FP8 row.
//
// mode ACT_NONE passes the row through, ACT_RELU zeroes negative values and
// ACT_GELU applies GELU approximated as x * clamp(0.5 + 0.28367*x, 0, 1)
// (x times a hard sigmoid of 1.702x), evaluated in Q8.8 fixed point and
// re-quantized to FP8 with the same exponent bias. The paper only names an
// activation unit at the accumulator output and shows GELU in the
// feed-forward network; the approximation and the modes are this design's
// choice. Purely combinational.
module activation_unit
  import edgebert_pkg::*;
#(
  parameter int N = N_DEF
) (
  input  act_mode_e        mode,
  input  ebias_t           bias,
  input  logic [N-1:0][7:0] in_row,
  output logic [N-1:0][7:0] out_row
);
  timeunit 1ns;
  timeprecision 1ps;
  localparam int K_Q16 = 18591;   // 1.702/6 * 2^16

  always_comb begin
    for (int j = 0; j < N; j++) begin
      automatic q88_t x = sat16(fp8_to_fix(in_row[j], SFU_FRAC, bias));
      automatic logic signed [31:0] h;
      automatic logic signed [31:0] y;
      unique case (mode)
        ACT_RELU: out_row[j] = in_row[j][7] ? 8'h00 : in_row[j];
        ACT_GELU: begin
          h = 32'sd128 + ((32'(x) * K_Q16) >>> 16);
          if (h < 0)   h = 0;
          if (h > 256) h = 256;
          y = (32'(x) * h) >>> 8;
          out_row[j] = fix_to_fp8(y, SFU_FRAC, bias);
        end
        default:  out_row[j] = in_row[j];
      endcase
    end
  end
endmodule
