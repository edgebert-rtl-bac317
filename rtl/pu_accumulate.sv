// pu_accumulate: the PU accumulator (mat_accum), FP8 quantizer and
// activation unit.
//
// acc_valid adds a finished datapath product mat_out into mat_accum
// (acc_clear overwrites it instead, for the first reduction tile), with
// 32-bit saturating fixed-point adds. drain with drain_row = r quantizes row r
// of mat_accum to FP8 with the output exponent bias, applies the activation
// and presents it one cycle later on row_valid/row. Accumulating in 32-bit
// fixed point and quantizing the final matrix to FP8 follow the paper;
// saturation and truncating rounding are this design's choices.
module pu_accumulate
  import edgebert_pkg::*;
#(
  parameter int N = N_DEF
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              acc_valid,
  input  logic                              acc_clear,
  input  logic signed [N-1:0][N-1:0][31:0]  mat_out,
  input  ebias_t                            bias_out,
  input  act_mode_e                         act,
  input  logic                              drain,
  input  logic [$clog2(N)-1:0]              drain_row,
  output logic                              row_valid,
  output logic [N-1:0][7:0]                 row
);
  timeunit 1ns;
  timeprecision 1ps;
  logic signed [N-1:0][N-1:0][31:0] mat_accum;
  logic [N-1:0][7:0] qrow, arow;

  always_ff @(posedge clk) begin
    if (acc_valid)
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          automatic logic signed [32:0] s = acc_clear ? 33'($signed(mat_out[i][j]))
                                          : 33'($signed(mat_accum[i][j])) + 33'($signed(mat_out[i][j]));
          if (s > 33'sh0_7fff_ffff)       mat_accum[i][j] <= 32'sh7fff_ffff;
          else if (s < -33'sh0_8000_0000) mat_accum[i][j] <= 32'sh8000_0000;
          else                            mat_accum[i][j] <= s[31:0];
        end
  end

  always_comb
    for (int j = 0; j < N; j++) qrow[j] = fix_to_fp8(mat_accum[drain_row][j], ACC_FRAC, bias_out);

  activation_unit #(.N(N)) u_act (.mode(act), .bias(bias_out), .in_row(qrow), .out_row(arow));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) row_valid <= 1'b0;
    else        row_valid <= drain;
  end
  always_ff @(posedge clk) if (drain) row <= arow;
endmodule
