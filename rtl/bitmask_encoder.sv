// bitmask_encoder: compresses a dense FP8 vector into mask:data form.
//
// out_mask[j] is set when element j is non-zero (exponent field != 0) and
// the non-zero elements are packed, in order, into out_data[0..popcount-1];
// the remaining lanes are zero. The destination decoder and entry address
// travel with the vector. One register stage: out_valid follows in_valid by
// one cycle. Building the mask and dropping the zeros before the write to a
// decoder follows the paper; the register stage is this design's choice.
module bitmask_encoder #(
  parameter int N  = edgebert_pkg::N_DEF,
  parameter int AW = edgebert_pkg::DEC_AW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [N-1:0][7:0] in_vec,
  input  logic              in_dec,
  input  logic [AW-1:0]     in_addr,
  output logic              out_valid,
  output logic              out_dec,
  output logic [AW-1:0]     out_addr,
  output logic [N-1:0]      out_mask,
  output logic [N-1:0][7:0] out_data
);
  timeunit 1ns;
  timeprecision 1ps;
  logic [N-1:0]      mask;
  logic [N-1:0][7:0] packed_d;

  always_comb begin
    automatic int idx = 0;
    packed_d = '0;
    for (int j = 0; j < N; j++) begin
      mask[j] = (in_vec[j][6:3] != 4'd0);
      if (mask[j]) begin
        packed_d[idx] = in_vec[j];
        idx++;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
  always_ff @(posedge clk)
    if (in_valid) begin
      out_dec  <= in_dec;
      out_addr <= in_addr;
      out_mask <= mask;
      out_data <= packed_d;
    end
endmodule
