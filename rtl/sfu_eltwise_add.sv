// sfu_eltwise_add: element-wise addition of two FP8 tensors (the residual
// adds of the encoder), in the SFU's 16-bit fixed point.
//
// After start, count = rows*row_vecs vectors are read, vector v of the first
// operand at src0+v of decoder 0 and of the second at src1+v of decoder 1;
// reads are issued every cycle. Each returned pair is converted to Q8.8 with
// bias_in, added with saturation and re-quantized to FP8 with bias_out, then
// written to dst+v. The unit counts returns, so it works with any fixed read
// latency. Saturation and the single input bias are this design's choices.
module sfu_eltwise_add
  import edgebert_pkg::*;
#(
  parameter int N  = N_DEF,
  parameter int AW = DEC_AW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  sfu_cfg_t          cfg,
  output logic              busy,
  output logic              done,
  output logic              rd_req,
  output logic [AW-1:0]     rd_addr0,
  output logic [AW-1:0]     rd_addr1,
  input  logic              rd_valid,
  input  logic [N-1:0][7:0] rd_vec0,
  input  logic [N-1:0][7:0] rd_vec1,
  output logic              wr_valid,
  output logic [AW-1:0]     wr_addr,
  output logic [N-1:0][7:0] wr_vec
);
  timeunit 1ns;
  timeprecision 1ps;
  sfu_cfg_t c;
  logic [15:0] total, issued, got;

  assign rd_req   = busy && (issued != total);
  assign rd_addr0 = c.src0 + AW'(issued);
  assign rd_addr1 = c.src1 + AW'(issued);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; c <= '0; total <= '0; issued <= '0; got <= '0;
      wr_valid <= 1'b0;
    end else begin
      done     <= 1'b0;
      wr_valid <= 1'b0;
      if (start && !busy) begin
        c <= cfg; busy <= 1'b1; issued <= '0; got <= '0;
        total <= 16'(cfg.rows) * 16'(cfg.row_vecs);
      end else if (busy) begin
        if (rd_req) issued <= issued + 16'd1;
        if (rd_valid) begin
          for (int j = 0; j < N; j++)
            wr_vec[j] <= fix_to_fp8(32'(sat16(fp8_to_fix(rd_vec0[j], SFU_FRAC, c.bias_in)
                                         + fp8_to_fix(rd_vec1[j], SFU_FRAC, c.bias_in))),
                                    SFU_FRAC, c.bias_out);
          wr_addr  <= c.dst + AW'(got);
          wr_valid <= 1'b1;
          got      <= got + 16'd1;
          if (got + 16'd1 == total) begin
            busy <= 1'b0; done <= 1'b1;
          end
        end
      end
    end
  end
endmodule
