// ee_assessment: early-exit assessment unit.
//
// Reads one logits vector (first `classes` lanes, FP8, bias_in) from src0 of
// the source decoder and computes its entropy in Q8.8:
//   m = max_k x_k,  S = sum_k e^(x_k-m),  P = sum_k (x_k-m) e^(x_k-m)
//   H = ln S - P / S,  with 1/S formed as e^(-ln S) so no divider is needed.
// This is H = ln(sum e^x) - sum x e^x / sum e^x evaluated with the max
// trick (the paper's Eq. 3 prints "- MAX" where the algebra gives "+ MAX";
// this form avoids MAX altogether). One class is accumulated per cycle.
//
// Decision: exit when H < threshold (E_T), or, in latency-aware mode, when
// the current layer has reached the exit layer predicted after layer 1. On
// exit the `irq` pulse is raised. When layer 1 does not exit in
// latency-aware mode, the EE predictor LUT in the auxiliary buffer is read
// at index min(H >> lut_shift, lut_len-1) (entry i in lane i%N of word
// aux_base + i/N) and the predicted layer is passed to the DVFS controller
// with pred_valid. The LUT indexing scheme is this design's choice.
module ee_assessment
  import edgebert_pkg::*;
#(
  parameter int N  = N_DEF,
  parameter int AW = DEC_AW
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  sfu_cfg_t           cfg,
  output logic               busy,
  output logic               done,
  output logic               rd_req,
  output logic [AW-1:0]      rd_addr,
  input  logic               rd_valid,
  input  logic [N-1:0][7:0]  rd_vec,
  output logic               aux_re,
  output logic [AUX_AW-1:0]  aux_addr,
  input  logic               aux_rvalid,
  input  logic [N-1:0][15:0] aux_rdata,
  output logic               exit_o,
  output logic               irq,
  output q88_t               entropy,
  output logic               pred_valid,
  output logic [3:0]         pred_layer
);
  timeunit 1ns;
  timeprecision 1ps;
  typedef enum logic [3:0] {S_IDLE, S_RD, S_WAIT, S_ACC, S_LN, S_H, S_DEC, S_LUT, S_LUTW} state_e;
  state_e state;
  sfu_cfg_t c;
  q88_t  x [N];
  q88_t  mx, lns;
  logic [4:0] k;
  logic [31:0] s;                   // Q16.16
  logic signed [47:0] p;            // Q16.16
  logic [3:0] pred_q;
  logic       pred_known;
  logic [15:0] lut_idx;

  assign busy    = (state != S_IDLE);
  assign rd_req  = (state == S_RD);
  assign rd_addr = c.src0;
  assign aux_re  = (state == S_LUT);
  assign aux_addr = c.aux_base + AUX_AW'(lut_idx / 16'(N));
  assign pred_layer = pred_q;

  always_comb begin
    lut_idx = 16'(entropy >>> c.lut_shift);
    if (entropy < 0) lut_idx = '0;
    if (lut_idx >= 16'(c.lut_len)) lut_idx = 16'(c.lut_len) - 16'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; mx <= '0; lns <= '0; k <= '0; s <= '0; p <= '0;
      entropy <= '0; exit_o <= 1'b0; irq <= 1'b0; done <= 1'b0; pred_valid <= 1'b0;
      pred_q <= 4'd12; pred_known <= 1'b0;
      for (int j = 0; j < N; j++) x[j] <= '0;
    end else begin
      done <= 1'b0; irq <= 1'b0; pred_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c <= cfg; state <= S_RD;
          if (cfg.layer == 4'd1) pred_known <= 1'b0;
        end
        S_RD: state <= S_WAIT;
        S_WAIT: if (rd_valid) begin
          automatic q88_t m = 16'sh8000;
          for (int j = 0; j < N; j++) begin
            automatic q88_t v = sat16(fp8_to_fix(rd_vec[j], SFU_FRAC, c.bias_in));
            x[j] <= v;
            if (j < int'(c.classes) && v > m) m = v;
          end
          mx <= m; k <= '0; s <= '0; p <= '0; state <= S_ACC;
        end
        S_ACC: begin
          automatic q88_t d = sat16(32'(x[4'(k)]) - 32'(mx));
          automatic logic [31:0] e = expq(d);
          s <= s + e;
          p <= p + ((48'(d) * $signed({16'd0, e})) >>> 8);
          k <= k + 5'd1;
          if (k + 5'd1 == c.classes) state <= S_LN;
        end
        S_LN: begin lns <= lnq(s); state <= S_H; end
        S_H: begin
          automatic logic [31:0] inv = expq(-lns);
          automatic logic signed [79:0] q = (80'(p) * $signed({48'd0, inv})) >>> 24;
          entropy <= sat16(32'(48'(lns) - 48'(q)));
          state <= S_DEC;
        end
        S_DEC: begin
          automatic logic ex = (entropy < c.threshold) ||
                               (c.lai && pred_known && c.layer >= pred_q);
          exit_o <= ex;
          irq    <= ex;
          if (!ex && c.lai && c.layer == 4'd1) state <= S_LUT;
          else begin state <= S_IDLE; done <= 1'b1; end
        end
        S_LUT: state <= S_LUTW;
        S_LUTW: if (aux_rvalid) begin
          pred_q     <= aux_rdata[lut_idx % 16'(N)][3:0];
          pred_known <= 1'b1;
          pred_valid <= 1'b1;
          state <= S_IDLE; done <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
