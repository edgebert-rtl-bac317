// sfu_layernorm: layer normalization of FP8 rows in Q8.8 fixed point.
//
// For each of `rows` rows of D = row_vecs*N elements (row r at src0 +
// r*row_vecs of the source decoder):
//   pass 1  read the row (one vector per cycle) and accumulate sum(x) and
//           sum(x^2)
//   stats   mean = sum*inv_len, var = sum(x^2)*inv_len - mean^2,
//           rstd = 2^(-log2(var)/2)   (no divider, no square root)
//   pass 2  per vector v: read x, gamma (aux word aux_base+2v) and beta
//           (aux_base+2v+1); y = (x-mean)*rstd*gamma + beta, write to
//           dst + r*row_vecs + v as FP8 (bias_out)
// inv_len = 1/D in Q0.16 is supplied by the host. Normalization in
// dedicated hardware without divisions follows the paper; the
// two-pass schedule, E[x^2]-mean^2, the pow2/log2 reciprocal square root and
// the gamma/beta layout are this design's choices. Pass 2 takes 4 cycles per
// vector.
module sfu_layernorm
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
  output logic               wr_valid,
  output logic [AW-1:0]      wr_addr,
  output logic [N-1:0][7:0]  wr_vec
);
  timeunit 1ns;
  timeprecision 1ps;
  typedef enum logic [2:0] {S_IDLE, S_P1, S_STAT, S_P2_RD, S_P2_BETA, S_P2_WAIT, S_P2_OUT} state_e;
  state_e state;
  sfu_cfg_t c;
  logic [7:0]  r, issued, got;
  logic [AW-1:0] row_base;
  logic signed [31:0] sum;
  logic signed [47:0] sumsq;
  q88_t         mean;
  logic [31:0]  rstd;            // Q16.16
  logic [N-1:0][7:0]  xv;
  logic [N-1:0][15:0] gv, bv;
  logic gx, gg, gb;

  assign busy     = (state != S_IDLE);
  assign rd_req   = (state == S_P1 && issued != c.row_vecs) || (state == S_P2_RD);
  assign rd_addr  = row_base + AW'(issued);
  assign aux_re   = (state == S_P2_RD) || (state == S_P2_BETA);
  assign aux_addr = c.aux_base + AUX_AW'({issued, (state == S_P2_BETA)});

  // statistics of the finished pass 1
  logic signed [47:0] mean_w, ex2_w, var_w;
  always_comb begin
    mean_w = (48'(sum) * $signed({1'b0, c.inv_len})) >>> 16;            // Q8.8
    ex2_w  = (sumsq * $signed({1'b0, c.inv_len})) >>> 16;               // Q16.16
    var_w  = ex2_w - mean_w * mean_w;                                    // Q16.16
    if (var_w < 48'sd1) var_w = 48'sd1;
    if (var_w > 48'sh0000_7fff_ffff) var_w = 48'sh0000_7fff_ffff;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; r <= '0; issued <= '0; got <= '0; row_base <= '0;
      sum <= '0; sumsq <= '0; mean <= '0; rstd <= '0; done <= 1'b0; wr_valid <= 1'b0;
      gx <= 1'b0; gg <= 1'b0; gb <= 1'b0;
    end else begin
      done     <= 1'b0;
      wr_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c <= cfg; r <= '0; issued <= '0; got <= '0; row_base <= cfg.src0;
          sum <= '0; sumsq <= '0; state <= S_P1;
        end
        S_P1: begin
          if (rd_req) issued <= issued + 8'd1;
          if (rd_valid) begin
            automatic logic signed [31:0] s = sum;
            automatic logic signed [47:0] q = sumsq;
            for (int j = 0; j < N; j++) begin
              automatic q88_t x = sat16(fp8_to_fix(rd_vec[j], SFU_FRAC, c.bias_in));
              s += 32'(x);
              q += 48'(32'(x) * 32'(x));
            end
            sum <= s; sumsq <= q;
            got <= got + 8'd1;
            if (got + 8'd1 == c.row_vecs) state <= S_STAT;
          end
        end
        S_STAT: begin
          mean   <= sat16(32'(mean_w));
          rstd   <= pow2(16'(-(log2q(var_w[31:0]) >>> 1)));
          issued <= '0;
          state  <= S_P2_RD;
        end
        S_P2_RD:   begin gx <= 1'b0; gg <= 1'b0; gb <= 1'b0; state <= S_P2_BETA; end
        S_P2_BETA: begin
          if (aux_rvalid) begin gv <= aux_rdata; gg <= 1'b1; end
          state <= S_P2_WAIT;
        end
        S_P2_WAIT: begin
          if (aux_rvalid) begin bv <= aux_rdata; gb <= 1'b1; end
          if (rd_valid)   begin xv <= rd_vec;    gx <= 1'b1; end
          if (gx && gg && gb) state <= S_P2_OUT;
        end
        S_P2_OUT: begin
          for (int j = 0; j < N; j++) begin
            automatic logic signed [47:0] d = 48'(sat16(fp8_to_fix(xv[j], SFU_FRAC, c.bias_in)) - mean);
            automatic logic signed [47:0] n = (d * $signed({16'd0, rstd})) >>> 16;        // Q8.8
            automatic logic signed [47:0] y = ((n * 48'($signed(gv[j]))) >>> 8) + 48'($signed(bv[j]));
            wr_vec[j] <= fix_to_fp8(32'(sat16(32'(y > 48'sd32767 ? 48'sd32767 : (y < -48'sd32768 ? -48'sd32768 : y)))),
                                    SFU_FRAC, c.bias_out);
          end
          wr_addr  <= c.dst + AW'(r) * AW'(c.row_vecs) + AW'(issued);
          wr_valid <= 1'b1;
          if (issued + 8'd1 == c.row_vecs) begin
            if (r + 8'd1 == c.rows) begin
              state <= S_IDLE; done <= 1'b1;
            end else begin
              r <= r + 8'd1; row_base <= row_base + AW'(c.row_vecs);
              issued <= '0; got <= '0; sum <= '0; sumsq <= '0; state <= S_P1;
            end
          end else begin
            issued <= issued + 8'd1; state <= S_P2_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
