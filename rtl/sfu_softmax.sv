// sfu_softmax: row-wise softmax with attention-span masking.
//
// Loads the head's span mask, T_MAX Q8.8 values m(d) for token distance
// d = 0..T_MAX-1, from T_MAX/N auxiliary words at aux_base into a register
// vector. Then, for each of `rows` rows (row r holds the scores of query
// token i = row0 + r, row_vecs vectors at src0 + r*row_vecs), it makes three
// passes over the row:
//   1  max      = max_j A[i][j]
//   2  sum      = sum_j exp(A[i][j] - max);   lse = ln(sum)
//   3  out[i][j] = exp(A[i][j] - max - lse) * m(|i - j|), written as FP8
// which is the division-free, overflow-free softmax of the paper followed by
// the element-wise product with the span mask. exp/ln use the package's
// table-based pow2/log2 in Q8.8 / Q16.16. Indexing the mask by |i-j| and
// the register-vector layout are this design's choices.
// Reads are issued one per cycle in each pass; results follow the returns.
module sfu_softmax
  import edgebert_pkg::*;
#(
  parameter int N     = N_DEF,
  parameter int AW    = DEC_AW,
  parameter int T_MAX = 128
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
  localparam int SW = T_MAX / N;
  typedef enum logic [2:0] {S_IDLE, S_SPAN, S_MAX, S_SUM, S_LSE, S_OUT} state_e;
  state_e state;
  sfu_cfg_t c;
  q88_t     span [T_MAX];
  logic [7:0] r, issued, got;
  logic [AW-1:0] row_base;
  q88_t        mx, lse;
  logic [31:0] sum;                 // Q16.16

  assign busy     = (state != S_IDLE);
  assign aux_re   = (state == S_SPAN) && (issued != 8'(SW));
  assign aux_addr = c.aux_base + AUX_AW'(issued);
  assign rd_req   = (state == S_MAX || state == S_SUM || state == S_OUT) && (issued != c.row_vecs);
  assign rd_addr  = row_base + AW'(issued);

  logic [7:0] qtok;
  assign qtok = c.row0 + r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; r <= '0; issued <= '0; got <= '0; row_base <= '0;
      mx <= '0; lse <= '0; sum <= '0; done <= 1'b0; wr_valid <= 1'b0;
    end else begin
      done     <= 1'b0;
      wr_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c <= cfg; r <= '0; issued <= '0; got <= '0; row_base <= cfg.src0;
          state <= S_SPAN;
        end
        S_SPAN: begin
          if (aux_re) issued <= issued + 8'd1;
          if (aux_rvalid) begin
            for (int j = 0; j < N; j++) span[int'(got) * N + j] <= $signed(aux_rdata[j]);
            got <= got + 8'd1;
            if (got + 8'd1 == 8'(SW)) begin
              issued <= '0; got <= '0; mx <= 16'sh8000; state <= S_MAX;
            end
          end
        end
        S_MAX: begin
          if (rd_req) issued <= issued + 8'd1;
          if (rd_valid) begin
            automatic q88_t m = mx;
            for (int j = 0; j < N; j++) begin
              automatic q88_t x = sat16(fp8_to_fix(rd_vec[j], SFU_FRAC, c.bias_in));
              if (x > m) m = x;
            end
            mx  <= m;
            got <= got + 8'd1;
            if (got + 8'd1 == c.row_vecs) begin
              issued <= '0; got <= '0; sum <= '0; state <= S_SUM;
            end
          end
        end
        S_SUM: begin
          if (rd_req) issued <= issued + 8'd1;
          if (rd_valid) begin
            automatic logic [31:0] s = sum;
            for (int j = 0; j < N; j++)
              s += expq(sat16(32'(sat16(fp8_to_fix(rd_vec[j], SFU_FRAC, c.bias_in))) - 32'(mx)));
            sum <= s;
            got <= got + 8'd1;
            if (got + 8'd1 == c.row_vecs) state <= S_LSE;
          end
        end
        S_LSE: begin
          lse <= lnq(sum);
          issued <= '0; got <= '0; state <= S_OUT;
        end
        S_OUT: begin
          if (rd_req) issued <= issued + 8'd1;
          if (rd_valid) begin
            for (int j = 0; j < N; j++) begin
              automatic int col  = int'(got) * N + j;
              automatic int tdist = (col > int'(qtok)) ? col - int'(qtok) : int'(qtok) - col;
              automatic q88_t x  = sat16(fp8_to_fix(rd_vec[j], SFU_FRAC, c.bias_in));
              automatic logic [31:0] p = expq(sat16(32'(x) - 32'(mx) - 32'(lse)));  // Q16.16, <= 1
              automatic q88_t m  = (tdist < T_MAX) ? span[tdist] : 16'sd0;
              automatic logic signed [47:0] y = (48'(p) * 48'(m)) >>> 16;          // Q8.8
              wr_vec[j] <= fix_to_fp8(32'(y), SFU_FRAC, c.bias_out);
            end
            wr_addr  <= row_base + AW'(got) - c.src0 + c.dst;
            wr_valid <= 1'b1;
            got <= got + 8'd1;
            if (got + 8'd1 == c.row_vecs) begin
              if (r + 8'd1 == c.rows) begin
                state <= S_IDLE; done <= 1'b1;
              end else begin
                r <= r + 8'd1; row_base <= row_base + AW'(c.row_vecs);
                issued <= '0; got <= '0; mx <= 16'sh8000; state <= S_MAX;
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
