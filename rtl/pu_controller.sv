// pu_controller: "Controller" and "Input Setup" of the processing unit.
//
// Runs one tiled matrix multiply C[M x Nc] = act(A[M x K] * B[K x Nc]) with
// M = mt*N, Nc = nt*N, K = kt*N:
//   for each output tile (i, j):
//     for each reduction tile k:
//       LOAD    read N rows of A tile (i,k) from decoder 0 and N rows of
//               B^T tile (j,k) from decoder 1 (one row per cycle each) into
//               mat_in0 / mat_in1
//       COMPUTE run the datapath (N cycles) and add mat_out into mat_accum
//               (overwrite for k = 0)
//     DRAIN    quantize + activate the N accumulated rows and send them to
//               the bit-mask encoder, addressed to the destination decoder
// Tile layout in a decoder: row r of tile (x, y) of a matrix with YT column
// tiles is entry base + (x*YT + y)*N + r, so C is laid out like A and can
// feed the next layer directly. The loop order, this layout and the absence
// of overlap between loading and computing are this design's choices; the
// paper only names the controller and its mask-read requests.
//
// Interface: pulse start with cfg stable; busy until the pulse on done,
// which follows the last encoder write.
module pu_controller
  import edgebert_pkg::*;
#(
  parameter int N  = N_DEF,
  parameter int AW = DEC_AW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  pu_cfg_t              cfg,
  output logic                 busy,
  output logic                 done,
  // decoder read requests
  output logic                 dec0_re,
  output logic [AW-1:0]        dec0_raddr,
  output logic                 dec1_re,
  output logic [AW-1:0]        dec1_raddr,
  input  logic                 dec0_rvalid,
  input  logic                 dec1_rvalid,
  // datapath
  output logic                 ld0_valid,
  output logic [$clog2(N)-1:0] ld0_idx,
  output logic                 ld1_valid,
  output logic [$clog2(N)-1:0] ld1_idx,
  output logic                 dp_start,
  input  logic                 dp_out_valid,
  // accumulator
  output logic                 acc_valid,
  output logic                 acc_clear,
  output logic                 drain,
  output logic [$clog2(N)-1:0] drain_row,
  input  logic                 row_valid,
  // encoder
  output logic                 enc_valid,
  output logic                 enc_dec,
  output logic [AW-1:0]        enc_addr
);
  timeunit 1ns;
  timeprecision 1ps;
  localparam int RW = $clog2(N);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_COMP, S_DRAIN, S_FLUSH} state_e;
  state_e state;

  pu_cfg_t      c;
  logic [7:0]   ti, tj, tk;
  logic [RW:0]  issue, got0, got1;
  logic [RW:0]  drn;
  logic [AW-1:0] wr_addr_q;
  logic [2:0]   flush;

  logic [AW-1:0] a_row0, b_row0, c_row0;
  assign a_row0 = c.base_a + AW'((32'(ti) * 32'(c.kt) + 32'(tk)) * N);
  assign b_row0 = c.base_b + AW'((32'(tj) * 32'(c.kt) + 32'(tk)) * N);
  assign c_row0 = c.base_c + AW'((32'(ti) * 32'(c.nt) + 32'(tj)) * N);

  assign dec0_re    = (state == S_LOAD) && !issue[RW];
  assign dec1_re    = dec0_re;
  assign dec0_raddr = a_row0 + AW'(issue[RW-1:0]);
  assign dec1_raddr = b_row0 + AW'(issue[RW-1:0]);
  assign ld0_valid  = (state == S_LOAD) && dec0_rvalid;
  assign ld1_valid  = (state == S_LOAD) && dec1_rvalid;
  assign ld0_idx    = got0[RW-1:0];
  assign ld1_idx    = got1[RW-1:0];
  assign acc_valid  = (state == S_COMP) && dp_out_valid;
  assign acc_clear  = (tk == 8'd0);
  assign drain      = (state == S_DRAIN) && !drn[RW];
  assign drain_row  = drn[RW-1:0];
  assign enc_valid  = row_valid;
  assign enc_dec    = c.dest_dec;
  assign enc_addr   = wr_addr_q;
  assign busy       = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; ti <= '0; tj <= '0; tk <= '0;
      issue <= '0; got0 <= '0; got1 <= '0; drn <= '0; wr_addr_q <= '0;
      dp_start <= 1'b0; done <= 1'b0; flush <= '0;
    end else begin
      dp_start <= 1'b0;
      done     <= 1'b0;
      if (drain) wr_addr_q <= c_row0 + AW'(drn[RW-1:0]);
      unique case (state)
        S_IDLE: if (start) begin
          c <= cfg; ti <= '0; tj <= '0; tk <= '0;
          issue <= '0; got0 <= '0; got1 <= '0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (dec0_re) issue <= issue + 1'b1;
          if (dec0_rvalid) got0 <= got0 + 1'b1;
          if (dec1_rvalid) got1 <= got1 + 1'b1;
          if (got0 == (RW+1)'(N) && got1 == (RW+1)'(N)) begin
            dp_start <= 1'b1;
            state    <= S_COMP;
          end
        end
        S_COMP: if (dp_out_valid) begin
          issue <= '0; got0 <= '0; got1 <= '0;
          if (tk == c.kt - 8'd1) begin
            tk <= '0; drn <= '0; state <= S_DRAIN;
          end else begin
            tk <= tk + 8'd1; state <= S_LOAD;
          end
        end
        S_DRAIN: begin
          if (!drn[RW]) drn <= drn + 1'b1;
          else begin
            if (tj == c.nt - 8'd1) begin
              tj <= '0;
              if (ti == c.mt - 8'd1) begin
                state <= S_FLUSH; flush <= 3'd3;
              end else begin
                ti <= ti + 8'd1; state <= S_LOAD;
              end
            end else begin
              tj <= tj + 8'd1; state <= S_LOAD;
            end
          end
        end
        S_FLUSH: begin
          flush <= flush - 3'd1;
          if (flush == 3'd1) begin
            state <= S_IDLE; done <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
