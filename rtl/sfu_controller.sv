// sfu_controller: launches SFU operations and owns the shared ports.
//
// On start it latches the operation and either starts the element-wise
// add, layer norm or EE unit directly, or, for a softmax, first inspects the
// head's attention-span mask: the T_MAX/N auxiliary words at aux_base are
// read and OR-ed. If every value is zero the head is skipped entirely: no
// softmax runs and zero_len all-zero vectors are written to the head's
// context region (zero_dst in decoder zero_dec), as the paper describes.
// Otherwise the softmax unit runs. `sel` tells the SFU which unit owns the
// decoder read, write and auxiliary ports. done is held back while the DVFS
// controller is still scanning its LUT, so the auxiliary port is never
// shared. Starting the next encoder layer is left to the host.
module sfu_controller
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
  output sfu_op_e            sel,
  output logic               sel_ctrl,
  output logic               start_add,
  output logic               start_ln,
  output logic               start_sm,
  output logic               start_ee,
  input  logic               unit_done,
  input  logic               dvfs_searching,
  output logic               aux_re,
  output logic [AUX_AW-1:0]  aux_addr,
  input  logic               aux_rvalid,
  input  logic [N-1:0][15:0] aux_rdata,
  output logic               wr_valid,
  output logic [AW-1:0]      wr_addr,
  output logic               head_skipped,
  output logic [31:0]        skip_count
);
  timeunit 1ns;
  timeprecision 1ps;
  localparam int SW = T_MAX / N;
  typedef enum logic [2:0] {C_IDLE, C_CHECK, C_ZERO, C_RUN, C_WAIT_DVFS} cstate_e;
  cstate_e state;
  sfu_cfg_t c;
  logic [7:0] issued, got;
  logic       nonzero;
  logic [AW-1:0] zi;

  assign busy     = (state != C_IDLE);
  assign sel      = c.op;
  assign sel_ctrl = (state == C_CHECK) || (state == C_ZERO);
  assign aux_re   = (state == C_CHECK) && (issued != 8'(SW));
  assign aux_addr = c.aux_base + AUX_AW'(issued);
  assign wr_valid = (state == C_ZERO) && (zi != c.zero_len);
  assign wr_addr  = c.zero_dst + zi;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; c <= '0; issued <= '0; got <= '0; nonzero <= 1'b0; zi <= '0;
      done <= 1'b0; start_add <= 1'b0; start_ln <= 1'b0; start_sm <= 1'b0; start_ee <= 1'b0;
      head_skipped <= 1'b0; skip_count <= '0;
    end else begin
      done <= 1'b0; start_add <= 1'b0; start_ln <= 1'b0; start_sm <= 1'b0; start_ee <= 1'b0;
      unique case (state)
        C_IDLE: if (start) begin
          c <= cfg; head_skipped <= 1'b0;
          unique case (cfg.op)
            SFU_OP_ADD:     begin start_add <= 1'b1; state <= C_RUN; end
            SFU_OP_LNORM:   begin start_ln  <= 1'b1; state <= C_RUN; end
            SFU_OP_EE:      begin start_ee  <= 1'b1; state <= C_RUN; end
            SFU_OP_SOFTMAX: begin issued <= '0; got <= '0; nonzero <= 1'b0; state <= C_CHECK; end
            default:        done <= 1'b1;
          endcase
        end
        C_CHECK: begin
          if (aux_re) issued <= issued + 8'd1;
          if (aux_rvalid) begin
            got <= got + 8'd1;
            if (aux_rdata != '0) nonzero <= 1'b1;
            if (got + 8'd1 == 8'(SW)) begin
              if (nonzero || aux_rdata != '0) begin
                start_sm <= 1'b1; state <= C_RUN;
              end else begin
                zi <= '0; head_skipped <= 1'b1; skip_count <= skip_count + 32'd1; state <= C_ZERO;
              end
            end
          end
        end
        C_ZERO: if (zi == c.zero_len) state <= C_WAIT_DVFS;
                else zi <= zi + 1'b1;
        C_RUN: if (unit_done) state <= C_WAIT_DVFS;
        C_WAIT_DVFS: if (!dvfs_searching) begin state <= C_IDLE; done <= 1'b1; end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
