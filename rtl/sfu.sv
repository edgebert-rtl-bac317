// sfu: the special function unit.
//
// Contains the SFU controller, the element-wise add, layer-norm,
// softmax-with-span-masking and early-exit assessment datapaths, the DVFS
// controller and the 32 KB auxiliary buffer. All arithmetic is 16-bit fixed
// point (Q8.8); operands come from and results go to the PU's bit-mask
// decoders as FP8 vectors.
//
// Port sharing: one operation runs at a time and the controller's `sel`
// gives its unit the decoder read port, the vector write port (to the
// bit-mask encoder, destination decoder dst_dec) and the auxiliary read
// port. A single-source unit reads decoder src_dec; the add reads decoder 0
// and decoder 1 together. The DVFS controller takes the auxiliary port while
// it scans the V/F LUT, which the controller guarantees no unit needs then.
// The EE exit (irq) also ends the sentence for the DVFS controller.
module sfu
  import edgebert_pkg::*;
#(
  parameter int N      = N_DEF,
  parameter int AW     = DEC_AW,
  parameter int T_MAX  = 128,
  parameter int AUX_KB = 32,
  parameter int SETTLE_CYCLES = 100
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  sfu_cfg_t           cfg,
  output logic               busy,
  output logic               done,
  // decoder reads
  output logic               dec0_re,
  output logic [AW-1:0]      dec0_raddr,
  output logic               dec1_re,
  output logic [AW-1:0]      dec1_raddr,
  input  logic               dec0_rvalid,
  input  logic [N-1:0][7:0]  dec0_rvec,
  input  logic               dec1_rvalid,
  input  logic [N-1:0][7:0]  dec1_rvec,
  // vector writes to the encoder
  output logic               wr_valid,
  output logic               wr_dec,
  output logic [AW-1:0]      wr_addr,
  output logic [N-1:0][7:0]  wr_vec,
  // auxiliary buffer host writes
  input  logic               aux_we,
  input  logic [AUX_AW-1:0]  aux_waddr,
  input  logic [$clog2(N)-1:0] aux_wlane,
  input  logic [15:0]        aux_wdata,
  // early exit
  output logic               irq,
  output logic               ee_exit,
  output q88_t               entropy,
  output logic [3:0]         pred_layer,
  output logic               head_skipped,
  output logic [31:0]        skip_count,
  // DVFS
  input  logic               wake,
  input  logic               sentence_done,
  input  logic               standby,
  input  logic               us_tick,
  input  logic [19:0]        t_target_us,
  input  logic [31:0]        cycles_per_layer,
  input  logic [AUX_AW-1:0]  dvfs_lut_base,
  input  logic [7:0]         dvfs_lut_len,
  input  logic               pll_locked,
  output logic [3:0]         ldo_code,
  output logic [11:0]        pll_freq_mhz,
  output logic               vf_ready,
  output logic [1:0]         dvfs_state,
  output logic [31:0]        scale_count
);
  timeunit 1ns;
  timeprecision 1ps;
  sfu_op_e sel;
  logic    sel_ctrl;
  logic    st_add, st_ln, st_sm, st_ee;
  logic    d_add, d_ln, d_sm, d_ee;
  logic    b_add, b_ln, b_sm, b_ee;
  logic    dvfs_search;

  // primary read port
  logic              p_valid;
  logic [N-1:0][7:0] p_vec;
  logic cfg_q_src, cfg_q_dst, cfg_zero_dec;
  assign p_valid = cfg_q_src ? dec1_rvalid : dec0_rvalid;
  assign p_vec   = cfg_q_src ? dec1_rvec   : dec0_rvec;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin cfg_q_src <= 1'b0; cfg_q_dst <= 1'b0; cfg_zero_dec <= 1'b0; end
    else if (start && !busy) begin
      cfg_q_src <= cfg.src_dec; cfg_q_dst <= cfg.dst_dec; cfg_zero_dec <= cfg.zero_dec;
    end
  end

  // unit ports
  logic a_rr, l_rr, s_rr, e_rr;
  logic [AW-1:0] a_ra0, a_ra1, l_ra, s_ra, e_ra;
  logic a_wv, l_wv, s_wv, c_wv;
  logic [AW-1:0] a_wa, l_wa, s_wa, c_wa;
  logic [N-1:0][7:0] a_wd, l_wd, s_wd;
  logic l_ar, s_ar, e_ar, c_ar, d_ar;
  logic [AUX_AW-1:0] l_aa, s_aa, e_aa, c_aa, d_aa;
  logic aux_rvalid;
  logic [N-1:0][15:0] aux_rdata;
  logic pred_valid;

  sfu_controller #(.N(N), .AW(AW), .T_MAX(T_MAX)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done, .sel, .sel_ctrl,
    .start_add(st_add), .start_ln(st_ln), .start_sm(st_sm), .start_ee(st_ee),
    .unit_done(d_add | d_ln | d_sm | d_ee), .dvfs_searching(dvfs_search),
    .aux_re(c_ar), .aux_addr(c_aa), .aux_rvalid, .aux_rdata,
    .wr_valid(c_wv), .wr_addr(c_wa), .head_skipped, .skip_count);

  sfu_eltwise_add #(.N(N), .AW(AW)) u_add (
    .clk, .rst_n, .start(st_add), .cfg, .busy(b_add), .done(d_add),
    .rd_req(a_rr), .rd_addr0(a_ra0), .rd_addr1(a_ra1), .rd_valid(dec0_rvalid),
    .rd_vec0(dec0_rvec), .rd_vec1(dec1_rvec),
    .wr_valid(a_wv), .wr_addr(a_wa), .wr_vec(a_wd));

  sfu_layernorm #(.N(N), .AW(AW)) u_ln (
    .clk, .rst_n, .start(st_ln), .cfg, .busy(b_ln), .done(d_ln),
    .rd_req(l_rr), .rd_addr(l_ra), .rd_valid(p_valid), .rd_vec(p_vec),
    .aux_re(l_ar), .aux_addr(l_aa), .aux_rvalid, .aux_rdata,
    .wr_valid(l_wv), .wr_addr(l_wa), .wr_vec(l_wd));

  sfu_softmax #(.N(N), .AW(AW), .T_MAX(T_MAX)) u_sm (
    .clk, .rst_n, .start(st_sm), .cfg, .busy(b_sm), .done(d_sm),
    .rd_req(s_rr), .rd_addr(s_ra), .rd_valid(p_valid), .rd_vec(p_vec),
    .aux_re(s_ar), .aux_addr(s_aa), .aux_rvalid, .aux_rdata,
    .wr_valid(s_wv), .wr_addr(s_wa), .wr_vec(s_wd));

  ee_assessment #(.N(N), .AW(AW)) u_ee (
    .clk, .rst_n, .start(st_ee), .cfg, .busy(b_ee), .done(d_ee),
    .rd_req(e_rr), .rd_addr(e_ra), .rd_valid(p_valid), .rd_vec(p_vec),
    .aux_re(e_ar), .aux_addr(e_aa), .aux_rvalid, .aux_rdata,
    .exit_o(ee_exit), .irq, .entropy, .pred_valid, .pred_layer);

  dvfs_controller #(.N(N), .SETTLE_CYCLES(SETTLE_CYCLES)) u_dvfs (
    .clk, .rst_n, .wake, .sentence_done(sentence_done | irq), .standby, .us_tick,
    .t_target_us, .cycles_per_layer, .lut_base(dvfs_lut_base), .lut_len(dvfs_lut_len),
    .pred_valid, .pred_layer,
    .aux_re(d_ar), .aux_addr(d_aa), .aux_rvalid, .aux_rdata, .pll_locked,
    .ldo_code, .pll_freq_mhz, .vf_ready, .searching(dvfs_search), .dvfs_state, .scale_count);

  // auxiliary read port arbitration
  logic              aux_re;
  logic [AUX_AW-1:0] aux_raddr;
  always_comb begin
    aux_re = 1'b0; aux_raddr = '0;
    if (dvfs_search)   begin aux_re = d_ar; aux_raddr = d_aa; end
    else if (sel_ctrl) begin aux_re = c_ar; aux_raddr = c_aa; end
    else unique case (sel)
      SFU_OP_LNORM:   begin aux_re = l_ar; aux_raddr = l_aa; end
      SFU_OP_SOFTMAX: begin aux_re = s_ar; aux_raddr = s_aa; end
      SFU_OP_EE:      begin aux_re = e_ar; aux_raddr = e_aa; end
      default: ;
    endcase
  end

  aux_buffer #(.N(N), .KB(AUX_KB)) u_aux (
    .clk, .rst_n, .we(aux_we), .waddr(aux_waddr), .wlane(aux_wlane), .wdata(aux_wdata),
    .re(aux_re), .raddr(aux_raddr), .rvalid(aux_rvalid), .rdata(aux_rdata));

  // decoder read and vector write port multiplexing
  logic          p_re;
  logic [AW-1:0] p_ra;
  always_comb begin
    p_re = 1'b0; p_ra = '0;
    dec0_re = 1'b0; dec0_raddr = '0; dec1_re = 1'b0; dec1_raddr = '0;
    wr_valid = 1'b0; wr_addr = '0; wr_vec = '0; wr_dec = cfg_q_dst;
    unique case (sel)
      SFU_OP_ADD: begin
        dec0_re = a_rr; dec0_raddr = a_ra0; dec1_re = a_rr; dec1_raddr = a_ra1;
        wr_valid = a_wv; wr_addr = a_wa; wr_vec = a_wd;
      end
      SFU_OP_LNORM:   begin p_re = l_rr; p_ra = l_ra; wr_valid = l_wv; wr_addr = l_wa; wr_vec = l_wd; end
      SFU_OP_SOFTMAX: begin p_re = s_rr; p_ra = s_ra; wr_valid = s_wv; wr_addr = s_wa; wr_vec = s_wd; end
      SFU_OP_EE:      begin p_re = e_rr; p_ra = e_ra; end
      default: ;
    endcase
    if (sel != SFU_OP_ADD) begin
      if (cfg_q_src) begin dec1_re = p_re; dec1_raddr = p_ra; end
      else           begin dec0_re = p_re; dec0_raddr = p_ra; end
    end
    if (c_wv) begin
      wr_valid = 1'b1; wr_addr = c_wa; wr_vec = '0; wr_dec = cfg_zero_dec;
    end
  end

  // the unit busy flags are only observed for debug
  logic unused_busy;
  assign unused_busy = b_add ^ b_ln ^ b_sm ^ b_ee;
endmodule
