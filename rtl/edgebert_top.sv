// edgebert_top: the EdgeBERT accelerator system.
//
// A host CPU drives the accelerator over one AXI4-Lite port. An AXI splitter
// sends each access to the processing-unit (PU) or special-function-unit
// (SFU) register partition (address bit 16). The PU multiplies FP8 matrices
// held in bit-mask compressed form in two decoder scratchpads: decoder 0
// feeds mat_in0, decoder 1 feeds mat_in1, N vector MACs compute an N x N x N
// tile product in N cycles, the accumulator sums the reduction tiles and
// quantizes to FP8, the activation unit applies ReLU/GELU and the bit-mask
// encoder writes the result back, compressed, into either decoder. The SFU
// reads the same decoders for residual adds, layer norm, masked softmax and
// early-exit entropy, writes its FP8 results through the same encoder, and
// drives the LDO and ADPLL codes through its DVFS controller. A 2 MB ReRAM
// buffer holds the shared word embeddings; the host copies an embedding
// vector into a decoder with one register write.
//
// Port sharing: the PU and the SFU run one operation at a time. The decoder
// read ports belong to the PU while it is busy, then to the SFU, else to
// host read-back; the decoder write ports take the encoder first, then an
// embedding copy, then a host vector write. Host writes and read-backs are
// accepted only while both engines are idle, so the AXI response stalls.
//
// Clocking: the design runs on `clk`. The LDO and ADPLL behavioural models
// show the supply and clock the DVFS codes would produce (vdd_mv,
// pll_clk); the environment is expected to feed the ADPLL clock back as
// `clk` in a real system.
//
// Lint note: rst_n reaches both the synchronous logic and the `disable iff`
// of the AXI handshake assertions in the bus interface, so Verilator notes
// it as used both synchronously and asynchronously. The assertions only
// observe; the reset stays synchronous in all logic.
//
// Follows the paper: the blocks of the system figure and their connections.
// This design's choices: one-at-a-time operation, the port priorities, the
// register-driven embedding copy and running from the input clock.
module edgebert_top
  import edgebert_pkg::*;
#(
  parameter int N = N_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  // host AXI4-Lite
  input  logic [31:0] s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [31:0] s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  output logic        irq,
  // 1 us time base for the latency target
  input  logic        us_tick,
  // DVFS outputs
  output logic [3:0]  ldo_code,
  output logic [11:0] pll_freq_mhz,
  output logic [9:0]  vdd_mv,
  output logic        pll_clk,
  // ReRAM programming (done once; contents are non-volatile)
  input  logic        reram_mask_we,
  input  logic [17:0] reram_mask_addr,
  input  logic [N-1:0] reram_mask,
  input  logic        reram_data_we,
  input  logic [16:0] reram_data_addr,
  input  logic [N-1:0][7:0] reram_data
);
  timeunit 1ns;
  timeprecision 1ps;
  localparam int AW = DEC_AW;

  // ---------------------------------------------------------------- AXI
  axil_if host_if (.clk, .rst_n);
  axil_if pu_if   (.clk, .rst_n);
  axil_if sfu_if  (.clk, .rst_n);

  assign host_if.awaddr  = s_axi_awaddr;
  assign host_if.awvalid = s_axi_awvalid;
  assign host_if.wdata   = s_axi_wdata;
  assign host_if.wstrb   = s_axi_wstrb;
  assign host_if.wvalid  = s_axi_wvalid;
  assign host_if.bready  = s_axi_bready;
  assign host_if.araddr  = s_axi_araddr;
  assign host_if.arvalid = s_axi_arvalid;
  assign host_if.rready  = s_axi_rready;
  assign s_axi_awready = host_if.awready;
  assign s_axi_wready  = host_if.wready;
  assign s_axi_bresp   = host_if.bresp;
  assign s_axi_bvalid  = host_if.bvalid;
  assign s_axi_arready = host_if.arready;
  assign s_axi_rdata   = host_if.rdata;
  assign s_axi_rresp   = host_if.rresp;
  assign s_axi_rvalid  = host_if.rvalid;

  axi_splitter u_split (.clk, .rst_n, .s(host_if), .m_pu(pu_if), .m_sfu(sfu_if));

  // ---------------------------------------------------------------- PU registers
  pu_cfg_t pu_cfg;
  logic    pu_start, pu_busy, pu_done;
  logic [31:0] gated_count;
  logic hw_valid, hw_dec, hw_ready;
  logic [AW-1:0] hw_addr;
  logic [N-1:0] hw_mask;
  logic [N-1:0][7:0] hw_data;
  logic hr_valid, hr_dec, hr_ready, hr_rvalid;
  logic [AW-1:0] hr_addr;
  logic emb_valid, emb_dec, emb_ready;
  logic [17:0] emb_index;
  logic [20:0] emb_ptr;
  logic [AW-1:0] emb_addr;
  logic [N-1:0][7:0] dec0_rvec, dec1_rvec;
  logic [N-1:0] dec0_rmask, dec1_rmask;
  logic hr_p1, hr_p2, hr_sel_q, hr_sel_1;
  logic dec0_rvalid, dec1_rvalid;

  pu_axi_slave #(.N(N), .AW(AW)) u_pu_regs (
    .clk, .rst_n, .axi(pu_if), .cfg(pu_cfg), .start(pu_start), .busy(pu_busy), .done(pu_done),
    .gated_count, .hw_valid, .hw_dec, .hw_addr, .hw_mask, .hw_data, .hw_ready,
    .hr_valid, .hr_dec, .hr_addr, .hr_ready, .hr_rvalid,
    .hr_rvec(hr_sel_q ? dec1_rvec : dec0_rvec), .hr_rmask(hr_sel_q ? dec1_rmask : dec0_rmask),
    .emb_valid, .emb_index, .emb_ptr, .emb_dec, .emb_addr, .emb_ready);

  // ---------------------------------------------------------------- SFU registers
  sfu_cfg_t sfu_cfg;
  logic sfu_start, sfu_busy, sfu_done, wake, standby, sentence_done;
  logic [19:0] t_target_us;
  logic [31:0] cycles_per_layer, skip_count, scale_count;
  logic [AUX_AW-1:0] dvfs_lut_base, aux_waddr;
  logic [7:0] dvfs_lut_len;
  logic aux_we;
  logic [$clog2(N)-1:0] aux_wlane;
  logic [15:0] aux_wdata;
  logic irq_pulse, ee_exit, head_skipped, vf_ready, pll_locked;
  q88_t entropy;
  logic [3:0] pred_layer;
  logic [1:0] dvfs_state;

  sfu_axi_slave #(.N(N)) u_sfu_regs (
    .clk, .rst_n, .axi(sfu_if), .cfg(sfu_cfg), .start(sfu_start), .wake, .standby, .sentence_done,
    .t_target_us, .cycles_per_layer, .dvfs_lut_base, .dvfs_lut_len,
    .aux_we, .aux_waddr, .aux_wlane, .aux_wdata,
    .busy(sfu_busy), .done(sfu_done), .irq_pulse, .ee_exit, .head_skipped, .entropy, .pred_layer,
    .skip_count, .scale_count, .dvfs_state, .vf_ready, .pll_freq_mhz, .ldo_code, .irq);

  // ---------------------------------------------------------------- PU
  logic pc_re0, pc_re1, ld0_valid, ld1_valid, dp_start, dp_out_valid, dp_busy;
  logic [AW-1:0] pc_ra0, pc_ra1;
  logic [$clog2(N)-1:0] ld0_idx, ld1_idx, drain_row;
  logic acc_valid, acc_clear, drain, row_valid;
  logic pc_enc_valid, pc_enc_dec;
  logic [AW-1:0] pc_enc_addr;
  logic [N-1:0][7:0] acc_row;
  logic signed [N-1:0][N-1:0][31:0] mat_out;

  pu_controller #(.N(N), .AW(AW)) u_pu_ctrl (
    .clk, .rst_n, .start(pu_start), .cfg(pu_cfg), .busy(pu_busy), .done(pu_done),
    .dec0_re(pc_re0), .dec0_raddr(pc_ra0), .dec1_re(pc_re1), .dec1_raddr(pc_ra1),
    .dec0_rvalid, .dec1_rvalid,
    .ld0_valid, .ld0_idx, .ld1_valid, .ld1_idx, .dp_start, .dp_out_valid,
    .acc_valid, .acc_clear, .drain, .drain_row, .row_valid,
    .enc_valid(pc_enc_valid), .enc_dec(pc_enc_dec), .enc_addr(pc_enc_addr));

  pu_datapath #(.N(N)) u_dp (
    .clk, .rst_n, .ld0_valid, .ld0_idx, .ld0_row(dec0_rvec), .ld1_valid, .ld1_idx, .ld1_row(dec1_rvec),
    .shift_adj(7'(7'sd10 - 7'(pu_cfg.bias_a) - 7'(pu_cfg.bias_b))),
    .start(dp_start), .busy(dp_busy), .out_valid(dp_out_valid), .mat_out, .gated_count);

  pu_accumulate #(.N(N)) u_acc (
    .clk, .rst_n, .acc_valid, .acc_clear, .mat_out, .bias_out(pu_cfg.bias_c), .act(pu_cfg.act),
    .drain, .drain_row, .row_valid, .row(acc_row));

  // ---------------------------------------------------------------- SFU
  logic sf_re0, sf_re1, sf_wv, sf_wdec;
  logic [AW-1:0] sf_ra0, sf_ra1, sf_wa;
  logic [N-1:0][7:0] sf_wvec;

  sfu #(.N(N), .AW(AW)) u_sfu (
    .clk, .rst_n, .start(sfu_start), .cfg(sfu_cfg), .busy(sfu_busy), .done(sfu_done),
    .dec0_re(sf_re0), .dec0_raddr(sf_ra0), .dec1_re(sf_re1), .dec1_raddr(sf_ra1),
    .dec0_rvalid, .dec0_rvec, .dec1_rvalid, .dec1_rvec,
    .wr_valid(sf_wv), .wr_dec(sf_wdec), .wr_addr(sf_wa), .wr_vec(sf_wvec),
    .aux_we, .aux_waddr, .aux_wlane, .aux_wdata,
    .irq(irq_pulse), .ee_exit, .entropy, .pred_layer, .head_skipped, .skip_count,
    .wake, .sentence_done, .standby, .us_tick, .t_target_us, .cycles_per_layer,
    .dvfs_lut_base, .dvfs_lut_len, .pll_locked,
    .ldo_code, .pll_freq_mhz, .vf_ready, .dvfs_state, .scale_count);

  // ---------------------------------------------------------------- encoder
  logic enc_in_valid, enc_in_dec, enc_out_valid, enc_out_dec;
  logic [AW-1:0] enc_in_addr, enc_out_addr;
  logic [N-1:0][7:0] enc_in_vec, enc_out_data;
  logic [N-1:0] enc_out_mask;

  always_comb begin
    if (pu_busy) begin
      enc_in_valid = pc_enc_valid; enc_in_dec = pc_enc_dec; enc_in_addr = pc_enc_addr; enc_in_vec = acc_row;
    end else begin
      enc_in_valid = sf_wv; enc_in_dec = sf_wdec; enc_in_addr = sf_wa; enc_in_vec = sf_wvec;
    end
  end

  bitmask_encoder #(.N(N), .AW(AW)) u_enc (
    .clk, .rst_n, .in_valid(enc_in_valid), .in_vec(enc_in_vec), .in_dec(enc_in_dec), .in_addr(enc_in_addr),
    .out_valid(enc_out_valid), .out_dec(enc_out_dec), .out_addr(enc_out_addr),
    .out_mask(enc_out_mask), .out_data(enc_out_data));

  // ---------------------------------------------------------------- ReRAM embeddings
  logic emb_p, emb_dec_q;
  logic [AW-1:0] emb_addr_q;
  logic [N-1:0] emb_mask;
  logic [N-1:0][7:0] emb_data;

  reram_buffer #(.N(N)) u_reram (
    .clk, .re(emb_valid && emb_ready), .index(emb_index), .ptr(emb_ptr),
    .rmask(emb_mask), .rdata(emb_data),
    .prog_mask_we(reram_mask_we), .prog_mask_addr(reram_mask_addr), .prog_mask(reram_mask),
    .prog_data_we(reram_data_we), .prog_data_addr(reram_data_addr), .prog_data(reram_data));

  // ---------------------------------------------------------------- decoders
  logic idle;
  assign idle      = !pu_busy && !sfu_busy && !enc_out_valid;
  assign hw_ready  = idle && !emb_p;
  assign emb_ready = idle && !emb_p;
  assign hr_ready  = idle && !hr_p1 && !hr_p2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hr_p1 <= 1'b0; hr_p2 <= 1'b0; hr_sel_1 <= 1'b0; hr_sel_q <= 1'b0;
      emb_p <= 1'b0; emb_dec_q <= 1'b0; emb_addr_q <= '0;
    end else begin
      hr_p1 <= hr_valid && hr_ready;
      hr_p2 <= hr_p1;
      if (hr_valid && hr_ready) hr_sel_1 <= hr_dec;
      hr_sel_q <= hr_sel_1;
      emb_p <= emb_valid && emb_ready;
      if (emb_valid && emb_ready) begin emb_dec_q <= emb_dec; emb_addr_q <= emb_addr; end
    end
  end
  assign hr_rvalid = hr_p2;

  logic [1:0] d_we, d_re;
  logic [1:0][AW-1:0] d_wa, d_ra;
  logic [1:0][N-1:0] d_wm;
  logic [1:0][N-1:0][7:0] d_wd;

  always_comb begin
    for (int d = 0; d < 2; d++) begin
      d_we[d] = 1'b0; d_wa[d] = '0; d_wm[d] = '0; d_wd[d] = '0;
      if (enc_out_valid) begin
        d_we[d] = (enc_out_dec == 1'(d)); d_wa[d] = enc_out_addr; d_wm[d] = enc_out_mask; d_wd[d] = enc_out_data;
      end else if (emb_p) begin
        d_we[d] = (emb_dec_q == 1'(d)); d_wa[d] = emb_addr_q; d_wm[d] = emb_mask; d_wd[d] = emb_data;
      end else if (hw_valid && hw_ready) begin
        d_we[d] = (hw_dec == 1'(d)); d_wa[d] = hw_addr; d_wm[d] = hw_mask; d_wd[d] = hw_data;
      end
    end
    if (pu_busy) begin
      d_re[0] = pc_re0; d_ra[0] = pc_ra0; d_re[1] = pc_re1; d_ra[1] = pc_ra1;
    end else if (sfu_busy) begin
      d_re[0] = sf_re0; d_ra[0] = sf_ra0; d_re[1] = sf_re1; d_ra[1] = sf_ra1;
    end else begin
      d_re[0] = hr_valid && hr_ready && !hr_dec; d_ra[0] = hr_addr;
      d_re[1] = hr_valid && hr_ready &&  hr_dec; d_ra[1] = hr_addr;
    end
  end

  bitmask_decoder #(.N(N)) u_dec0 (
    .clk, .rst_n, .we(d_we[0]), .waddr(d_wa[0]), .wmask(d_wm[0]), .wdata(d_wd[0]),
    .re(d_re[0]), .raddr(d_ra[0]), .rvalid(dec0_rvalid), .rvec(dec0_rvec), .rmask(dec0_rmask));
  bitmask_decoder #(.N(N)) u_dec1 (
    .clk, .rst_n, .we(d_we[1]), .waddr(d_wa[1]), .wmask(d_wm[1]), .wdata(d_wd[1]),
    .re(d_re[1]), .raddr(d_ra[1]), .rvalid(dec1_rvalid), .rvec(dec1_rvec), .rmask(dec1_rmask));

  // ---------------------------------------------------------------- DVFS analog parts
  logic ldo_settled;
  ldo   u_ldo   (.code(ldo_code), .vdd_mv, .settled(ldo_settled));
  adpll u_adpll (.freq_mhz(pll_freq_mhz), .clk_out(pll_clk), .locked(pll_locked));

  logic unused;
  assign unused = dp_busy ^ ldo_settled;
endmodule
