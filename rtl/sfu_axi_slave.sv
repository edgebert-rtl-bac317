// sfu_axi_slave: register partition of the special function unit on the
// host AXI, and the accelerator's interrupt.
//
// Byte addresses (bits [15:0]; bit 16 = 1 selects this partition):
//   0x000 CTRL   W: bit0 start op, bit1 wake (sentence start), bit2 standby,
//                bit3 sentence done, bit4 clear IRQ.
//                R: bit0 busy, bit1 done (sticky), bit2 irq, bit3 EE exit,
//                bit4 head skipped, [9:8] DVFS state, bit10 V/F ready
//   0x004 OP     [2:0] op, [3] src dec, [4] dst dec, [5] zero dec,
//                [11:8] head, [15:12] layer, [16] latency-aware, [23:20] LUT shift
//   0x008 SRC0   0x00C SRC1   0x010 DST
//   0x014 ROWS   [7:0] rows, [15:8] vectors per row, [23:16] first token
//   0x018 FMT    [5:0] bias in, [13:8] bias out, [20:16] classes
//   0x01C INVLEN [15:0] 1/D in Q0.16
//   0x020 AUXB   [9:0] aux base, [23:16] EE LUT length
//   0x024 ZERO   [12:0] context entry, [28:16] vectors to clear
//   0x028 THRESH [15:0] E_T, Q8.8
//   0x02C TTGT   [19:0] latency target in us
//   0x030 CPL    cycles per encoder layer
//   0x034 DVLUT  [9:0] V/F LUT base, [23:16] entries
//   0x038 AUXWR  W: [15:0] data, [25:16] word, [31:26] lane
//   0x040 R: [15:0] entropy, [19:16] predicted layer
//   0x044 R: heads skipped   0x048 R: DVFS scalings
//   0x04C R: [11:0] PLL MHz, [19:16] LDO code
// irq is level: set by the EE unit on an exit, cleared by CTRL bit4.
// The map is this design's choice.
module sfu_axi_slave
  import edgebert_pkg::*;
#(
  parameter int N = N_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  axil_if.slave             axi,
  output sfu_cfg_t          cfg,
  output logic              start,
  output logic              wake,
  output logic              standby,
  output logic              sentence_done,
  output logic [19:0]       t_target_us,
  output logic [31:0]       cycles_per_layer,
  output logic [AUX_AW-1:0] dvfs_lut_base,
  output logic [7:0]        dvfs_lut_len,
  output logic              aux_we,
  output logic [AUX_AW-1:0] aux_waddr,
  output logic [$clog2(N)-1:0] aux_wlane,
  output logic [15:0]       aux_wdata,
  input  logic              busy,
  input  logic              done,
  input  logic              irq_pulse,
  input  logic              ee_exit,
  input  logic              head_skipped,
  input  q88_t              entropy,
  input  logic [3:0]        pred_layer,
  input  logic [31:0]       skip_count,
  input  logic [31:0]       scale_count,
  input  logic [1:0]        dvfs_state,
  input  logic              vf_ready,
  input  logic [11:0]       pll_freq_mhz,
  input  logic [3:0]        ldo_code,
  output logic              irq
);
  timeunit 1ns;
  timeprecision 1ps;
  logic        we, re;
  logic [15:0] waddr, raddr;
  logic [31:0] wdata, rdata;
  logic        done_q;

  axil_slave_port u_port (.clk, .rst_n, .axi, .reg_we(we), .reg_waddr(waddr), .reg_wdata(wdata),
    .reg_wready(1'b1), .reg_re(re), .reg_raddr(raddr), .reg_rdata(rdata));

  assign aux_we    = we && waddr == 16'h038;
  assign aux_wdata = wdata[15:0];
  assign aux_waddr = wdata[16 +: AUX_AW];
  assign aux_wlane = wdata[26 +: $clog2(N)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '0; start <= 1'b0; wake <= 1'b0; standby <= 1'b0; sentence_done <= 1'b0;
      t_target_us <= '0; cycles_per_layer <= '0; dvfs_lut_base <= '0; dvfs_lut_len <= '0;
      done_q <= 1'b0; irq <= 1'b0;
    end else begin
      start <= 1'b0; wake <= 1'b0; standby <= 1'b0; sentence_done <= 1'b0;
      if (done) done_q <= 1'b1;
      if (irq_pulse) irq <= 1'b1;
      if (we) unique case (waddr)
        16'h000: begin
          if (wdata[0]) begin start <= 1'b1; done_q <= 1'b0; end
          wake <= wdata[1]; standby <= wdata[2]; sentence_done <= wdata[3];
          if (wdata[4]) irq <= 1'b0;
        end
        16'h004: begin
          cfg.op <= sfu_op_e'(wdata[2:0]); cfg.src_dec <= wdata[3]; cfg.dst_dec <= wdata[4];
          cfg.zero_dec <= wdata[5]; cfg.head <= wdata[11:8]; cfg.layer <= wdata[15:12];
          cfg.lai <= wdata[16]; cfg.lut_shift <= wdata[23:20];
        end
        16'h008: cfg.src0 <= wdata[DEC_AW-1:0];
        16'h00C: cfg.src1 <= wdata[DEC_AW-1:0];
        16'h010: cfg.dst  <= wdata[DEC_AW-1:0];
        16'h014: begin cfg.rows <= wdata[7:0]; cfg.row_vecs <= wdata[15:8]; cfg.row0 <= wdata[23:16]; end
        16'h018: begin cfg.bias_in <= wdata[5:0]; cfg.bias_out <= wdata[13:8]; cfg.classes <= wdata[20:16]; end
        16'h01C: cfg.inv_len <= wdata[15:0];
        16'h020: begin cfg.aux_base <= wdata[AUX_AW-1:0]; cfg.lut_len <= wdata[23:16]; end
        16'h024: begin cfg.zero_dst <= wdata[DEC_AW-1:0]; cfg.zero_len <= wdata[16 +: DEC_AW]; end
        16'h028: cfg.threshold <= wdata[15:0];
        16'h02C: t_target_us <= wdata[19:0];
        16'h030: cycles_per_layer <= wdata;
        16'h034: begin dvfs_lut_base <= wdata[AUX_AW-1:0]; dvfs_lut_len <= wdata[23:16]; end
        default: ;
      endcase
    end
  end

  always_comb begin
    unique case (raddr)
      16'h000: rdata = {21'd0, vf_ready, dvfs_state, 3'd0, head_skipped, ee_exit, irq, done_q, busy};
      16'h040: rdata = {12'd0, pred_layer, entropy};
      16'h044: rdata = skip_count;
      16'h048: rdata = scale_count;
      16'h04C: rdata = {12'd0, ldo_code, 4'd0, pll_freq_mhz};
      default: rdata = '0;
    endcase
  end
endmodule
