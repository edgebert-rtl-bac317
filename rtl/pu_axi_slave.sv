// pu_axi_slave: register partition of the processing unit on the host AXI.
//
// Byte addresses (bits [15:0]; bit 16 = 0 selects this partition):
//   0x000 CTRL     W: bit0 start matrix multiply. R: bit0 busy, bit1 done
//                  (sticky, cleared by start)
//   0x004 TILES    [7:0] mt, [15:8] nt, [23:16] kt
//   0x008 BASE_A   0x00C BASE_B   0x010 BASE_C   (decoder entries)
//   0x014 MISC     [5:0] bias_a, [13:8] bias_b, [21:16] bias_c,
//                  [25:24] activation, [28] destination decoder
//   0x018 GATED    R: VMAC operations skipped on null vectors
//   0x01C EMB      W: copy one embedding vector from the ReRAM buffer:
//                  [17:0] vector index; the byte pointer of its non-zeros is
//                  taken from EMB_PTR and the destination from VW_CMD fields
//                  of EMB_DST
//   0x020 EMB_PTR  [20:0] byte offset of the vector's non-zero values
//   0x024 EMB_DST  [12:0] entry, [16] decoder
//   0x100+4i VW_DATA  bytes 4i..4i+3 of a compressed vector to write
//   0x180 VW_MASK  its mask
//   0x184 VW_CMD   W: write the staged vector to [12:0] entry of decoder [16]
//   0x188 VR_CMD   W: read back [12:0] entry of decoder [16], dense.
//                  R: bit0 read-back data valid
//   0x200+4i VR_DATA  bytes 4i..4i+3 of the read-back vector
//   0x280 VR_MASK  its mask
// A VW_CMD, EMB or VR_CMD write completes only when the decoder port is
// free (hw_ready / hr_ready / emb_ready), i.e. while neither PU nor SFU is
// running. The map is this design's choice.
module pu_axi_slave
  import edgebert_pkg::*;
#(
  parameter int N  = N_DEF,
  parameter int AW = DEC_AW
) (
  input  logic              clk,
  input  logic              rst_n,
  axil_if.slave             axi,
  output pu_cfg_t           cfg,
  output logic              start,
  input  logic              busy,
  input  logic              done,
  input  logic [31:0]       gated_count,
  // host vector write into a decoder
  output logic              hw_valid,
  output logic              hw_dec,
  output logic [AW-1:0]     hw_addr,
  output logic [N-1:0]      hw_mask,
  output logic [N-1:0][7:0] hw_data,
  input  logic              hw_ready,
  // host dense read-back
  output logic              hr_valid,
  output logic              hr_dec,
  output logic [AW-1:0]     hr_addr,
  input  logic              hr_ready,
  input  logic              hr_rvalid,
  input  logic [N-1:0][7:0] hr_rvec,
  input  logic [N-1:0]      hr_rmask,
  // embedding copy from the ReRAM buffer
  output logic              emb_valid,
  output logic [17:0]       emb_index,
  output logic [20:0]       emb_ptr,
  output logic              emb_dec,
  output logic [AW-1:0]     emb_addr,
  input  logic              emb_ready
);
  timeunit 1ns;
  timeprecision 1ps;
  logic        we, re, wready;
  logic [15:0] waddr, raddr;
  logic [31:0] wdata, rdata;
  logic        done_q, vr_ok;
  logic [N-1:0][7:0] vr_data;
  logic [N-1:0]      vr_mask;

  axil_slave_port u_port (.clk, .rst_n, .axi, .reg_we(we), .reg_waddr(waddr), .reg_wdata(wdata),
    .reg_wready(wready), .reg_re(re), .reg_raddr(raddr), .reg_rdata(rdata));

  assign hw_valid  = we && waddr == 16'h184;
  assign hr_valid  = we && waddr == 16'h188;
  assign emb_valid = we && waddr == 16'h01C;
  assign hw_dec    = wdata[16];
  assign hw_addr   = wdata[AW-1:0];
  assign hr_dec    = wdata[16];
  assign hr_addr   = wdata[AW-1:0];
  assign emb_index = wdata[17:0];
  assign wready    = hw_valid ? hw_ready : hr_valid ? hr_ready : emb_valid ? emb_ready : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= '0; start <= 1'b0; done_q <= 1'b0; hw_mask <= '0; hw_data <= '0;
      vr_ok <= 1'b0; vr_data <= '0; vr_mask <= '0; emb_ptr <= '0; emb_dec <= 1'b0; emb_addr <= '0;
    end else begin
      start <= 1'b0;
      if (done) done_q <= 1'b1;
      if (hr_rvalid) begin vr_ok <= 1'b1; vr_data <= hr_rvec; vr_mask <= hr_rmask; end
      if (we && wready) begin
        if (waddr >= 16'h100 && waddr < 16'h100 + 16'(N)) begin
          for (int b = 0; b < 4; b++)
            if (int'(waddr[7:2]) * 4 + b < N) hw_data[int'(waddr[7:2]) * 4 + b] <= wdata[8*b +: 8];
        end else unique case (waddr)
          16'h000: if (wdata[0]) begin start <= 1'b1; done_q <= 1'b0; end
          16'h004: begin cfg.mt <= wdata[7:0]; cfg.nt <= wdata[15:8]; cfg.kt <= wdata[23:16]; end
          16'h008: cfg.base_a <= wdata[AW-1:0];
          16'h00C: cfg.base_b <= wdata[AW-1:0];
          16'h010: cfg.base_c <= wdata[AW-1:0];
          16'h014: begin
            cfg.bias_a <= wdata[5:0]; cfg.bias_b <= wdata[13:8]; cfg.bias_c <= wdata[21:16];
            cfg.act <= act_mode_e'(wdata[25:24]); cfg.dest_dec <= wdata[28];
          end
          16'h020: emb_ptr <= wdata[20:0];
          16'h024: begin emb_addr <= wdata[AW-1:0]; emb_dec <= wdata[16]; end
          16'h180: hw_mask <= wdata[N-1:0];
          16'h188: vr_ok <= 1'b0;
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    rdata = '0;
    if (raddr >= 16'h200 && raddr < 16'h200 + 16'(N)) begin
      for (int b = 0; b < 4; b++)
        if (int'(raddr[7:2]) * 4 + b < N) rdata[8*b +: 8] = vr_data[int'(raddr[7:2]) * 4 + b];
    end else unique case (raddr)
      16'h000: rdata = {30'd0, done_q, busy};
      16'h004: rdata = {8'd0, cfg.kt, cfg.nt, cfg.mt};
      16'h018: rdata = gated_count;
      16'h188: rdata = {31'd0, vr_ok};
      16'h280: rdata = 32'(vr_mask);
      default: rdata = '0;
    endcase
  end
endmodule
