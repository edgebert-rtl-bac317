// bitmask_decoder: "Read and Decode" stage of a PU bit-mask decoder with its
// scratchpad.
//
// Each read request fetches one compressed vector and returns it dense:
//   cycle 0  re/raddr      : the mask buffer is read
//   cycle 1                : the mask selects the data banks to read
//                            (banks 0..popcount-1; the rest are not enabled)
//   cycle 2  rvalid/rvec   : zeros are re-inserted: element j is bank
//                            popcount(mask[j-1:0]) when mask[j] is set, else 0
// One vector per cycle, fully pipelined. Reading the mask first and skipping
// unneeded banks follows the paper; the 2-cycle latency is this design's.
// The write port stores an already compressed vector (from the encoder or
// the host).
module bitmask_decoder #(
  parameter int N  = edgebert_pkg::N_DEF,
  parameter int MASK_KB = 16,
  parameter int BUF_KB  = 128,
  localparam int AW = $clog2(BUF_KB * 1024 / N)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [N-1:0]      wmask,
  input  logic [N-1:0][7:0] wdata,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic              rvalid,
  output logic [N-1:0][7:0] rvec,
  output logic [N-1:0]      rmask
);
  timeunit 1ns;
  timeprecision 1ps;
  logic          v1, v2;
  logic [AW-1:0] a1;
  logic [N-1:0]  m1, m2, bank_en;
  logic [N-1:0][7:0] d2;

  decoder_sram #(.N(N), .MASK_KB(MASK_KB), .BUF_KB(BUF_KB)) u_sram (
    .clk, .we, .waddr, .wmask, .wdata,
    .mre(re), .maddr(raddr), .rmask(m1),
    .daddr(a1), .bank_en, .rdata(d2));

  always_comb begin
    bank_en = '0;
    if (v1)
      for (int b = 0; b < N; b++) bank_en[b] = (b < $countones(m1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; a1 <= '0; m2 <= '0;
    end else begin
      v1 <= re;
      a1 <= raddr;
      v2 <= v1;
      if (v1) m2 <= m1;
    end
  end

  always_comb begin
    automatic int idx = 0;
    for (int j = 0; j < N; j++) begin
      rvec[j] = m2[j] ? d2[idx] : 8'h00;
      if (m2[j]) idx++;
    end
  end

  assign rvalid = v2;
  assign rmask  = m2;
endmodule
