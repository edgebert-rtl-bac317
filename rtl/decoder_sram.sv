// decoder_sram: scratchpad of one bit-mask decoder.
//
// Holds DEPTH compressed vectors: a single-banked N-bit mask buffer
// (MASK_KB) and an N-banked FP8 data buffer (BUF_KB). Entry a stores the
// non-zero elements of one vector packed into banks 0..popcount-1, so only
// non-zeros occupy the buffer. The mask and the data have separate read
// ports so that the decoder can read the mask first and then enable only
// the banks it needs (bank_en); a disabled bank keeps its output. Reads are
// synchronous (data one cycle after the request); one write port writes a
// mask and all banks of an entry.
//
// The 16 KB / 128 KB sizes and the banking follow the paper; with N = 16
// both hold 8192 vectors. In silicon these are compiled SRAM macros; here
// they are arrays.
module decoder_sram #(
  parameter int N       = edgebert_pkg::N_DEF,
  parameter int MASK_KB = 16,
  parameter int BUF_KB  = 128,
  localparam int DEPTH  = BUF_KB * 1024 / N,
  localparam int AW     = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  logic [N-1:0]         wmask,
  input  logic [N-1:0][7:0]    wdata,
  input  logic                 mre,
  input  logic [AW-1:0]        maddr,
  output logic [N-1:0]         rmask,
  input  logic [AW-1:0]        daddr,
  input  logic [N-1:0]         bank_en,
  output logic [N-1:0][7:0]    rdata
);
  timeunit 1ns;
  timeprecision 1ps;
  initial assert (MASK_KB * 1024 * 8 / N == DEPTH)
    else $error("mask buffer and data buffer depths differ");

  logic [N-1:0] mask_mem [DEPTH];
  logic [7:0]   bank_mem [N][DEPTH];

  always_ff @(posedge clk) begin
    if (we) mask_mem[waddr] <= wmask;
    if (mre) rmask <= mask_mem[maddr];
  end

  for (genvar b = 0; b < N; b++) begin : g_bank
    always_ff @(posedge clk) begin
      if (we) bank_mem[b][waddr] <= wdata[b];
      if (bank_en[b]) rdata[b] <= bank_mem[b][daddr];
    end
  end
endmodule
