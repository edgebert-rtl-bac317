// aux_buffer: the SFU's 32 KB auxiliary buffer.
//
// Holds the EE predictor LUT, the DVFS V/F LUT, the attention-span masks and
// the layer-norm gamma/beta, each in a region chosen by software. A word is
// N lanes of 16 bits (the SFU's fixed-point width), so 32 KB gives
// 32768 / (2*N) words. The host writes one 16-bit lane at a time; the SFU
// reads a whole word, synchronously: rdata and rvalid one cycle after re.
// The size and contents follow the paper; the word organisation is this
// design's choice. In silicon this is a compiled SRAM; here an array.
module aux_buffer #(
  parameter int N  = edgebert_pkg::N_DEF,
  parameter int KB = 32,
  localparam int WORDS = KB * 1024 / (2 * N),
  localparam int AW    = $clog2(WORDS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               we,
  input  logic [AW-1:0]      waddr,
  input  logic [$clog2(N)-1:0] wlane,
  input  logic [15:0]        wdata,
  input  logic               re,
  input  logic [AW-1:0]      raddr,
  output logic               rvalid,
  output logic [N-1:0][15:0] rdata
);
  timeunit 1ns;
  timeprecision 1ps;
  logic [N-1:0][15:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr][wlane] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rvalid <= 1'b0;
    else        rvalid <= re;
  end
endmodule
