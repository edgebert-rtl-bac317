// reram_buffer: behavioural model of the 2 MB embedded ReRAM that stores
// the pruned word embeddings; not synthesizable logic (a process-specific
// non-volatile macro).
//
// Organisation: an SLC mask array with one N-bit mask per embedding vector
// (MASK_KB) and an MLC2 data array holding the non-zero FP8 values of all
// vectors back to back (DATA_KB). The 2 MB total, SLC for masks and 2 bits
// per cell for values follow the paper; the 512 KB / 1536 KB split is this
// design's choice (it holds 262144 vectors of 16, and at the paper's 40 %
// density about 1.5 M non-zeros). A read gives the mask of vector `index`
// and the N bytes starting at byte `ptr` of the value array, i.e. the
// vector already in the decoders' mask:data format. Read latency of 1.21 ns
// (SLC) and 1.54 ns (MLC2) fits in one 1 GHz cycle, so a read is modelled as
// synchronous. The programming port writes one mask or one 16-byte value
// word; the contents persist across power cycles in silicon, and here they
// live as long as the simulation.
module reram_buffer #(
  parameter int N       = edgebert_pkg::N_DEF,
  parameter int MASK_KB = 512,
  parameter int DATA_KB = 1536,
  localparam int VECS   = MASK_KB * 1024 * 8 / N,
  localparam int WORDS  = DATA_KB * 1024 / N
) (
  input  logic                     clk,
  input  logic                     re,
  input  logic [$clog2(VECS)-1:0]  index,
  input  logic [$clog2(WORDS*N)-1:0] ptr,
  output logic [N-1:0]             rmask,
  output logic [N-1:0][7:0]        rdata,
  input  logic                     prog_mask_we,
  input  logic [$clog2(VECS)-1:0]  prog_mask_addr,
  input  logic [N-1:0]             prog_mask,
  input  logic                     prog_data_we,
  input  logic [$clog2(WORDS)-1:0] prog_data_addr,
  input  logic [N-1:0][7:0]        prog_data
);
  timeunit 1ns;
  timeprecision 1ps;
  localparam int BW = $clog2(N);
  logic [N-1:0]      slc [VECS];
  logic [N-1:0][7:0] mlc [WORDS];

  always_ff @(posedge clk) begin
    if (prog_mask_we) slc[prog_mask_addr] <= prog_mask;
    if (prog_data_we) mlc[prog_data_addr] <= prog_data;
    if (re) begin
      automatic logic [$clog2(WORDS)-1:0] w = ptr[$bits(ptr)-1:BW];
      automatic logic [2*N-1:0][7:0] two = {mlc[w + 1'b1], mlc[w]};
      rmask <= slc[index];
      for (int b = 0; b < N; b++) rdata[b] <= two[int'(ptr[BW-1:0]) + b];
    end
  end
endmodule
