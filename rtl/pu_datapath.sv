// pu_datapath: the PU's array of N FP8 vector MACs (N*N multipliers).
//
// Two N x N FP8 tiles are loaded row by row into mat_in0 and mat_in1
// (one row per cycle on each load port, as the bit-mask decoders deliver
// them). After `start`, cycle k feeds row k of mat_in1 to every VMAC and
// VMAC i combines it with row i of mat_in0, writing mat_out[i][k]. A full
// N x N x N product thus takes N cycles, as in the paper. mat_in1 therefore
// holds the second operand transposed (row k = column k of B).
//
// Null-vector gating (paper: "skips the computation of a VMAC product-sum if
// one of the operand vectors contains only zero values"): when row i of
// mat_in0 or the broadcast row of mat_in1 is all zero, VMAC i's broadcast
// operand register is not reloaded and its result is forced to zero. The
// schedule does not change. gated_count counts the skipped VMAC operations.
//
// Timing: start at cycle 0; out_valid pulses at cycle N+1 with the full
// mat_out. Which VMAC takes which row is this design's choice.
module pu_datapath #(
  parameter int N = edgebert_pkg::N_DEF
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       ld0_valid,
  input  logic [$clog2(N)-1:0]       ld0_idx,
  input  logic [N-1:0][7:0]          ld0_row,
  input  logic                       ld1_valid,
  input  logic [$clog2(N)-1:0]       ld1_idx,
  input  logic [N-1:0][7:0]          ld1_row,
  input  logic signed [6:0]          shift_adj,
  input  logic                       start,
  output logic                       busy,
  output logic                       out_valid,
  output logic signed [N-1:0][N-1:0][31:0] mat_out,
  output logic [31:0]                gated_count
);
  timeunit 1ns;
  timeprecision 1ps;
  logic [N-1:0][N-1:0][7:0] mat_in0, mat_in1;
  logic [N-1:0][N-1:0][7:0] opb;          // per-VMAC broadcast operand register
  logic [N-1:0]             gate_q;       // VMAC i gated in the current stage-2 cycle
  logic [N-1:0]             null0;
  logic [$clog2(N)-1:0]     k, k_q;
  logic                     run, run_q;
  logic signed [31:0]       sums [N];

  always_comb
    for (int i = 0; i < N; i++) null0[i] = (mat_in0[i] == '0);

  always_ff @(posedge clk) begin
    if (ld0_valid) mat_in0[ld0_idx] <= ld0_row;
    if (ld1_valid) mat_in1[ld1_idx] <= ld1_row;
  end

  // stage 1: broadcast row k into the operand registers of the active VMACs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; k <= '0; run_q <= 1'b0; k_q <= '0; gate_q <= '0;
      gated_count <= '0;
    end else begin
      run_q <= run;
      k_q   <= k;
      if (start && !run) begin
        run <= 1'b1; k <= '0;
      end else if (run) begin
        for (int i = 0; i < N; i++) begin
          gate_q[i] <= null0[i] || (mat_in1[k] == '0);
          if (!(null0[i] || (mat_in1[k] == '0))) opb[i] <= mat_in1[k];
        end
        gated_count <= gated_count + ((mat_in1[k] == '0) ? 32'(N) : 32'($countones(null0)));
        if (k == $clog2(N)'(N-1)) run <= 1'b0;
        k <= k + 1'b1;
      end
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_vmac
    fp_vmac #(.N(N)) u_vmac (.in0(mat_in0[i]), .in1(opb[i]), .shift_adj(shift_adj), .sum(sums[i]));
  end

  // stage 2: write column k_q of mat_out
  always_ff @(posedge clk) begin
    if (run_q)
      for (int i = 0; i < N; i++) mat_out[i][k_q] <= gate_q[i] ? 32'sd0 : sums[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= run_q && (k_q == $clog2(N)'(N-1));
  end

  assign busy = run | run_q;
endmodule
