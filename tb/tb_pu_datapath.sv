// tb_pu_datapath: self-checking test of the N x N VMAC array.
// Loads random FP8 tiles A (mat_in0) and B-transposed (mat_in1), including
// all-zero rows, starts a tile product and checks:
//  - every mat_out[i][k] against a real-number dot product of A row i and
//    B column k (Q16.16, tolerance one LSB per element),
//  - out_valid arriving N+2 cycles after start is sampled (one cycle to
//    start, N compute cycles, one output register),
//  - the count of gated (skipped) VMAC cycles: a VMAC is idle in cycle k
//    when its A row or B column k is all zero.
module tb_pu_datapath;
  timeunit 1ns;
  timeprecision 1ps;
  import edgebert_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic finish_tb();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  function automatic real p2r(int e);
    real r = 1.0;
    for (int i = 0; i < e; i++) r = r * 2.0;
    for (int i = 0; i > e; i--) r = r / 2.0;
    return r;
  endfunction

  // reference decode of an FP8 code {s, e[3:0], m[2:0]} with exponent bias
  function automatic real fp8r(logic [7:0] v, int bias);
    if (v[6:3] == 4'd0) return 0.0;
    return (v[7] ? -1.0 : 1.0) * (1.0 + real'(v[2:0]) / 8.0) * p2r(int'(v[6:3]) - bias);
  endfunction

  function automatic real rabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // watchdog
  initial begin
    #(2000000);
    failures++;
    $display("FAIL: watchdog expired");
    finish_tb();
  end

  localparam int N = 16;
  logic rst_n, ld0_valid, ld1_valid, start, busy, out_valid;
  logic [3:0] ld0_idx, ld1_idx;
  logic [N-1:0][7:0] ld0_row, ld1_row;
  logic signed [6:0] shift_adj;
  logic signed [N-1:0][N-1:0][31:0] mat_out;
  logic [31:0] gated_count;
  pu_datapath #(.N(N)) dut (.clk, .rst_n, .ld0_valid, .ld0_idx, .ld0_row, .ld1_valid, .ld1_idx, .ld1_row,
    .shift_adj, .start, .busy, .out_valid, .mat_out, .gated_count);

  logic [N-1:0][N-1:0][7:0] a, bt;
  int exp_gated, cyc;

  initial begin
    rst_n = 0; ld0_valid = 0; ld1_valid = 0; ld0_idx = '0; ld1_idx = '0; ld0_row = '0; ld1_row = '0;
    start = 0; shift_adj = 7'sd10 - 7'sd8 - 7'sd8;
    repeat (2) @(negedge clk);
    rst_n = 1;
    exp_gated = 0;
    for (int t = 0; t < 4; t++) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          a[i][j] = 8'($urandom); a[i][j][6:3] = 4'($urandom_range(11, 0));
          bt[i][j] = 8'($urandom); bt[i][j][6:3] = 4'($urandom_range(11, 0));
          if (a[i][j][6:3] == 0) a[i][j] = 8'h00;
          if (bt[i][j][6:3] == 0) bt[i][j] = 8'h00;
        end
      // null rows and columns
      a[$urandom_range(N - 1)] = '0;
      a[$urandom_range(N - 1)] = '0;
      bt[$urandom_range(N - 1)] = '0;
      for (int r = 0; r < N; r++) begin
        ld0_valid = 1; ld0_idx = 4'(r); ld0_row = a[r];
        ld1_valid = 1; ld1_idx = 4'(r); ld1_row = bt[r];
        @(negedge clk);
      end
      ld0_valid = 0; ld1_valid = 0;
      for (int k = 0; k < N; k++)
        for (int i = 0; i < N; i++)
          if (a[i] == '0 || bt[k] == '0) exp_gated++;
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!out_valid && cyc < 100) begin @(negedge clk); cyc++; end
      chk(cyc == N + 2, $sformatf("latency %0d cycles, expected %0d", cyc, N + 2));
      for (int i = 0; i < N; i++)
        for (int k = 0; k < N; k++) begin
          automatic real r = 0.0;
          for (int j = 0; j < N; j++) r += fp8r(a[i][j], 8) * fp8r(bt[k][j], 8);
          chk(rabs(real'($signed(mat_out[i][k])) - r * 65536.0) <= real'(N + 1),
              $sformatf("mat_out[%0d][%0d] = %0d, expected %f", i, k, mat_out[i][k], r * 65536.0));
        end
      chk(gated_count == 32'(exp_gated), $sformatf("gated %0d expected %0d", gated_count, exp_gated));
      @(negedge clk);
      chk(!busy, "idle after the tile");
    end
    finish_tb();
  end
endmodule
