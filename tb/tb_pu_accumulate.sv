// tb_pu_accumulate: self-checking test of the accumulator, FP8 quantizer
// and activation stage. Two random Q16.16 partial-product tiles are summed
// (the first with acc_clear), then every row is drained with and without
// ReLU. Each output element must equal the real sum quantized to FP8 with
// the output bias (truncated mantissa), and row_valid must follow drain by
// one cycle.
module tb_pu_accumulate;
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
  logic rst_n, acc_valid, acc_clear, drain, row_valid;
  logic signed [N-1:0][N-1:0][31:0] mat_out;
  ebias_t bias_out;
  act_mode_e act;
  logic [3:0] drain_row;
  logic [N-1:0][7:0] row;
  pu_accumulate #(.N(N)) dut (.clk, .rst_n, .acc_valid, .acc_clear, .mat_out, .bias_out, .act,
    .drain, .drain_row, .row_valid, .row);

  real total [N][N];

  initial begin
    rst_n = 0; acc_valid = 0; acc_clear = 0; drain = 0; drain_row = '0; mat_out = '0;
    bias_out = 6'sd2; act = ACT_NONE;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      for (int p = 0; p < 2; p++) begin
        for (int i = 0; i < N; i++)
          for (int j = 0; j < N; j++) begin
            mat_out[i][j] = $signed(32'($urandom_range(40000000))) - 32'sd20000000;
            if (p == 0) total[i][j] = 0.0;
            total[i][j] += real'($signed(mat_out[i][j])) / 65536.0;
          end
        acc_valid = 1; acc_clear = (p == 0);
        @(negedge clk);
      end
      acc_valid = 0;
      act = (rep == 1) ? ACT_RELU : ACT_NONE;
      for (int r = 0; r < N; r++) begin
        drain = 1; drain_row = 4'(r);
        @(negedge clk);
        drain = 0;
        chk(row_valid, "row_valid one cycle after drain");
        for (int j = 0; j < N; j++) begin
          automatic real x = total[r][j];
          automatic real h = fp8r(row[j], 2);
          if (act == ACT_RELU && x < 0.0) x = 0.0;
          chk(rabs(h - x) <= 0.126 * rabs(x) + 0.5,
              $sformatf("row %0d col %0d: %f vs %f", r, j, h, x));
        end
      end
      @(negedge clk);
      chk(!row_valid, "row_valid drops");
    end
    finish_tb();
  end
endmodule
