// tb_bitmask_encoder: self-checking test of bit-mask compression.
// Random FP8 rows with many zeros go in; the mask must flag every element
// with a non-zero exponent and the non-zeros must appear packed in order,
// one cycle later, with the destination decoder and address carried along.
module tb_bitmask_encoder;
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
    #(1000000);
    failures++;
    $display("FAIL: watchdog expired");
    finish_tb();
  end

  localparam int N = 16, AW = 13;
  logic rst_n, in_valid, in_dec, out_valid, out_dec;
  logic [N-1:0][7:0] in_vec, out_data;
  logic [AW-1:0] in_addr, out_addr;
  logic [N-1:0] out_mask;
  bitmask_encoder #(.N(N), .AW(AW)) dut (.clk, .rst_n, .in_valid, .in_vec, .in_dec, .in_addr,
    .out_valid, .out_dec, .out_addr, .out_mask, .out_data);

  initial begin
    rst_n = 0; in_valid = 0; in_vec = '0; in_dec = 0; in_addr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic logic [N-1:0][7:0] v;
      automatic logic [N-1:0] m = '0;
      automatic logic [N-1:0][7:0] p = '0;
      automatic int idx = 0;
      for (int j = 0; j < N; j++) begin
        v[j] = 8'($urandom);
        if ($urandom_range(1) == 0) v[j][6:3] = 4'd0;
        if (v[j][6:3] != 0) begin m[j] = 1'b1; p[idx] = v[j]; idx++; end
      end
      in_valid = 1; in_vec = v; in_dec = 1'($urandom); in_addr = AW'($urandom);
      @(negedge clk);
      chk(out_valid, "valid one cycle later");
      chk(out_mask == m, $sformatf("mask %h vs %h", out_mask, m));
      chk(out_data == p, "packed data");
      chk(out_dec == in_dec && out_addr == in_addr, "destination carried");
    end
    in_valid = 0;
    @(negedge clk);
    chk(!out_valid, "valid drops");
    finish_tb();
  end
endmodule
