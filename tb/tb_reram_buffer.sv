// tb_reram_buffer: self-checking test of the embedding ReRAM model.
// Programs masks and packed non-zero values of random sparse embedding
// vectors back to back (the compressed layout), then reads each vector by
// index and byte pointer: the mask and the N bytes from the pointer on
// (crossing word boundaries) must match, one cycle after the request.
module tb_reram_buffer;
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

  localparam int N = 16;
  logic re, prog_mask_we, prog_data_we;
  logic [17:0] index, prog_mask_addr;
  logic [20:0] ptr;
  logic [16:0] prog_data_addr;
  logic [N-1:0] rmask, prog_mask;
  logic [N-1:0][7:0] rdata, prog_data;
  reram_buffer #(.N(N)) dut (.clk, .re, .index, .ptr, .rmask, .rdata, .prog_mask_we, .prog_mask_addr, .prog_mask,
    .prog_data_we, .prog_data_addr, .prog_data);

  localparam int V = 40;
  logic [N-1:0] masks [V];
  logic [7:0] bytes [V * N + 2 * N];
  int ptrs [V];
  initial begin
    automatic int p = 0;
    re = 0; index = '0; ptr = '0; prog_mask_we = 0; prog_data_we = 0; prog_mask_addr = '0; prog_data_addr = '0;
    prog_mask = '0; prog_data = '0;
    for (int i = 0; i < V * N + 2 * N; i++) bytes[i] = 8'h00;
    for (int v = 0; v < V; v++) begin
      masks[v] = N'($urandom) & N'($urandom);
      ptrs[v] = p;
      for (int j = 0; j < $countones(masks[v]); j++) begin bytes[p] = 8'($urandom_range(255, 8)); p++; end
    end
    @(negedge clk);
    for (int v = 0; v < V; v++) begin
      prog_mask_we = 1; prog_mask_addr = 18'(5000 + v); prog_mask = masks[v];
      @(negedge clk);
    end
    prog_mask_we = 0;
    for (int w = 0; w <= p / N + 1; w++) begin
      prog_data_we = 1; prog_data_addr = 17'(w);
      for (int b = 0; b < N; b++) prog_data[b] = bytes[w * N + b];
      @(negedge clk);
    end
    prog_data_we = 0;
    for (int v = 0; v < V; v++) begin
      re = 1; index = 18'(5000 + v); ptr = 21'(ptrs[v]);
      @(negedge clk);
      re = 0;
      chk(rmask == masks[v], $sformatf("mask %0d", v));
      for (int j = 0; j < $countones(masks[v]); j++)
        chk(rdata[j] == bytes[ptrs[v] + j], $sformatf("vector %0d value %0d", v, j));
    end
    finish_tb();
  end
endmodule
