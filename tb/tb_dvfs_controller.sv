// tb_dvfs_controller: self-checking test of the latency-aware DVFS
// controller. A V/F LUT (ascending frequency) sits in an aux-buffer model.
// Checks: standby codes after reset; wake raises the nominal VDD code and
// 1 GHz and vf_ready only after the settle time and PLL lock; a predicted
// exit layer makes the controller pick the first LUT entry whose frequency
// finishes the remaining (layer-1) layers within the remaining time
// (worked out here from the same numbers); an infeasible budget picks the
// last entry; sentence_done returns to nominal; standby drops to 0.
module tb_dvfs_controller;
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
  logic rst_n, wake, sentence_done, standby, us_tick, pred_valid, aux_re, aux_rvalid, pll_locked;
  logic [19:0] t_target_us;
  logic [31:0] cycles_per_layer, scale_count;
  logic [9:0] lut_base, aux_addr;
  logic [7:0] lut_len;
  logic [3:0] pred_layer, ldo_code;
  logic [N-1:0][15:0] aux_rdata;
  logic [11:0] pll_freq_mhz;
  logic vf_ready, searching;
  logic [1:0] dvfs_state;
  dvfs_controller #(.N(N)) dut (.clk, .rst_n, .wake, .sentence_done, .standby, .us_tick, .t_target_us,
    .cycles_per_layer, .lut_base, .lut_len, .pred_valid, .pred_layer, .aux_re, .aux_addr, .aux_rvalid,
    .aux_rdata, .pll_locked, .ldo_code, .pll_freq_mhz, .vf_ready, .searching, .dvfs_state, .scale_count);

  logic [N-1:0][15:0] aux [1024];
  always_ff @(posedge clk) begin
    aux_rvalid <= aux_re;
    if (aux_re) aux_rdata <= aux[aux_addr];
  end

  function automatic int vdd_of(int i); return 2 + i / 2; endfunction
  function automatic int f_of(int i);   return 100 + 50 * i; endfunction

  task automatic predict(int layer, int elapsed, int tgt, int cpl);
    automatic int exp_i = 19;
    automatic int sc0 = scale_count;
    automatic int n;
    for (int i = 19; i >= 0; i--)
      if (longint'(f_of(i)) * longint'(tgt - elapsed) >= longint'(layer - 1) * longint'(cpl)) exp_i = i;
    t_target_us = 20'(tgt); cycles_per_layer = 32'(cpl);
    pred_valid = 1; pred_layer = 4'(layer);
    @(negedge clk);
    pred_valid = 0;
    chk(searching, "searching after prediction");
    n = 0;
    while (searching && n < 200) begin @(negedge clk); n++; end
    chk(!vf_ready, "not ready while settling");
    chk(pll_freq_mhz == 12'(f_of(exp_i)) && ldo_code == 4'(vdd_of(exp_i)),
        $sformatf("layer %0d: picked %0d MHz code %0d, expected %0d MHz", layer, pll_freq_mhz, ldo_code, f_of(exp_i)));
    chk(scale_count == sc0 + 1, "scale counted");
    repeat (101) @(negedge clk);
    chk(vf_ready, "ready after settling");
  endtask

  initial begin
    rst_n = 0; wake = 0; sentence_done = 0; standby = 0; us_tick = 0; pred_valid = 0; pll_locked = 1;
    t_target_us = 20'd50; cycles_per_layer = 32'd1000; lut_base = 10'd200; lut_len = 8'd20; pred_layer = '0;
    aux_rdata = '0; aux_rvalid = 0;
    for (int i = 0; i < 1024; i++) aux[i] = '0;
    for (int i = 0; i < 20; i++) aux[200 + i / N][i % N] = {4'(vdd_of(i)), 12'(f_of(i))};
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(ldo_code == 0 && pll_freq_mhz == 0 && dvfs_state == 2'd0, "standby after reset");
    wake = 1; @(negedge clk); wake = 0;
    chk(ldo_code == 4'd12 && pll_freq_mhz == 12'd1000, "nominal after wake");
    repeat (50) @(negedge clk);
    chk(!vf_ready, "settling");
    repeat (60) @(negedge clk);
    chk(vf_ready, "ready after 100 cycles");
    pll_locked = 0; #1;
    chk(!vf_ready, "not ready without PLL lock");
    pll_locked = 1;
    // 10 us elapse
    for (int i = 0; i < 10; i++) begin us_tick = 1; @(negedge clk); us_tick = 0; @(negedge clk); end
    predict(7, 10, 50, 1000);
    sentence_done = 1; @(negedge clk); sentence_done = 0;
    chk(dvfs_state == 2'd1 && pll_freq_mhz == 12'd1000, "nominal after sentence");
    wake = 1; @(negedge clk); wake = 0;       // new sentence: elapsed restarts
    predict(12, 0, 75, 3000);
    sentence_done = 1; @(negedge clk); sentence_done = 0;
    predict(12, 0, 10, 100000);                // infeasible: fastest entry
    sentence_done = 1; @(negedge clk); sentence_done = 0;
    standby = 1; @(negedge clk); standby = 0;
    chk(dvfs_state == 2'd0 && ldo_code == 0 && pll_freq_mhz == 0, "standby");
    finish_tb();
  end
endmodule
