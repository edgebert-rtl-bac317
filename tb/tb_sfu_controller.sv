// tb_sfu_controller: self-checking test of the SFU sequencer.
// Checks that each operation starts the right unit and selects it, that a
// softmax on a head whose span mask is all zero skips the unit and writes
// zero_len zero vectors to zero_dst instead (counted), that a non-zero mask
// starts the softmax unit, and that done waits for a DVFS search to end.
module tb_sfu_controller;
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
  logic rst_n, start, busy, done, sel_ctrl, start_add, start_ln, start_sm, start_ee, unit_done, dvfs_searching;
  logic aux_re, aux_rvalid, wr_valid, head_skipped;
  logic [9:0] aux_addr;
  logic [N-1:0][15:0] aux_rdata;
  logic [AW-1:0] wr_addr;
  logic [31:0] skip_count;
  sfu_op_e sel;
  sfu_cfg_t cfg;
  sfu_controller #(.N(N)) dut (.clk, .rst_n, .start, .cfg, .busy, .done, .sel, .sel_ctrl, .start_add, .start_ln,
    .start_sm, .start_ee, .unit_done, .dvfs_searching, .aux_re, .aux_addr, .aux_rvalid, .aux_rdata,
    .wr_valid, .wr_addr, .head_skipped, .skip_count);

  logic [N-1:0][15:0] aux [1024];
  always_ff @(posedge clk) begin
    aux_rvalid <= aux_re;
    if (aux_re) aux_rdata <= aux[aux_addr];
  end
  int n_st [4];
  int n_wr, wr_bad;
  always @(posedge clk) begin
    if (start_add) n_st[0]++;
    if (start_ln) n_st[1]++;
    if (start_sm) n_st[2]++;
    if (start_ee) n_st[3]++;
    if (wr_valid) begin
      if (wr_addr != 13'(900 + n_wr)) wr_bad++;
      n_wr++;
    end
  end

  task automatic run(sfu_op_e op, int unit, bit searching_after);
    automatic int n0 = n_st[unit];
    cfg.op = op;
    start = 1; @(negedge clk); start = 0;
    for (int w = 0; w < 30 && n_st[unit] == n0; w++) @(negedge clk);
    chk(n_st[unit] == n0 + 1, $sformatf("unit %0d started", unit));
    chk(sel == op && busy, "unit selected");
    repeat (5) @(negedge clk);
    dvfs_searching = searching_after;
    unit_done = 1; @(negedge clk); unit_done = 0;
    repeat (3) @(negedge clk);
    chk(busy == searching_after, "waits for the DVFS search");
    dvfs_searching = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    rst_n = 0; start = 0; cfg = '0; unit_done = 0; dvfs_searching = 0; aux_rvalid = 0; aux_rdata = '0;
    n_wr = 0; wr_bad = 0; for (int i = 0; i < 4; i++) n_st[i] = 0;
    for (int i = 0; i < 1024; i++) aux[i] = '0;
    aux[20 + 5][3] = 16'd256;                  // head A: one non-zero mask value
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(SFU_OP_ADD, 0, 0);
    run(SFU_OP_LNORM, 1, 0);
    run(SFU_OP_EE, 3, 1);
    cfg.aux_base = 10'd20;
    run(SFU_OP_SOFTMAX, 2, 0);
    chk(skip_count == 0, "non-null head not skipped");
    // null head
    cfg.op = SFU_OP_SOFTMAX; cfg.aux_base = 10'd40; cfg.zero_dst = 13'd900; cfg.zero_len = 13'd24;
    start = 1; @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    chk(n_st[2] == 1, "softmax unit not started for a null head");
    chk(head_skipped && skip_count == 1, "head skip counted");
    chk(n_wr == 24 && wr_bad == 0, $sformatf("%0d zero vectors, %0d misplaced", n_wr, wr_bad));
    finish_tb();
  end
endmodule
