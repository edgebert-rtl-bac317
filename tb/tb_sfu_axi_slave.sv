// tb_sfu_axi_slave: self-checking test of the SFU register partition.
// Programs every configuration register over AXI4-Lite and checks the
// decoded sfu_cfg_t fields and DVFS settings, the CTRL pulses (start, wake,
// standby, sentence done), aux-buffer lane writes, the status read-backs,
// and the interrupt: set by an early-exit pulse, held, cleared by CTRL.
module tb_sfu_axi_slave;
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
  logic rst_n;
  axil_if bus (.clk, .rst_n);
  sfu_cfg_t cfg;
  logic start, wake, standby, sentence_done, aux_we, busy, done, irq_pulse, ee_exit, head_skipped, vf_ready, irq;
  logic [19:0] t_target_us;
  logic [31:0] cycles_per_layer, skip_count, scale_count;
  logic [9:0] dvfs_lut_base, aux_waddr;
  logic [7:0] dvfs_lut_len;
  logic [3:0] aux_wlane, pred_layer, ldo_code;
  logic [15:0] aux_wdata;
  q88_t entropy;
  logic [1:0] dvfs_state;
  logic [11:0] pll_freq_mhz;
  sfu_axi_slave #(.N(N)) dut (.clk, .rst_n, .axi(bus), .cfg, .start, .wake, .standby, .sentence_done,
    .t_target_us, .cycles_per_layer, .dvfs_lut_base, .dvfs_lut_len, .aux_we, .aux_waddr, .aux_wlane, .aux_wdata,
    .busy, .done, .irq_pulse, .ee_exit, .head_skipped, .entropy, .pred_layer, .skip_count, .scale_count,
    .dvfs_state, .vf_ready, .pll_freq_mhz, .ldo_code, .irq);

  // AXI4-Lite master tasks: drive at the falling edge, sample 1 ns later
  task automatic axi_write(input logic [31:0] a, input logic [31:0] d);
    automatic int n = 0;
    automatic bit aw_go, w_go, b_go;
    bus.awaddr = a; bus.awvalid = 1'b1; bus.wdata = d; bus.wstrb = 4'hf; bus.wvalid = 1'b1; bus.bready = 1'b1;
    while ((bus.awvalid || bus.wvalid) && n < 2000) begin
      #1;
      aw_go = bus.awvalid && bus.awready;
      w_go  = bus.wvalid && bus.wready;
      @(negedge clk);
      if (aw_go) bus.awvalid = 1'b0;
      if (w_go)  bus.wvalid = 1'b0;
      n++;
    end
    b_go = 1'b0;
    while (!b_go && n < 2000) begin
      #1;
      b_go = bus.bvalid;
      @(negedge clk);
      n++;
    end
    if (n >= 2000) begin failures++; $display("FAIL: AXI write %h timed out", a); end
  endtask

  task automatic axi_read(input logic [31:0] a, output logic [31:0] d);
    automatic int n = 0;
    automatic bit ar_go, r_go;
    bus.araddr = a; bus.arvalid = 1'b1; bus.rready = 1'b1;
    while (bus.arvalid && n < 2000) begin
      #1;
      ar_go = bus.arready;
      @(negedge clk);
      if (ar_go) bus.arvalid = 1'b0;
      n++;
    end
    r_go = 1'b0;
    d = '0;
    while (!r_go && n < 2000) begin
      #1;
      r_go = bus.rvalid;
      if (r_go) d = bus.rdata;
      @(negedge clk);
      n++;
    end
    if (n >= 2000) begin failures++; $display("FAIL: AXI read %h timed out", a); end
  endtask

  task automatic axi_init();
    bus.awaddr = '0; bus.awvalid = 1'b0; bus.wdata = '0; bus.wstrb = '0; bus.wvalid = 1'b0; bus.bready = 1'b0;
    bus.araddr = '0; bus.arvalid = 1'b0; bus.rready = 1'b0;
  endtask

  int n_start, n_wake, n_stby, n_sd, n_aux;
  logic [9:0] la; logic [3:0] ll; logic [15:0] ld;
  always_ff @(posedge clk) begin
    if (start) n_start <= n_start + 1;
    if (wake) n_wake <= n_wake + 1;
    if (standby) n_stby <= n_stby + 1;
    if (sentence_done) n_sd <= n_sd + 1;
    if (aux_we) begin n_aux <= n_aux + 1; la <= aux_waddr; ll <= aux_wlane; ld <= aux_wdata; end
  end
  initial begin
    logic [31:0] d;
    rst_n = 0; axi_init(); busy = 0; done = 0; irq_pulse = 0; ee_exit = 0; head_skipped = 0; vf_ready = 1;
    entropy = 16'h0123; pred_layer = 4'd5; skip_count = 32'd3; scale_count = 32'd9; dvfs_state = 2'd3;
    pll_freq_mhz = 12'd450; ldo_code = 4'd7;
    n_start = 0; n_wake = 0; n_stby = 0; n_sd = 0; n_aux = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    axi_write(32'h1_0004, {8'd0, 4'd5, 3'd0, 1'b1, 4'd11, 4'd3, 2'd0, 1'b1, 1'b1, 1'b0, 3'd3});
    axi_write(32'h1_0008, 32'd111);
    axi_write(32'h1_000C, 32'd222);
    axi_write(32'h1_0010, 32'd333);
    axi_write(32'h1_0014, {8'd0, 8'd40, 8'd4, 8'd64});
    axi_write(32'h1_0018, {11'd0, 5'd3, 2'd0, 6'd9, 2'd0, 6'd8});
    axi_write(32'h1_001C, 32'd1024);
    axi_write(32'h1_0020, {8'd0, 8'd32, 6'd0, 10'd70});
    axi_write(32'h1_0024, {3'd0, 13'd96, 3'd0, 13'd1500});
    axi_write(32'h1_0028, 32'h0000_00c0);
    axi_write(32'h1_002C, 32'd50000);
    axi_write(32'h1_0030, 32'd123456);
    axi_write(32'h1_0034, {8'd0, 8'd20, 6'd0, 10'd900});
    chk(cfg.op == SFU_OP_SOFTMAX && !cfg.src_dec && cfg.dst_dec && cfg.zero_dec, "op and decoders");
    chk(cfg.head == 4'd3 && cfg.layer == 4'd11 && cfg.lai && cfg.lut_shift == 4'd5, "head, layer, LAI, LUT shift");
    chk(cfg.src0 == 111 && cfg.src1 == 222 && cfg.dst == 333, "addresses");
    chk(cfg.rows == 64 && cfg.row_vecs == 4 && cfg.row0 == 40, "rows");
    chk(cfg.bias_in == 8 && cfg.bias_out == 9 && cfg.classes == 3, "format");
    chk(cfg.inv_len == 1024 && cfg.aux_base == 70 && cfg.lut_len == 32, "inv_len / aux");
    chk(cfg.zero_dst == 1500 && cfg.zero_len == 96, "zero range");
    chk(cfg.threshold == 16'h00c0, "threshold");
    chk(t_target_us == 50000 && cycles_per_layer == 123456 && dvfs_lut_base == 900 && dvfs_lut_len == 20, "DVFS settings");
    axi_write(32'h1_0000, 32'h1);
    axi_write(32'h1_0000, 32'h2);
    axi_write(32'h1_0000, 32'h8);
    axi_write(32'h1_0000, 32'h4);
    chk(n_start == 1 && n_wake == 1 && n_sd == 1 && n_stby == 1, "CTRL pulses");
    axi_write(32'h1_0038, {6'd13, 10'd517, 16'hcafe});
    chk(n_aux == 1 && la == 517 && ll == 13 && ld == 16'hcafe, "aux lane write");
    axi_read(32'h1_0040, d);
    chk(d[15:0] == 16'h0123 && d[19:16] == 4'd5, "entropy / prediction");
    axi_read(32'h1_0044, d); chk(d == 3, "skip count");
    axi_read(32'h1_0048, d); chk(d == 9, "scale count");
    axi_read(32'h1_004C, d); chk(d[11:0] == 450 && d[19:16] == 7, "PLL / LDO");
    chk(!irq, "no irq yet");
    ee_exit = 1; irq_pulse = 1; @(negedge clk); irq_pulse = 0;
    repeat (5) @(negedge clk);
    chk(irq, "irq held after an exit");
    axi_read(32'h1_0000, d);
    chk(d[2] && d[3] && d[9:8] == 2'd3 && d[10], "status word");
    axi_write(32'h1_0000, 32'h10);
    chk(!irq, "irq cleared");
    finish_tb();
  end
endmodule
