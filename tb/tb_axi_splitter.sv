// tb_axi_splitter: self-checking test of the AXI4-Lite address splitter.
// Two register-file slaves built from axil_slave_port stand in for the PU
// and SFU partitions. Random writes and reads go to both sides (address bit
// 16 selects the SFU); every value must land in, and read back from, the
// right slave and never the other one.
module tb_axi_splitter;
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

  logic rst_n;
  axil_if host (.clk, .rst_n);
  axil_if pu_b (.clk, .rst_n);
  axil_if sfu_b (.clk, .rst_n);
  axi_splitter dut (.clk, .rst_n, .s(host), .m_pu(pu_b), .m_sfu(sfu_b));

  // two register-file slaves, 64 words each
  logic we0, re0, we1, re1;
  logic [15:0] wa0, ra0, wa1, ra1;
  logic [31:0] wd0, wd1;
  logic [31:0] rf0 [64], rf1 [64];
  axil_slave_port s0 (.clk, .rst_n, .axi(pu_b), .reg_we(we0), .reg_waddr(wa0), .reg_wdata(wd0), .reg_wready(1'b1),
    .reg_re(re0), .reg_raddr(ra0), .reg_rdata(rf0[ra0[7:2]]));
  axil_slave_port s1 (.clk, .rst_n, .axi(sfu_b), .reg_we(we1), .reg_waddr(wa1), .reg_wdata(wd1), .reg_wready(1'b1),
    .reg_re(re1), .reg_raddr(ra1), .reg_rdata(rf1[ra1[7:2]]));
  always_ff @(posedge clk) begin
    if (we0) rf0[wa0[7:2]] <= wd0;
    if (we1) rf1[wa1[7:2]] <= wd1;
  end

  // AXI4-Lite master tasks: drive at the falling edge, sample 1 ns later
  task automatic axi_write(input logic [31:0] a, input logic [31:0] d);
    automatic int n = 0;
    automatic bit aw_go, w_go, b_go;
    host.awaddr = a; host.awvalid = 1'b1; host.wdata = d; host.wstrb = 4'hf; host.wvalid = 1'b1; host.bready = 1'b1;
    while ((host.awvalid || host.wvalid) && n < 2000) begin
      #1;
      aw_go = host.awvalid && host.awready;
      w_go  = host.wvalid && host.wready;
      @(negedge clk);
      if (aw_go) host.awvalid = 1'b0;
      if (w_go)  host.wvalid = 1'b0;
      n++;
    end
    b_go = 1'b0;
    while (!b_go && n < 2000) begin
      #1;
      b_go = host.bvalid;
      @(negedge clk);
      n++;
    end
    if (n >= 2000) begin failures++; $display("FAIL: AXI write %h timed out", a); end
  endtask

  task automatic axi_read(input logic [31:0] a, output logic [31:0] d);
    automatic int n = 0;
    automatic bit ar_go, r_go;
    host.araddr = a; host.arvalid = 1'b1; host.rready = 1'b1;
    while (host.arvalid && n < 2000) begin
      #1;
      ar_go = host.arready;
      @(negedge clk);
      if (ar_go) host.arvalid = 1'b0;
      n++;
    end
    r_go = 1'b0;
    d = '0;
    while (!r_go && n < 2000) begin
      #1;
      r_go = host.rvalid;
      if (r_go) d = host.rdata;
      @(negedge clk);
      n++;
    end
    if (n >= 2000) begin failures++; $display("FAIL: AXI read %h timed out", a); end
  endtask

  task automatic axi_init();
    host.awaddr = '0; host.awvalid = 1'b0; host.wdata = '0; host.wstrb = '0; host.wvalid = 1'b0; host.bready = 1'b0;
    host.araddr = '0; host.arvalid = 1'b0; host.rready = 1'b0;
  endtask

  logic [31:0] m0 [64], m1 [64];
  initial begin
    logic [31:0] d;
    rst_n = 0; axi_init();
    for (int i = 0; i < 64; i++) begin rf0[i] = '0; rf1[i] = '0; m0[i] = '0; m1[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 200; t++) begin
      automatic int w = $urandom_range(63);
      automatic bit side = 1'($urandom);
      automatic logic [31:0] a = {15'd0, side, 8'd0, 6'(w), 2'b00};
      if ($urandom_range(1)) begin
        d = $urandom;
        axi_write(a, d);
        if (side) m1[w] = d; else m0[w] = d;
      end else begin
        axi_read(a, d);
        chk(d == (side ? m1[w] : m0[w]), $sformatf("read %h = %h", a, d));
      end
    end
    for (int i = 0; i < 64; i++) begin
      chk(rf0[i] == m0[i], $sformatf("PU slave word %0d", i));
      chk(rf1[i] == m1[i], $sformatf("SFU slave word %0d", i));
    end
    finish_tb();
  end
endmodule
