// tb_pu_axi_slave: self-checking test of the PU register partition.
// Over AXI4-Lite it programs the tile and format registers and checks the
// decoded configuration, starts an operation (start pulse, busy/done
// status), reads the gated-operation counter, writes a compressed vector
// (checked on the decoder write port while the port is made to stall),
// reads one back through a 2-cycle decoder model, and issues an embedding
// copy with its pointer and destination.
module tb_pu_axi_slave;
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

  localparam int N = 16, AW = 13;
  logic rst_n;
  axil_if bus (.clk, .rst_n);
  pu_cfg_t cfg;
  logic start, busy, done, hw_valid, hw_dec, hw_ready, hr_valid, hr_dec, hr_ready, hr_rvalid;
  logic emb_valid, emb_dec, emb_ready;
  logic [31:0] gated_count;
  logic [AW-1:0] hw_addr, hr_addr, emb_addr;
  logic [N-1:0] hw_mask, hr_rmask;
  logic [N-1:0][7:0] hw_data, hr_rvec;
  logic [17:0] emb_index;
  logic [20:0] emb_ptr;
  pu_axi_slave #(.N(N), .AW(AW)) dut (.clk, .rst_n, .axi(bus), .cfg, .start, .busy, .done, .gated_count,
    .hw_valid, .hw_dec, .hw_addr, .hw_mask, .hw_data, .hw_ready,
    .hr_valid, .hr_dec, .hr_addr, .hr_ready, .hr_rvalid, .hr_rvec, .hr_rmask,
    .emb_valid, .emb_index, .emb_ptr, .emb_dec, .emb_addr, .emb_ready);

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

  // port models
  int n_start, n_hw, n_emb, stall_cycles;
  logic [AW-1:0] last_hw_addr, last_emb_addr;
  logic last_hw_dec, last_emb_dec;
  logic [N-1:0] last_hw_mask;
  logic [N-1:0][7:0] last_hw_data;
  logic [17:0] last_emb_index;
  logic [20:0] last_emb_ptr;
  logic [1:0] hr_p;
  always_ff @(posedge clk) begin
    if (start) n_start <= n_start + 1;
    if (hw_valid && !hw_ready) stall_cycles <= stall_cycles + 1;
    if (hw_valid && hw_ready) begin
      n_hw <= n_hw + 1; last_hw_addr <= hw_addr; last_hw_dec <= hw_dec; last_hw_mask <= hw_mask; last_hw_data <= hw_data;
    end
    if (emb_valid && emb_ready) begin
      n_emb <= n_emb + 1; last_emb_index <= emb_index; last_emb_ptr <= emb_ptr; last_emb_addr <= emb_addr; last_emb_dec <= emb_dec;
    end
    hr_p <= {hr_p[0], hr_valid && hr_ready};
  end
  assign hr_rvalid = hr_p[1];
  assign hr_ready = 1'b1;
  assign emb_ready = 1'b1;

  initial begin
    logic [31:0] d;
    logic [N-1:0][7:0] vec;
    rst_n = 0; axi_init(); busy = 0; done = 0; gated_count = 32'd12345; hw_ready = 0;
    n_start = 0; n_hw = 0; n_emb = 0; stall_cycles = 0; hr_p = '0;
    for (int b = 0; b < N; b++) hr_rvec[b] = 8'(b * 7 + 3);
    hr_rmask = 16'hbeef;
    repeat (2) @(negedge clk);
    rst_n = 1;
    axi_write(32'h004, 32'h00_03_02_04);
    axi_write(32'h008, 32'd100);
    axi_write(32'h00C, 32'd2000);
    axi_write(32'h010, 32'd4000);
    axi_write(32'h014, {3'd0, 1'b1, 2'd0, 2'd2, 2'd0, 6'd9, 2'd0, 6'd7, 2'd0, 6'd6});
    chk(cfg.mt == 4 && cfg.nt == 2 && cfg.kt == 3, "tile counts");
    chk(cfg.base_a == 100 && cfg.base_b == 2000 && cfg.base_c == 4000, "bases");
    chk(cfg.bias_a == 6 && cfg.bias_b == 7 && cfg.bias_c == 9 && cfg.act == ACT_GELU && cfg.dest_dec, "format");
    axi_read(32'h004, d);
    chk(d == 32'h00_03_02_04, "TILES read back");
    axi_write(32'h000, 32'h1);
    chk(n_start == 1, "one start pulse");
    busy = 1;
    axi_read(32'h000, d);
    chk(d[1:0] == 2'b01, "busy status");
    busy = 0; done = 1; @(negedge clk); done = 0;
    axi_read(32'h000, d);
    chk(d[1:0] == 2'b10, "sticky done");
    axi_read(32'h018, d);
    chk(d == 32'd12345, "gated counter");
    // vector write with a stalled port
    for (int i = 0; i < N / 4; i++) begin
      for (int b = 0; b < 4; b++) vec[4 * i + b] = 8'($urandom);
      axi_write(32'h100 + 4 * i, {vec[4 * i + 3], vec[4 * i + 2], vec[4 * i + 1], vec[4 * i]});
    end
    axi_write(32'h180, 32'h0000_a5a5);
    fork
      axi_write(32'h184, 32'h0001_0123);
      begin repeat (6) @(negedge clk); hw_ready = 1; end
    join
    chk(n_hw == 1, "one vector write");
    chk(stall_cycles >= 4, $sformatf("write stalled %0d cycles", stall_cycles));
    chk(last_hw_addr == 13'h123 && last_hw_dec && last_hw_mask == 16'ha5a5 && last_hw_data == vec, "vector write fields");
    // read back
    axi_write(32'h188, 32'h0000_0042);
    repeat (3) @(negedge clk);
    axi_read(32'h188, d);
    chk(d[0], "read-back valid");
    for (int i = 0; i < N / 4; i++) begin
      axi_read(32'h200 + 4 * i, d);
      chk(d == {hr_rvec[4 * i + 3], hr_rvec[4 * i + 2], hr_rvec[4 * i + 1], hr_rvec[4 * i]}, "read-back data");
    end
    axi_read(32'h280, d);
    chk(d[15:0] == 16'hbeef, "read-back mask");
    // embedding copy
    axi_write(32'h020, 32'd777777);
    axi_write(32'h024, 32'h0000_0050);
    axi_write(32'h01C, 32'd29999);
    chk(n_emb == 1 && last_emb_index == 18'd29999 && last_emb_ptr == 21'd777777 && last_emb_addr == 13'h50 && !last_emb_dec,
        "embedding copy request");
    finish_tb();
  end
endmodule
