// tb_edgebert_top: end-to-end, full-size (default parameters) test of the
// accelerator through its host AXI4-Lite port, as a host CPU would drive one
// encoder step:
//   1. program 16 sparse word embeddings into the ReRAM and copy them into
//      decoder 0 with EMB register writes (two of them are null vectors);
//   2. write a transposed weight tile, compressed, into decoder 1 (one null
//      row) and read one back;
//   3. run a 16x16x16 FP8 matrix multiply on the PU; a vector write issued
//      meanwhile must stall until the PU is done; the result is read back
//      from decoder 0 and compared with a real-number model; VMAC null
//      gating must have skipped work;
//   4. residual add on the SFU into decoder 1, checked the same way;
//   5. wake the DVFS controller, run the early-exit check after layer 1 in
//      latency-aware mode: the predicted exit layer must make DVFS scale to
//      the LUT entry worked out here, and the LDO/ADPLL models must follow;
//   6. the early-exit check at the predicted layer must raise irq, which the
//      host clears;
//   7. a softmax on a head whose span mask is all zero must be skipped and
//      zero-fill its context vectors;
//   8. sentence done and standby.
// Each mechanism is counted; one that never happened counts as a failure.
// Clock 100 MHz in simulation; us_tick every 100 cycles.
module tb_edgebert_top;
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
    #(20000000);
    failures++;
    $display("FAIL: watchdog expired");
    finish_tb();
  end

  localparam int N = 16;
  logic rst_n;
  logic [31:0] s_axi_awaddr, s_axi_wdata, s_axi_araddr, s_axi_rdata;
  logic s_axi_awvalid, s_axi_awready, s_axi_wvalid, s_axi_wready, s_axi_bvalid, s_axi_bready;
  logic s_axi_arvalid, s_axi_arready, s_axi_rvalid, s_axi_rready;
  logic [3:0] s_axi_wstrb;
  logic [1:0] s_axi_bresp, s_axi_rresp;
  logic irq, us_tick, pll_clk;
  logic [3:0] ldo_code;
  logic [11:0] pll_freq_mhz;
  logic [9:0] vdd_mv;
  logic reram_mask_we, reram_data_we;
  logic [17:0] reram_mask_addr;
  logic [16:0] reram_data_addr;
  logic [N-1:0] reram_mask;
  logic [N-1:0][7:0] reram_data;

  edgebert_top dut (.clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready, .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready, .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready, .irq, .us_tick,
    .ldo_code, .pll_freq_mhz, .vdd_mv, .pll_clk,
    .reram_mask_we, .reram_mask_addr, .reram_mask, .reram_data_we, .reram_data_addr, .reram_data);

  // AXI4-Lite master tasks: drive at the falling edge, sample 1 ns later
  task automatic axi_write(input logic [31:0] a, input logic [31:0] d);
    automatic int n = 0;
    automatic bit aw_go, w_go, b_go;
    s_axi_awaddr = a; s_axi_awvalid = 1'b1; s_axi_wdata = d; s_axi_wstrb = 4'hf; s_axi_wvalid = 1'b1; s_axi_bready = 1'b1;
    while ((s_axi_awvalid || s_axi_wvalid) && n < 2000) begin
      #1;
      aw_go = s_axi_awvalid && s_axi_awready;
      w_go  = s_axi_wvalid && s_axi_wready;
      @(negedge clk);
      if (aw_go) s_axi_awvalid = 1'b0;
      if (w_go)  s_axi_wvalid = 1'b0;
      n++;
    end
    b_go = 1'b0;
    while (!b_go && n < 2000) begin
      #1;
      b_go = s_axi_bvalid;
      @(negedge clk);
      n++;
    end
    if (n >= 2000) begin failures++; $display("FAIL: AXI write %h timed out", a); end
  endtask

  task automatic axi_read(input logic [31:0] a, output logic [31:0] d);
    automatic int n = 0;
    automatic bit ar_go, r_go;
    s_axi_araddr = a; s_axi_arvalid = 1'b1; s_axi_rready = 1'b1;
    while (s_axi_arvalid && n < 2000) begin
      #1;
      ar_go = s_axi_arready;
      @(negedge clk);
      if (ar_go) s_axi_arvalid = 1'b0;
      n++;
    end
    r_go = 1'b0;
    d = '0;
    while (!r_go && n < 2000) begin
      #1;
      r_go = s_axi_rvalid;
      if (r_go) d = s_axi_rdata;
      @(negedge clk);
      n++;
    end
    if (n >= 2000) begin failures++; $display("FAIL: AXI read %h timed out", a); end
  endtask

  task automatic axi_init();
    s_axi_awaddr = '0; s_axi_awvalid = 1'b0; s_axi_wdata = '0; s_axi_wstrb = '0; s_axi_wvalid = 1'b0; s_axi_bready = 1'b0;
    s_axi_araddr = '0; s_axi_arvalid = 1'b0; s_axi_rready = 1'b0;
  endtask

  // 1 us time base
  int tick_div;
  always_ff @(posedge clk) begin
    tick_div <= (tick_div == 99) ? 0 : tick_div + 1;
    us_tick  <= (tick_div == 99);
  end

  // mechanism counters (observed inside the design)
  logic [31:0] sc_q = '0;
  int n_emb, n_stall, n_enc, n_gate, n_hread, n_irq, n_skip, n_scale, n_stby, n_pu, n_sfu_add;
  always @(posedge clk) if (rst_n) begin
    if (dut.emb_p) n_emb++;
    if (dut.hw_valid && !dut.hw_ready && dut.pu_busy) n_stall++;
    if (dut.enc_out_valid) n_enc++;
    if (dut.hr_rvalid) n_hread++;
    if (dut.irq_pulse) n_irq++;
    if (dut.head_skipped && dut.sfu_done) n_skip++;
    if (dut.scale_count != sc_q) n_scale++;
    sc_q = dut.scale_count;
    if (dut.pu_done) n_pu++;
    if (dut.u_sfu.d_add) n_sfu_add++;
  end

  logic [N-1:0][7:0] A [N];     // A rows (embeddings)
  logic [N-1:0][7:0] BT [N];    // B columns
  logic [31:0] d;

  task automatic pack(input logic [N-1:0][7:0] v, output logic [N-1:0] m, output logic [N-1:0][7:0] p);
    automatic int idx = 0;
    m = '0; p = '0;
    for (int j = 0; j < N; j++) if (v[j][6:3] != 0) begin m[j] = 1'b1; p[idx] = v[j]; idx++; end
  endtask

  task automatic vec_write(input bit dec, input int entry, input logic [N-1:0][7:0] v);
    logic [N-1:0] m; logic [N-1:0][7:0] p;
    pack(v, m, p);
    for (int i = 0; i < N / 4; i++) axi_write(32'h100 + 4 * i, {p[4 * i + 3], p[4 * i + 2], p[4 * i + 1], p[4 * i]});
    axi_write(32'h180, 32'(m));
    axi_write(32'h184, {15'd0, dec, 3'd0, 13'(entry)});
  endtask

  task automatic vec_read(input bit dec, input int entry, output logic [N-1:0][7:0] v);
    logic [31:0] r;
    axi_write(32'h188, {15'd0, dec, 3'd0, 13'(entry)});
    r = 0;
    for (int k = 0; k < 20 && !r[0]; k++) axi_read(32'h188, r);
    chk(r[0], "read-back completes");
    for (int i = 0; i < N / 4; i++) begin
      axi_read(32'h200 + 4 * i, r);
      for (int b = 0; b < 4; b++) v[4 * i + b] = r[8 * b +: 8];
    end
  endtask

  task automatic sfu_run();
    logic [31:0] r;
    axi_write(32'h1_0000, 32'h1);
    r = 32'h1;
    for (int k = 0; k < 2000 && r[0]; k++) axi_read(32'h1_0000, r);
    chk(!r[0], "SFU operation finishes");
  endtask

  function automatic logic [7:0] rnd8();
    return {1'($urandom), 4'($urandom_range(8, 5)), 3'($urandom)};
  endfunction

  initial begin
    logic [N-1:0][7:0] v;
    logic [N-1:0] m;
    logic [N-1:0][7:0] p;
    int ptr;
    rst_n = 0; axi_init(); tick_div = 0; us_tick = 0;
    reram_mask_we = 0; reram_data_we = 0; reram_mask_addr = '0; reram_data_addr = '0; reram_mask = '0; reram_data = '0;
    n_emb = 0; n_stall = 0; n_enc = 0; n_gate = 0; n_hread = 0; n_irq = 0; n_skip = 0; n_scale = 0; n_stby = 0;
    n_pu = 0; n_sfu_add = 0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        A[i][j]  = ($urandom_range(99) < 40) ? rnd8() : 8'h00;   // 40 % dense embeddings
        BT[i][j] = ($urandom_range(99) < 70) ? rnd8() : 8'h00;
      end
    A[3] = '0; A[7] = '0; BT[5] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. ReRAM: masks at index 1000+i, values packed back to back from byte 0
    ptr = 0;
    begin
      logic [7:0] bytes [N * N + 2 * N];
      int ptrs [N];
      for (int k = 0; k < N * N + 2 * N; k++) bytes[k] = 8'h00;
      for (int i = 0; i < N; i++) begin
        pack(A[i], m, p);
        ptrs[i] = ptr;
        for (int k = 0; k < $countones(m); k++) begin bytes[ptr] = p[k]; ptr++; end
        reram_mask_we = 1; reram_mask_addr = 18'(1000 + i); reram_mask = m;
        @(negedge clk);
      end
      reram_mask_we = 0;
      for (int w = 0; w <= ptr / N + 1; w++) begin
        reram_data_we = 1; reram_data_addr = 17'(w);
        for (int b = 0; b < N; b++) reram_data[b] = bytes[w * N + b];
        @(negedge clk);
      end
      reram_data_we = 0;
      for (int i = 0; i < N; i++) begin
        axi_write(32'h020, 32'(ptrs[i]));
        axi_write(32'h024, 32'(i));                  // decoder 0, entry i
        axi_write(32'h01C, 32'(1000 + i));
      end
    end
    vec_read(1'b0, 2, v);
    chk(v == A[2], "embedding copied into decoder 0");

    // 2. weights into decoder 1
    for (int i = 0; i < N; i++) vec_write(1'b1, i, BT[i]);
    vec_read(1'b1, 9, v);
    chk(v == BT[9], "weight vector read back from decoder 1");

    // 3. matrix multiply C = A x B into decoder 0 entries 32..47
    axi_write(32'h004, 32'h00_01_01_01);
    axi_write(32'h008, 32'd0);
    axi_write(32'h00C, 32'd0);
    axi_write(32'h010, 32'd32);
    axi_write(32'h014, {3'd0, 1'b0, 2'd0, 2'd0, 2'd0, 6'd8, 2'd0, 6'd8, 2'd0, 6'd8});
    axi_write(32'h000, 32'h1);
    vec_write(1'b1, 100, BT[0]);                     // issued while the PU runs: stalls
    axi_read(32'h000, d);
    chk(d[1:0] == 2'b10, "PU done");
    axi_read(32'h018, d);
    n_gate = int'(d);
    begin
      automatic int exp_g = 0;
      for (int k = 0; k < N; k++) for (int i = 0; i < N; i++) if (A[i] == '0 || BT[k] == '0) exp_g++;
      chk(n_gate == exp_g, $sformatf("gated VMAC cycles %0d, expected %0d", n_gate, exp_g));
    end
    for (int i = 0; i < N; i++) begin
      vec_read(1'b0, 32 + i, v);
      for (int k = 0; k < N; k++) begin
        automatic real r = 0.0;
        for (int j = 0; j < N; j++) r += fp8r(A[i][j], 8) * fp8r(BT[k][j], 8);
        chk(rabs(fp8r(v[k], 8) - r) <= 0.126 * rabs(r) + 0.01, $sformatf("C[%0d][%0d] %f vs %f", i, k, fp8r(v[k], 8), r));
      end
    end

    // 4. residual add: C (dec0 @32) + B^T (dec1 @0) -> dec1 @64
    axi_write(32'h1_0004, {29'd0, 3'd1} | (32'd1 << 4));
    axi_write(32'h1_0008, 32'd32);
    axi_write(32'h1_000C, 32'd0);
    axi_write(32'h1_0010, 32'd64);
    axi_write(32'h1_0014, {8'd0, 8'd0, 8'd16, 8'd1});
    axi_write(32'h1_0018, {18'd0, 6'd8, 2'd0, 6'd8});
    sfu_run();
    for (int i = 0; i < 4; i++) begin
      logic [N-1:0][7:0] c;
      vec_read(1'b0, 32 + i, c);
      vec_read(1'b1, 64 + i, v);
      for (int k = 0; k < N; k++) begin
        automatic real x = fp8r(c[k], 8) + fp8r(BT[i][k], 8);
        chk(rabs(fp8r(v[k], 8) - x) <= 0.126 * rabs(x) + 0.01, "residual add");
      end
    end

    // 5. DVFS: LUTs in the aux buffer, wake, early-exit check at layer 1
    for (int i = 0; i < 16; i++) axi_write(32'h1_0038, {6'(i), 10'd100, 16'd6});               // EE LUT
    for (int i = 0; i < 16; i++) axi_write(32'h1_0038, {6'(i), 10'd200, 4'(i / 2 + 2), 12'(100 + 60 * i)});
    axi_write(32'h1_002C, 32'd100);                  // 100 us target
    axi_write(32'h1_0030, 32'd4000);                 // cycles per layer
    axi_write(32'h1_0034, {8'd0, 8'd16, 6'd0, 10'd200});
    axi_write(32'h1_0000, 32'h2);                    // wake
    repeat (300) @(negedge clk);
    chk(vdd_mv == 10'd800 && pll_freq_mhz == 12'd1000, "nominal supply and clock");
    for (int j = 0; j < N; j++) v[j] = (j < 4) ? {1'b0, 4'd8, 3'(j)} : 8'h00;
    vec_write(1'b0, 120, v);
    axi_write(32'h1_0004, {8'd0, 4'd6, 3'd0, 1'b1, 4'd1, 4'd0, 2'd0, 3'd0, 3'd4});
    axi_write(32'h1_0008, 32'd120);
    axi_write(32'h1_0018, {11'd0, 5'd4, 2'd0, 6'd8, 2'd0, 6'd8});
    axi_write(32'h1_0020, {8'd0, 8'd16, 6'd0, 10'd100});
    axi_write(32'h1_0028, 32'd0);
    sfu_run();
    axi_read(32'h1_0040, d);
    chk(d[19:16] == 4'd6, "predicted exit layer 6");
    axi_read(32'h1_0048, d);
    chk(d == 1, "one DVFS scaling");
    begin
      // 5 layers x 4000 cycles in what is left of 100 us
      automatic int el = int'(dut.u_sfu.u_dvfs.elapsed);
      automatic int ei = 15;
      for (int i = 15; i >= 0; i--) if ((100 + 60 * i) * (100 - el) >= 5 * 4000) ei = i;
      axi_read(32'h1_004C, d);
      chk(d[11:0] == 12'(100 + 60 * ei) && d[19:16] == 4'(ei / 2 + 2),
          $sformatf("scaled to %0d MHz code %0d, expected entry %0d", d[11:0], d[19:16], ei));
      repeat (300) @(negedge clk);
      chk(vdd_mv == 10'(500 + 25 * (ei / 2 + 2)), $sformatf("LDO output %0d mV", vdd_mv));
      chk(dut.u_adpll.locked && dut.vf_ready, "ADPLL relocked, V/F ready");
    end
    chk(!irq, "no interrupt at layer 1");

    // 6. layer 6 reaches the predicted exit
    axi_write(32'h1_0004, {8'd0, 4'd6, 3'd0, 1'b1, 4'd6, 4'd0, 2'd0, 3'd0, 3'd4});
    sfu_run();
    chk(irq, "early-exit interrupt");
    axi_write(32'h1_0000, 32'h10);
    chk(!irq, "interrupt cleared");

    // 7. null head: span mask words 400..407 are written with zeros
    for (int w = 400; w < 408; w++)
      for (int l = 0; l < N; l++) axi_write(32'h1_0038, {6'(l), 10'(w), 16'd0});
    axi_write(32'h1_0004, {26'd0, 1'b1, 2'd0, 3'd3});   // softmax, zero fill into decoder 1
    axi_write(32'h1_0020, {22'd0, 10'd400});
    axi_write(32'h1_0024, {3'd0, 13'd4, 3'd0, 13'd64});
    sfu_run();
    axi_read(32'h1_0044, d);
    chk(d == 1, "head skip counted");
    vec_read(1'b1, 65, v);
    chk(v == '0, "skipped head's context zeroed");

    // 8. sentence done, standby
    axi_write(32'h1_0000, 32'h8);
    axi_write(32'h1_0000, 32'h4);
    axi_read(32'h1_0000, d);
    if (d[9:8] == 2'd0) n_stby++;
    repeat (300) @(negedge clk);
    chk(vdd_mv == 10'd500 && pll_freq_mhz == 12'd0, "standby supply");

    $display("mechanisms: embedding copies %0d, PU runs %0d, gated VMAC cycles %0d, port stalls %0d, encoder writes %0d,",
             n_emb, n_pu, n_gate, n_stall, n_enc);
    $display("  host read-backs %0d, residual adds %0d, DVFS scalings %0d, EE interrupts %0d, head skips %0d, standby %0d",
             n_hread, n_sfu_add, n_scale, n_irq, n_skip, n_stby);
    chk(n_emb == N, "embedding copies");
    chk(n_pu == 1, "PU matrix multiply");
    chk(n_gate > 0, "VMAC null gating");
    chk(n_stall > 0, "decoder port stall");
    chk(n_enc >= N, "encoder write-back");
    chk(n_hread > 0, "host read-back");
    chk(n_sfu_add == 1, "residual add");
    chk(n_scale == 1, "DVFS scaling");
    chk(n_irq == 1, "early-exit interrupt");
    chk(n_skip == 1, "null head skip");
    chk(n_stby == 1, "standby");
    finish_tb();
  end
endmodule
