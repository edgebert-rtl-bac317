// axil_slave_port: AXI4-Lite slave handshake turned into a simple register
// access port. A write is accepted once both address and data have arrived;
// it is presented on reg_we/reg_waddr/reg_wdata and completes (B response)
// in the first cycle reg_wready is high. A read presents reg_raddr with
// reg_re for one cycle and returns reg_rdata, sampled in that cycle, on the
// R channel. One transaction of each kind at a time; responses are OKAY.
module axil_slave_port (
  input  logic        clk,
  input  logic        rst_n,
  axil_if.slave       axi,
  output logic        reg_we,
  output logic [15:0] reg_waddr,
  output logic [31:0] reg_wdata,
  input  logic        reg_wready,
  output logic        reg_re,
  output logic [15:0] reg_raddr,
  input  logic [31:0] reg_rdata
);
  timeunit 1ns;
  timeprecision 1ps;
  logic have_aw, have_w;
  logic [15:0] aw_q;
  logic [31:0] w_q;
  logic [15:0] ar_q;

  assign axi.awready = !have_aw && !axi.bvalid;
  assign axi.wready  = !have_w && !axi.bvalid;
  assign axi.bresp   = 2'b00;
  assign axi.rresp   = 2'b00;
  assign reg_we      = have_aw && have_w && !axi.bvalid;
  assign reg_waddr   = aw_q;
  assign reg_wdata   = w_q;
  assign axi.arready = !axi.rvalid && !reg_re;
  assign reg_raddr   = ar_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_aw <= 1'b0; have_w <= 1'b0; aw_q <= '0; w_q <= '0;
      axi.bvalid <= 1'b0; axi.rvalid <= 1'b0; axi.rdata <= '0; reg_re <= 1'b0; ar_q <= '0;
    end else begin
      if (axi.awvalid && axi.awready) begin have_aw <= 1'b1; aw_q <= axi.awaddr[15:0]; end
      if (axi.wvalid && axi.wready)   begin have_w  <= 1'b1; w_q  <= axi.wdata; end
      if (reg_we && reg_wready) begin
        have_aw <= 1'b0; have_w <= 1'b0; axi.bvalid <= 1'b1;
      end
      if (axi.bvalid && axi.bready) axi.bvalid <= 1'b0;
      reg_re <= 1'b0;
      if (axi.arvalid && axi.arready) begin reg_re <= 1'b1; ar_q <= axi.araddr[15:0]; end
      if (reg_re) begin axi.rvalid <= 1'b1; axi.rdata <= reg_rdata; end
      if (axi.rvalid && axi.rready) axi.rvalid <= 1'b0;
    end
  end
endmodule
