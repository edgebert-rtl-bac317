// axil_if: AXI4-Lite bundle (32-bit address and data) used between the
// AXI splitter and the PU and SFU register partitions. Standard AXI4-Lite
// valid/ready rules apply on each of the five channels; the assertions
// below check that a valid, once raised, stays up with stable payload until
// its ready.
interface axil_if (input logic clk, input logic rst_n);
  timeunit 1ns;
  timeprecision 1ps;
  logic [31:0] awaddr;  logic awvalid; logic awready;
  logic [31:0] wdata;   logic [3:0] wstrb; logic wvalid; logic wready;
  logic [1:0]  bresp;   logic bvalid;  logic bready;
  logic [31:0] araddr;  logic arvalid; logic arready;
  logic [31:0] rdata;   logic [1:0] rresp; logic rvalid; logic rready;

  modport master (output awaddr, awvalid, wdata, wstrb, wvalid, bready, araddr, arvalid, rready,
                  input  awready, wready, bresp, bvalid, arready, rdata, rresp, rvalid);
  modport slave  (input  awaddr, awvalid, wdata, wstrb, wvalid, bready, araddr, arvalid, rready,
                  output awready, wready, bresp, bvalid, arready, rdata, rresp, rvalid);

  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
    awvalid && !awready |=> awvalid && $stable(awaddr));
  a_w_hold:  assert property (@(posedge clk) disable iff (!rst_n)
    wvalid && !wready |=> wvalid && $stable(wdata));
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
    arvalid && !arready |=> arvalid && $stable(araddr));
  a_b_hold:  assert property (@(posedge clk) disable iff (!rst_n)
    bvalid && !bready |=> bvalid);
  a_r_hold:  assert property (@(posedge clk) disable iff (!rst_n)
    rvalid && !rready |=> rvalid && $stable(rdata));
endinterface
