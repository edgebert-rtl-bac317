// axi_splitter: routes host AXI4-Lite transactions to the PU or the SFU
// register partition. Address bit 16 selects the partition (0: PU,
// 1: SFU). Each direction holds one transaction: a write is collected
// (address and data), forwarded to the selected slave, and its B response
// returned; a read is forwarded and its R response returned. Splitting the
// host's instruction and data stream between the two AXI slave partitions
// follows the paper; the address bit and the one-deep buffering are this
// design's choices.
module axi_splitter (
  input  logic  clk,
  input  logic  rst_n,
  axil_if.slave  s,
  axil_if.master m_pu,
  axil_if.master m_sfu
);
  timeunit 1ns;
  timeprecision 1ps;
  typedef enum logic [1:0] {W_COLLECT, W_SEND, W_RESP} wstate_e;
  typedef enum logic [1:0] {R_IDLE, R_SEND, R_RESP} rstate_e;
  wstate_e ws;
  rstate_e rs;
  logic have_aw, have_w, aw_done, w_done;
  logic [31:0] awaddr_q, wdata_q, araddr_q;
  logic [3:0]  wstrb_q;
  logic wsel, rsel;

  assign wsel = awaddr_q[16];
  assign rsel = araddr_q[16];

  // host side
  assign s.awready = (ws == W_COLLECT) && !have_aw;
  assign s.wready  = (ws == W_COLLECT) && !have_w;
  assign s.arready = (rs == R_IDLE);

  // write forwarding
  always_comb begin
    m_pu.awaddr = awaddr_q;  m_sfu.awaddr = awaddr_q;
    m_pu.wdata  = wdata_q;   m_sfu.wdata  = wdata_q;
    m_pu.wstrb  = wstrb_q;   m_sfu.wstrb  = wstrb_q;
    m_pu.awvalid  = (ws == W_SEND) && !wsel && !aw_done;
    m_sfu.awvalid = (ws == W_SEND) &&  wsel && !aw_done;
    m_pu.wvalid   = (ws == W_SEND) && !wsel && !w_done;
    m_sfu.wvalid  = (ws == W_SEND) &&  wsel && !w_done;
    m_pu.bready   = (ws == W_RESP) && !wsel && s.bready;
    m_sfu.bready  = (ws == W_RESP) &&  wsel && s.bready;
    s.bvalid = (ws == W_RESP) && (wsel ? m_sfu.bvalid : m_pu.bvalid);
    s.bresp  = wsel ? m_sfu.bresp : m_pu.bresp;
    m_pu.araddr = araddr_q;  m_sfu.araddr = araddr_q;
    m_pu.arvalid  = (rs == R_SEND) && !rsel;
    m_sfu.arvalid = (rs == R_SEND) &&  rsel;
    m_pu.rready   = (rs == R_RESP) && !rsel && s.rready;
    m_sfu.rready  = (rs == R_RESP) &&  rsel && s.rready;
    s.rvalid = (rs == R_RESP) && (rsel ? m_sfu.rvalid : m_pu.rvalid);
    s.rdata  = rsel ? m_sfu.rdata : m_pu.rdata;
    s.rresp  = rsel ? m_sfu.rresp : m_pu.rresp;
  end

  logic awhs, whs;
  assign awhs = wsel ? (m_sfu.awvalid && m_sfu.awready) : (m_pu.awvalid && m_pu.awready);
  assign whs  = wsel ? (m_sfu.wvalid && m_sfu.wready)   : (m_pu.wvalid && m_pu.wready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws <= W_COLLECT; rs <= R_IDLE; have_aw <= 1'b0; have_w <= 1'b0;
      aw_done <= 1'b0; w_done <= 1'b0;
      awaddr_q <= '0; wdata_q <= '0; wstrb_q <= '0; araddr_q <= '0;
    end else begin
      unique case (ws)
        W_COLLECT: begin
          if (s.awvalid && s.awready) begin have_aw <= 1'b1; awaddr_q <= s.awaddr; end
          if (s.wvalid && s.wready)   begin have_w <= 1'b1; wdata_q <= s.wdata; wstrb_q <= s.wstrb; end
          if (have_aw && have_w) begin ws <= W_SEND; aw_done <= 1'b0; w_done <= 1'b0; end
        end
        W_SEND: begin
          if (awhs) aw_done <= 1'b1;
          if (whs)  w_done  <= 1'b1;
          if ((aw_done || awhs) && (w_done || whs)) ws <= W_RESP;
        end
        W_RESP: if (s.bvalid && s.bready) begin
          ws <= W_COLLECT; have_aw <= 1'b0; have_w <= 1'b0;
        end
        default: ws <= W_COLLECT;
      endcase
      unique case (rs)
        R_IDLE: if (s.arvalid) begin araddr_q <= s.araddr; rs <= R_SEND; end
        R_SEND: if (rsel ? m_sfu.arready : m_pu.arready) rs <= R_RESP;
        R_RESP: if (s.rvalid && s.rready) rs <= R_IDLE;
        default: rs <= R_IDLE;
      endcase
    end
  end
endmodule
