// eci_vc_layer: virtual-channel sorting between the ECI link and the home node.
//
// Receive side: every message arrives with one of 14 virtual-channel numbers.
// Requests on the even and odd coherence request channels and voluntary
// downgrades on the even and odd downgrade channels are merged into one
// stream for the home agent; each of those four channels has its own small
// queue so that a stalled class never blocks another (the reason virtual
// channels exist), and a round-robin arbiter picks among them.  I/O requests
// go to the configuration block.  Anything else (responses to home-initiated
// requests, which this home node never sends, interrupts, barriers) is
// counted and consumed.
// Transmit side: responses with data are put on the even or odd data-response
// channel according to bit 0 of the line number; I/O responses go on the I/O
// response channel; the two sources are merged round-robin.
// The count of 14 channels, 10 of them coherent, and the even/odd split follow
// the paper; the channel numbering (eci_pkg) and the queue depth are this
// design's choices.
module eci_vc_layer
  import eci_pkg::*;
#(
  parameter int NUM_VC   = 14,
  parameter int Q_DEPTH  = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // from link layer
  input  logic        rx_valid,
  output logic        rx_ready,
  input  eci_msg_t    rx_msg,
  // coherence requests to home agent
  output logic        coh_valid,
  input  logic        coh_ready,
  output eci_msg_t    coh_msg,
  // I/O requests to config
  output logic        io_valid,
  input  logic        io_ready,
  output eci_msg_t    io_msg,
  // coherence responses from home agent
  input  logic        rsp_valid,
  output logic        rsp_ready,
  input  eci_msg_t    rsp_msg,
  // I/O responses from config
  input  logic        io_rsp_valid,
  output logic        io_rsp_ready,
  input  eci_msg_t    io_rsp_msg,
  // to link layer
  output logic        tx_valid,
  input  logic        tx_ready,
  output eci_msg_t    tx_msg,
  // number of messages received on channels this node does not serve
  output logic [31:0] unexpected_cnt
);
  // ---------------- receive ----------------
  // queue 0: VC_REQ_E, 1: VC_REQ_O, 2: VC_VDN_E, 3: VC_VDN_O
  logic [3:0]    q_in_valid, q_in_ready, q_out_valid, q_out_ready;
  eci_msg_t      q_out [4];
  logic [1:0]    sel;
  logic          sel_any;
  int            qsel;

  always_comb begin
    qsel = -1;
    unique case (rx_msg.vc)
      VC_REQ_E: qsel = 0;
      VC_REQ_O: qsel = 1;
      VC_VDN_E: qsel = 2;
      VC_VDN_O: qsel = 3;
      default:  qsel = -1;
    endcase
  end

  always_comb begin
    q_in_valid = '0;
    io_valid   = 1'b0;
    rx_ready   = 1'b1;              // unserved channels are sunk
    if (qsel >= 0) begin
      q_in_valid[qsel] = rx_valid;
      rx_ready         = q_in_ready[qsel];
    end else if (rx_msg.vc == VC_IO_REQ) begin
      io_valid = rx_valid;
      rx_ready = io_ready;
    end
  end
  assign io_msg = rx_msg;

  for (genvar q = 0; q < 4; q++) begin : g_q
    sync_fifo #(.T(eci_msg_t), .DEPTH(Q_DEPTH)) u_q (
      .clk, .rst_n,
      .in_valid(q_in_valid[q]), .in_ready(q_in_ready[q]), .in_data(rx_msg),
      .out_valid(q_out_valid[q]), .out_ready(q_out_ready[q]), .out_data(q_out[q]),
      .count()
    );
  end

  rr_arbiter #(.N(4)) u_rx_rr (
    .clk, .rst_n, .req(q_out_valid), .advance(coh_ready), .any(sel_any), .idx(sel)
  );
  assign coh_valid = sel_any;
  assign coh_msg   = q_out[sel];
  always_comb begin
    q_out_ready = '0;
    if (sel_any && coh_ready) q_out_ready[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) unexpected_cnt <= '0;
    else if (rx_valid && qsel < 0 && rx_msg.vc != VC_IO_REQ)
      unexpected_cnt <= unexpected_cnt + 1;
  end

  // ---------------- transmit ----------------
  logic       tx_any;
  logic [0:0] tx_sel;
  rr_arbiter #(.N(2)) u_tx_rr (
    .clk, .rst_n, .req({io_rsp_valid, rsp_valid}), .advance(tx_ready),
    .any(tx_any), .idx(tx_sel)
  );

  always_comb begin
    tx_valid     = tx_any;
    rsp_ready    = tx_any && tx_ready && (tx_sel == 1'b0);
    io_rsp_ready = tx_any && tx_ready && (tx_sel == 1'b1);
    if (tx_sel == 1'b0) begin
      tx_msg    = rsp_msg;
      tx_msg.vc = rsp_msg.line[0] ? VC_RSPD_O : VC_RSPD_E;
    end else begin
      tx_msg    = io_rsp_msg;
      tx_msg.vc = VC_IO_RSP;
    end
  end

  // coherence traffic must use the channel matching its line parity
  assert property (@(posedge clk) disable iff (!rst_n)
    rx_valid && qsel >= 0 |-> rx_msg.vc[0] == rx_msg.line[0]);
  initial assert (NUM_VC == 14);
endmodule
