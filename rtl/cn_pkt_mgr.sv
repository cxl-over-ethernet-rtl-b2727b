// cn_pkt_mgr: CN packet manager. Turns remote-memory requests into Ethernet
// frames for the MN, and the MN's frames back into in-order responses.
//
// Transmit: every request (a cache miss, a write-back) becomes one read- or
// write-request packet (coe_pkg::pkt_t) with the next sequence number; a copy is
// kept in the retry buffer. The request also carries, in its second sequence
// field, the last response this CN has received in order, which lets the MN
// free its own retry buffer. Packets the retry buffer resends go out first;
// their acknowledgment field is refreshed.
//
// Receive: frames the MAC marks as CRC errors are dropped (the loss is then
// found from the next response or by the timeout). A read or write response
// with sequence number s acknowledges request s: it is stored in the reorder
// buffer and the request is marked done in the retry buffer. Two fast
// retransmission rules of the paper act here:
//   * a response s arriving while responses between the previous one and s are
//     missing resends the requests in between (their responses were lost; the
//     MN answers such duplicates from its own retry buffer);
//   * a SACK flag (stand-alone or merged into a response) marks the SACKed
//     request, and the retry buffer resends the requests between it and the
//     previous SACK mark or the last acknowledged request.
// Responses leave in sequence order towards the cache.
//
// Interface: req_*/rsp_* to the cache (coe_pkg::mreq_t/mrsp_t), tx_* packet
// stream with its wire size tx_bytes (to the token bucket), rx_* packet stream
// from the MAC (always accepted), MAC addresses, event counters.
// The field choices are this design's (see coe_pkg); the mechanisms follow the
// paper.
//
// Timing: a request accepted in cycle n is offered on tx_* in cycle n+1
// (registered into the retry buffer, resends go first); a response received in
// order is offered to the cache the cycle after it arrives. A gap or SACK
// starts resending in the cycle after the frame that triggers it.
module cn_pkt_mgr
  import coe_pkg::*;
#(
  parameter int unsigned DEPTH   = 512,
  parameter int unsigned TIMEOUT = 4096
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [MAC_W-1:0]  cfg_local_mac,
  input  logic [MAC_W-1:0]  cfg_remote_mac,
  input  logic              req_valid,
  output logic              req_ready,
  input  mreq_t             req,
  output logic              rsp_valid,
  input  logic              rsp_ready,
  output mrsp_t             rsp,
  output logic              tx_valid,
  input  logic              tx_ready,
  output pkt_t              tx_pkt,
  output logic [7:0]        tx_bytes,
  input  logic              rx_valid,
  input  logic              rx_err,
  input  pkt_t              rx_pkt,
  output logic [31:0]       cnt_retx,
  output logic [31:0]       cnt_crc_err,
  output logic [31:0]       cnt_sack,
  output logic [31:0]       cnt_gap,
  output logic [31:0]       cnt_timeout
);
  // ---------------- retry buffer ----------------
  logic             push_valid, push_ready;
  logic [SEQ_W-1:0] push_seq;
  pkt_t             new_pkt;
  logic             rt_valid, rt_ready;
  logic [PKT_W-1:0] rt_data;
  logic [SEQ_W-1:0] rt_seq, rb_base;
  logic             rb_empty, rb_timeout;

  logic             rx_ok, rx_is_rsp;
  logic             gap_v;
  logic [SEQ_W-1:0] prev_rx, rob_expected;

  assign rx_ok     = rx_valid && !rx_err;
  assign rx_is_rsp = rx_ok && (rx_pkt.cmd.fmt == CMD_RD_RSP || rx_pkt.cmd.fmt == CMD_WR_RSP);

  // A response whose number is more than one past the previous response means
  // the responses in between were lost.
  logic [SEQ_W-1:0] rx_d;
  assign rx_d  = rx_pkt.seq - prev_rx;
  assign gap_v = rx_is_rsp && (rx_d > SEQ_W'(1)) && (rx_d <= SEQ_W'(DEPTH));

  retry_buffer #(.W(PKT_W), .DEPTH(DEPTH), .SEQ_W(SEQ_W), .TIMEOUT(TIMEOUT)) u_rb (
    .clk, .rst_n,
    .push_valid, .push_ready, .push_data(new_pkt), .push_seq,
    .ack_one_valid(rx_is_rsp), .ack_one_seq(rx_pkt.seq),
    .ack_cum_valid(1'b0), .ack_cum_seq('0),
    .sack_valid(rx_ok && rx_pkt.cmd.sack), .sack_seq(rx_pkt.addr[SEQ_W-1:0]),
    .retx_valid(gap_v), .retx_lo(prev_rx + 1'b1), .retx_hi(rx_pkt.seq),
    .rt_valid, .rt_ready, .rt_data, .rt_seq,
    .base_seq(rb_base), .empty(rb_empty), .timeout_pulse(rb_timeout)
  );

  always_comb begin
    new_pkt          = '0;
    new_pkt.da       = cfg_remote_mac;
    new_pkt.sa       = cfg_local_mac;
    new_pkt.etype    = ETYPE_COE;
    new_pkt.cmd.fmt  = req.we ? CMD_WR_REQ : CMD_RD_REQ;
    new_pkt.seq      = push_seq;
    new_pkt.ack      = rob_expected - 1'b1;
    new_pkt.awid     = req.id;
    new_pkt.addr     = req.addr;
    new_pkt.data     = req.we ? req.data : '0;
  end

  // ---------------- transmit mux: resends first ----------------
  pkt_t rt_pkt;
  always_comb begin
    rt_pkt     = pkt_t'(rt_data);
    rt_pkt.ack = rob_expected - 1'b1;
  end

  assign tx_valid   = rt_valid || (req_valid && push_ready);
  assign tx_pkt     = rt_valid ? rt_pkt : new_pkt;
  assign tx_bytes   = 8'(wire_bytes(tx_pkt.cmd.fmt));
  assign rt_ready   = tx_ready;
  assign push_valid = !rt_valid && req_valid && tx_ready;
  assign req_ready  = !rt_valid && push_ready && tx_ready;

  // ---------------- receive: reorder buffer ----------------
  logic             rob_out_valid;
  logic [PKT_W-1:0] rob_out_data;
  logic [SEQ_W-1:0] rob_out_seq;
  logic             rob_exp, rob_gap, rob_old, rob_dup;
  pkt_t             rob_pkt;

  reorder_buffer #(.W(PKT_W), .DEPTH(DEPTH), .SEQ_W(SEQ_W)) u_rob (
    .clk, .rst_n,
    .in_valid(rx_is_rsp), .in_seq(rx_pkt.seq), .in_data(rx_pkt),
    .in_exp(rob_exp), .in_gap(rob_gap), .in_old(rob_old), .in_dup(rob_dup),
    .out_valid(rob_out_valid), .out_ready(rsp_ready), .out_data(rob_out_data),
    .out_seq(rob_out_seq), .expected(rob_expected), .held()
  );

  assign rob_pkt   = pkt_t'(rob_out_data);
  assign rsp_valid = rob_out_valid;
  assign rsp.we    = (rob_pkt.cmd.fmt == CMD_WR_RSP);
  assign rsp.id    = rob_pkt.awid;
  assign rsp.data  = rob_pkt.data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_rx     <= '1;   // "response -1": the first expected is 0
      cnt_retx    <= '0;
      cnt_crc_err <= '0;
      cnt_sack    <= '0;
      cnt_gap     <= '0;
      cnt_timeout <= '0;
    end else begin
      if (rx_is_rsp && rx_d != '0 && rx_d <= SEQ_W'(DEPTH)) prev_rx <= rx_pkt.seq;
      if (rt_valid && rt_ready)            cnt_retx    <= cnt_retx + 1'b1;
      if (rx_valid && rx_err)              cnt_crc_err <= cnt_crc_err + 1'b1;
      if (rx_ok && rx_pkt.cmd.sack)        cnt_sack    <= cnt_sack + 1'b1;
      if (gap_v)                           cnt_gap     <= cnt_gap + 1'b1;
      if (rb_timeout)                      cnt_timeout <= cnt_timeout + 1'b1;
    end
  end

endmodule
