// mn_pkt_mgr: MN packet manager. Parses request frames from a CN, performs the
// memory accesses in request order, and returns response frames.
//
// Receive: CRC-error frames are dropped. A request's second sequence field (the
// last response the CN received in order) frees the response retry buffer up to
// that number. The request's own number s is held against the reorder buffer:
//   expected     stored; processed next
//   ahead (gap)  stored; earlier requests are missing. A SACK(s)+NAK(expected)
//                is scheduled. Following the paper it is not sent as a NAK at
//                once: it goes out merged into the next response (SACK+NAK+ACK)
//                or, when no response is about to leave, as a stand-alone
//                SACK+NAK frame.
//   behind       a duplicate: the CN lost the response. The stored response s is
//                resent from the retry buffer at once.
// A new frame is taken from the receive FIFO only while fewer than LOOKAHEAD
// requests wait in the reorder buffer, so a slow memory backs requests up into
// that FIFO (which is what the PFC threshold of mn_fpga watches), while a gap
// can still be seen, and its SACK+NAK merged, during an access in progress.
//
// Access engine (one request at a time): translate the CN's address (CN id =
// the source MAC) with the address translator, issue the read or write to the
// memory controller, wait for its completion, and send the read or write
// response, which is also the ACK of the request: its sequence number is the
// request's. A translation fault is answered with zero data and no access
// (this design's choice; the paper does not treat it).
//
// Interface: rx_* from the receive FIFO, tx_* packet stream to the MAC,
// xl_* to the address translator, mem_* to the DDR controller, counters.
// One CN is served per MN port (this design's choice, matching the one-server
// prototype); several CNs would need one sequence state each.
//
// Timing: a request at the head of the reorder buffer takes 1 cycle to the
// translator, 2 cycles for a TLB hit, the memory latency, and 1 cycle to the
// transmit port; a duplicate's stored response is offered the cycle after the
// duplicate arrives. A pending SACK+NAK leaves with the next response or, once
// the engine is idle, on its own in the next cycle.
//
// Lint note: the reset is reported as used both asynchronously and
// synchronously. The synchronous use is only the `disable iff (!rst_n)` of the
// response-sequence assertion, which is not hardware; every flip-flop resets
// asynchronously.
module mn_pkt_mgr
  import coe_pkg::*;
#(
  parameter int unsigned DEPTH     = 512,
  parameter int unsigned LOOKAHEAD = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [MAC_W-1:0]     cfg_local_mac,
  input  logic                 rx_valid,
  output logic                 rx_ready,
  input  logic                 rx_err,
  input  pkt_t                 rx_pkt,
  output logic                 tx_valid,
  input  logic                 tx_ready,
  output pkt_t                 tx_pkt,
  output logic                 xl_req_valid,
  input  logic                 xl_req_ready,
  output logic [MAC_W-1:0]     xl_cn_id,
  output logic [ADDR_W-1:0]    xl_addr,
  input  logic                 xl_rsp_valid,
  input  logic [MP_ADDR_W-1:0] xl_rsp_addr,
  input  logic                 xl_rsp_fault,
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output dreq_t                mem_req,
  input  logic                 mem_rsp_valid,
  input  logic [DATA_W-1:0]    mem_rsp_data,
  output logic [31:0]          cnt_req,
  output logic [31:0]          cnt_crc_err,
  output logic [31:0]          cnt_sack_sent,
  output logic [31:0]          cnt_merged,
  output logic [31:0]          cnt_dup_resend,
  output logic [31:0]          cnt_fault
);
  typedef enum logic [2:0] { E_IDLE, E_XL_REQ, E_XL_WAIT, E_MEM_REQ, E_MEM_WAIT, E_RSP } eng_e;
  eng_e eng;

  pkt_t                 q;          // request being served
  logic [MP_ADDR_W-1:0] mp_addr;
  logic [DATA_W-1:0]    rdata;

  // ---------------- reorder buffer ----------------
  logic             rx_fire, rx_ok, rx_is_req;
  logic             rob_exp, rob_gap, rob_old, rob_dup;
  logic             rob_out_valid, rob_pop;
  logic [PKT_W-1:0] rob_out_data;
  logic [SEQ_W-1:0] rob_out_seq, rob_expected;

  logic [$clog2(DEPTH):0] rob_held;
  // While the next expected request is missing, frames are always taken so
  // the gap can be filled; the CN window bounds what the reorder buffer holds.
  assign rx_ready  = !rob_out_valid || (rob_held < ($clog2(DEPTH)+1)'(LOOKAHEAD));
  assign rx_fire   = rx_valid && rx_ready;
  assign rx_ok     = rx_fire && !rx_err;
  assign rx_is_req = rx_ok && (rx_pkt.cmd.fmt == CMD_RD_REQ || rx_pkt.cmd.fmt == CMD_WR_REQ);
  assign rob_pop   = (eng == E_IDLE) && rob_out_valid;

  reorder_buffer #(.W(PKT_W), .DEPTH(DEPTH), .SEQ_W(SEQ_W)) u_rob (
    .clk, .rst_n,
    .in_valid(rx_is_req), .in_seq(rx_pkt.seq), .in_data(rx_pkt),
    .in_exp(rob_exp), .in_gap(rob_gap), .in_old(rob_old), .in_dup(rob_dup),
    .out_valid(rob_out_valid), .out_ready(rob_pop), .out_data(rob_out_data),
    .out_seq(rob_out_seq), .expected(rob_expected), .held(rob_held)
  );

  // ---------------- response retry buffer ----------------
  logic             push_valid, push_ready;
  logic [SEQ_W-1:0] push_seq;
  pkt_t             rsp_pkt;
  logic             rt_valid, rt_ready;
  logic [PKT_W-1:0] rt_data;
  logic [SEQ_W-1:0] rt_seq, rb_base;
  logic             rb_empty, rb_timeout;

  retry_buffer #(.W(PKT_W), .DEPTH(DEPTH), .SEQ_W(SEQ_W), .TIMEOUT(32'hFFFF_FFF0)) u_rb (
    .clk, .rst_n,
    .push_valid, .push_ready, .push_data(rsp_pkt), .push_seq,
    .ack_one_valid(1'b0), .ack_one_seq('0),
    .ack_cum_valid(rx_is_req), .ack_cum_seq(rx_pkt.ack),
    .sack_valid(1'b0), .sack_seq('0),
    .retx_valid(rx_is_req && rob_old), .retx_lo(rx_pkt.seq), .retx_hi(rx_pkt.seq + 1'b1),
    .rt_valid, .rt_ready, .rt_data, .rt_seq,
    .base_seq(rb_base), .empty(rb_empty), .timeout_pulse(rb_timeout)
  );

  always_comb begin
    rsp_pkt         = '0;
    rsp_pkt.da      = q.sa;
    rsp_pkt.sa      = cfg_local_mac;
    rsp_pkt.etype   = ETYPE_COE;
    rsp_pkt.cmd.fmt = (q.cmd.fmt == CMD_WR_REQ) ? CMD_WR_RSP : CMD_RD_RSP;
    rsp_pkt.seq     = q.seq;
    rsp_pkt.awid    = q.awid;
    rsp_pkt.addr    = q.addr;
    rsp_pkt.data    = (q.cmd.fmt == CMD_WR_REQ) ? '0 : rdata;
  end

  // ---------------- pending SACK+NAK ----------------
  logic             sack_pend;
  logic [SEQ_W-1:0] sack_seq, nak_seq;
  logic [MAC_W-1:0] sack_da;

  // ---------------- transmit mux ----------------
  // 1. resends from the retry buffer, 2. a new response (with SACK+NAK merged
  // when pending), 3. a stand-alone SACK+NAK when no response is on its way.
  logic send_rsp, send_ctrl, eng_quiet;
  pkt_t ctrl_pkt, rsp_out;

  assign eng_quiet = (eng == E_IDLE) && !rob_out_valid;
  assign send_rsp  = !rt_valid && (eng == E_RSP) && push_ready;
  assign send_ctrl = !rt_valid && sack_pend && eng_quiet;

  always_comb begin
    rsp_out = rsp_pkt;
    if (sack_pend) begin
      rsp_out.cmd.sack = 1'b1;
      rsp_out.cmd.nak  = 1'b1;
      rsp_out.ack      = nak_seq;
      rsp_out.addr     = {{(ADDR_W-SEQ_W){1'b0}}, sack_seq};
    end
    ctrl_pkt          = '0;
    ctrl_pkt.da       = sack_da;
    ctrl_pkt.sa       = cfg_local_mac;
    ctrl_pkt.etype    = ETYPE_COE;
    ctrl_pkt.cmd.fmt  = CMD_SACK;
    ctrl_pkt.cmd.sack = 1'b1;
    ctrl_pkt.cmd.nak  = 1'b1;
    ctrl_pkt.ack      = nak_seq;
    ctrl_pkt.addr     = {{(ADDR_W-SEQ_W){1'b0}}, sack_seq};
  end

  assign tx_valid   = rt_valid || send_rsp || send_ctrl;
  assign tx_pkt     = rt_valid ? pkt_t'(rt_data) : (send_rsp ? rsp_out : ctrl_pkt);
  assign rt_ready   = tx_ready;
  assign push_valid = send_rsp && tx_ready;

  // ---------------- translator / memory ----------------
  assign xl_req_valid  = (eng == E_XL_REQ);
  assign xl_cn_id      = q.sa;
  assign xl_addr       = q.addr;
  assign mem_req_valid = (eng == E_MEM_REQ);
  assign mem_req.we    = (q.cmd.fmt == CMD_WR_REQ);
  assign mem_req.addr  = mp_addr;
  assign mem_req.data  = q.data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eng       <= E_IDLE;
      q         <= '0;
      mp_addr   <= '0;
      rdata     <= '0;
      sack_pend <= 1'b0;
      sack_seq  <= '0;
      nak_seq   <= '0;
      sack_da   <= '0;
      cnt_req        <= '0;
      cnt_crc_err    <= '0;
      cnt_sack_sent  <= '0;
      cnt_merged     <= '0;
      cnt_dup_resend <= '0;
      cnt_fault      <= '0;
    end else begin
      if (rx_fire && rx_err)        cnt_crc_err    <= cnt_crc_err + 1'b1;
      if (rx_is_req)                cnt_req        <= cnt_req + 1'b1;
      if (rx_is_req && rob_old)     cnt_dup_resend <= cnt_dup_resend + 1'b1;

      // SACK+NAK bookkeeping
      if (send_ctrl && tx_ready) begin
        sack_pend     <= 1'b0;
        cnt_sack_sent <= cnt_sack_sent + 1'b1;
      end
      if (send_rsp && tx_ready && sack_pend) begin
        sack_pend     <= 1'b0;
        cnt_sack_sent <= cnt_sack_sent + 1'b1;
        cnt_merged    <= cnt_merged + 1'b1;
      end
      if (rx_is_req && rob_gap && !rob_dup) begin
        sack_pend <= 1'b1;
        sack_seq  <= rx_pkt.seq;
        nak_seq   <= rob_expected;
        sack_da   <= rx_pkt.sa;
      end

      unique case (eng)
        E_IDLE: if (rob_out_valid) begin
          q   <= pkt_t'(rob_out_data);
          eng <= E_XL_REQ;
        end
        E_XL_REQ: if (xl_req_ready) eng <= E_XL_WAIT;
        E_XL_WAIT: if (xl_rsp_valid) begin
          mp_addr <= xl_rsp_addr;
          if (xl_rsp_fault) begin
            rdata     <= '0;
            cnt_fault <= cnt_fault + 1'b1;
            eng       <= E_RSP;
          end else begin
            eng <= E_MEM_REQ;
          end
        end
        E_MEM_REQ: if (mem_req_ready) eng <= E_MEM_WAIT;
        E_MEM_WAIT: if (mem_rsp_valid) begin
          rdata <= mem_rsp_data;
          eng   <= E_RSP;
        end
        E_RSP: if (send_rsp && tx_ready) eng <= E_IDLE;
        default: eng <= E_IDLE;
      endcase
    end
  end

  // The response retry buffer numbers its entries in the order responses are
  // made, which is request order: the number it gives must be the request's.
  a_rsp_seq: assert property (@(posedge clk) disable iff (!rst_n) push_valid |-> push_seq == q.seq)
    else $error("mn_pkt_mgr: response sequence %0d does not match request %0d", push_seq, q.seq);

endmodule
