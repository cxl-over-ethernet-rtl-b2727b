// retry_buffer: transmit-side store of packets that may have to be sent again.
//
// Both the CN (requests) and the MN (responses) keep one. Each packet pushed is
// given the next sequence number and kept at index seq mod DEPTH until it is
// acknowledged. The window is [base, next): base advances over entries marked
// done, so entries may be acknowledged out of order (ack_one, used by the CN
// when a response arrives) or cumulatively (ack_cum, used by the MN with the
// acknowledgment the CN piggybacks on its requests).
//
// Retransmission, as the paper describes it:
//  * sack(s): entry s is marked as received; the packets between the previous
//    SACK mark (or, without one, the last acknowledged packet) and s are resent.
//  * retx(lo, hi): resend [lo, hi), used for a gap in the ACK stream at the CN
//    and for a duplicate request at the MN.
//  * timeout: when the oldest entry has waited TIMEOUT cycles since the window
//    last moved or was resent, the whole window is resent (the basic policy),
//    SACK-marked entries included.
// Resending skips entries already done or SACK-marked. A new range arriving
// while one is being resent is merged with it (union by window offset).
//
// Interface: push_* (new packets, push_seq is the number they receive),
// rt_* (resent packets out; the owner gives them priority), ack/sack/retx
// inputs as above. Storage is an array of DEPTH x W with combinational read.
// Depth 512 follows the paper (256 read + 256 write requests in flight); the
// timeout value is this design's choice.
module retry_buffer #(
  parameter int unsigned W       = 712,
  parameter int unsigned DEPTH   = 512,
  parameter int unsigned SEQ_W   = 16,
  parameter int unsigned TIMEOUT = 4096
) (
  input  logic             clk,
  input  logic             rst_n,
  // new packets
  input  logic             push_valid,
  output logic             push_ready,
  input  logic [W-1:0]     push_data,
  output logic [SEQ_W-1:0] push_seq,
  // acknowledgments
  input  logic             ack_one_valid,
  input  logic [SEQ_W-1:0] ack_one_seq,
  input  logic             ack_cum_valid,
  input  logic [SEQ_W-1:0] ack_cum_seq,
  input  logic             sack_valid,
  input  logic [SEQ_W-1:0] sack_seq,
  input  logic             retx_valid,
  input  logic [SEQ_W-1:0] retx_lo,
  input  logic [SEQ_W-1:0] retx_hi,
  // resent packets
  output logic             rt_valid,
  input  logic             rt_ready,
  output logic [W-1:0]     rt_data,
  output logic [SEQ_W-1:0] rt_seq,
  // status
  output logic [SEQ_W-1:0] base_seq,
  output logic             empty,
  output logic             timeout_pulse
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]     mem   [DEPTH];
  logic [DEPTH-1:0] done_q, sacked_q;
  logic [SEQ_W-1:0] base, nxt;
  logic [SEQ_W-1:0] rt_ptr, rt_end;
  logic             rt_active;
  logic [SEQ_W-1:0] last_sack;
  logic             last_sack_v;
  logic [31:0]      timer;

  function automatic logic [SEQ_W-1:0] off(input logic [SEQ_W-1:0] s, input logic [SEQ_W-1:0] b);
    return s - b;
  endfunction

  logic [SEQ_W-1:0] used;
  assign used       = nxt - base;
  assign push_ready = (used < SEQ_W'(DEPTH));
  assign push_seq   = nxt;
  assign base_seq   = base;
  assign empty      = (used == '0);

  function automatic logic in_win(input logic [SEQ_W-1:0] s, input logic [SEQ_W-1:0] b,
                                  input logic [SEQ_W-1:0] n);
    return off(s, b) < off(n, b);
  endfunction

  // ---- resend scanner ----
  logic cur_skip;
  assign cur_skip = done_q[rt_ptr[AW-1:0]] || sacked_q[rt_ptr[AW-1:0]] || !in_win(rt_ptr, base, nxt);
  assign rt_valid = rt_active && (rt_ptr != rt_end) && !cur_skip;
  assign rt_data  = mem[rt_ptr[AW-1:0]];
  assign rt_seq   = rt_ptr;

  // ---- requested ranges this cycle ----
  logic             req_v;
  logic [SEQ_W-1:0] req_lo, req_hi;
  logic             sack_ok;
  logic [SEQ_W-1:0] sack_lo;

  logic [SEQ_W-1:0] lo_c, hi_c;
  always_comb begin
    lo_c    = in_win(retx_lo, base, nxt) ? retx_lo : base;
    // an end outside [base, nxt] is clamped to nxt when the range starts inside
    // the window; otherwise the whole range is already acknowledged (empty)
    if (off(retx_hi, base) <= off(nxt, base)) hi_c = retx_hi;
    else if (in_win(retx_lo, base, nxt))       hi_c = nxt;
    else                                       hi_c = base;
    sack_ok = sack_valid && in_win(sack_seq, base, nxt);
    sack_lo = base;
    if (last_sack_v && in_win(last_sack, base, nxt) && off(last_sack, base) < off(sack_seq, base))
      sack_lo = last_sack + 1'b1;

    req_v  = 1'b0;
    req_lo = base;
    req_hi = base;
    if (sack_ok) begin
      req_v  = 1'b1;
      req_lo = sack_lo;
      req_hi = sack_seq;
    end
    if (retx_valid) begin
      if (!req_v) begin
        req_v = (off(lo_c, base) < off(hi_c, base));
        req_lo = lo_c;
        req_hi = hi_c;
      end else begin
        if (off(lo_c, base) < off(req_lo, base)) req_lo = lo_c;
        if (off(hi_c, base) > off(req_hi, base)) req_hi = hi_c;
      end
    end
    if (!empty && timer >= 32'(TIMEOUT - 1)) begin
      req_v  = 1'b1;
      req_lo = base;
      req_hi = nxt;
    end
  end
  assign timeout_pulse = !empty && timer >= 32'(TIMEOUT - 1);

  // ---- state ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base        <= '0;
      nxt         <= '0;
      done_q      <= '0;
      sacked_q    <= '0;
      rt_active   <= 1'b0;
      rt_ptr      <= '0;
      rt_end      <= '0;
      last_sack   <= '0;
      last_sack_v <= 1'b0;
      timer       <= '0;
    end else begin
      logic [SEQ_W-1:0] b_new;
      b_new = base;

      // push
      if (push_valid && push_ready) begin
        done_q[nxt[AW-1:0]]   <= 1'b0;
        sacked_q[nxt[AW-1:0]] <= 1'b0;
        nxt <= nxt + 1'b1;
      end

      // acknowledgments
      if (ack_one_valid && in_win(ack_one_seq, base, nxt))
        done_q[ack_one_seq[AW-1:0]] <= 1'b1;
      if (ack_cum_valid && in_win(ack_cum_seq, base, nxt)) begin
        b_new = ack_cum_seq + 1'b1;
      end
      // A SACK mark only spares a packet from the fast resends. A timeout resends
      // everything not yet done, since the answer to a SACKed packet may be lost.
      if (timeout_pulse) sacked_q <= '0;
      if (sack_ok) begin
        sacked_q[sack_seq[AW-1:0]] <= 1'b1;
        last_sack   <= sack_seq;
        last_sack_v <= 1'b1;
      end

      // base advances over a done head entry (one per cycle)
      if (b_new == base && base != nxt && done_q[base[AW-1:0]])
        b_new = base + 1'b1;
      base <= b_new;
      if (last_sack_v && !in_win(last_sack, b_new, nxt + 1'b1)) last_sack_v <= 1'b0;

      // resend scanner
      if (rt_active) begin
        if (rt_ptr == rt_end) rt_active <= 1'b0;
        else if (cur_skip || (rt_valid && rt_ready)) rt_ptr <= rt_ptr + 1'b1;
      end
      if (req_v) begin
        if (rt_active && rt_ptr != rt_end) begin
          if (off(req_lo, base) < off(rt_ptr, base)) rt_ptr <= req_lo;
          if (off(req_hi, base) > off(rt_end, base)) rt_end <= req_hi;
        end else begin
          rt_ptr <= req_lo;
          rt_end <= req_hi;
        end
        rt_active <= 1'b1;
      end

      // timeout timer: restarts when the window moves or a resend is started
      if (b_new != base || req_v || empty) timer <= '0;
      else                                 timer <= timer + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push_valid && push_ready) mem[nxt[AW-1:0]] <= push_data;
  end

endmodule
