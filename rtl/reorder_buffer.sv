// reorder_buffer: receive-side buffer that hands packets on in sequence order.
//
// Both receiving sides keep one, so that memory accesses (MN) and responses (CN)
// are processed in the order they were issued although retransmission can make
// packets arrive out of order. A packet with sequence number s is classified
// against the next expected number `expected`:
//   exp  s == expected              stored, released next
//   ahead expected < s < expected+DEPTH  stored (flagged `gap` when a packet
//        before s has not been received; ahead of packets merely waiting to be
//        released is not a gap)
//   old  s behind expected          a duplicate, not stored
//   far  beyond the window          not stored
// Entries are released from `expected` upward as soon as they are present.
// A packet already held is not stored twice. How the buffer is organised is this
// design's choice; the paper only states that it keeps the order.
//
// Interface: in_valid/in_seq/in_data (always accepted; classification outputs
// are combinational on the input), out_valid/out_ready/out_data/out_seq, and
// `held`, the number of packets stored.
//
// Timing: a packet stored in cycle n is offered on out_* from cycle n+1;
// releasing one packet per cycle.
module reorder_buffer #(
  parameter int unsigned W     = 712,
  parameter int unsigned DEPTH = 512,
  parameter int unsigned SEQ_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [SEQ_W-1:0] in_seq,
  input  logic [W-1:0]     in_data,
  output logic             in_exp,
  output logic             in_gap,
  output logic             in_old,
  output logic             in_dup,    // in window but already held
  output logic             out_valid,
  input  logic             out_ready,
  output logic [W-1:0]     out_data,
  output logic [SEQ_W-1:0] out_seq,
  output logic [SEQ_W-1:0] expected,
  output logic [$clog2(DEPTH):0] held   // entries stored
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]     mem [DEPTH];
  logic [DEPTH-1:0] present;
  logic [SEQ_W-1:0] exp_q;
  logic [SEQ_W-1:0] d;

  assign d        = in_seq - exp_q;
  assign in_exp   = in_valid && (d == '0);
  // A gap means a packet is missing before this one: the first packet not yet
  // received (rcv_q) is behind it. rcv_q steps over stored packets one per
  // cycle, so right after a gap is filled a further gap may go unreported
  // (the sender's timeout still covers it).
  logic [SEQ_W-1:0] rcv_q, dr;
  logic             rcv_have;
  assign dr       = in_seq - rcv_q;
  assign rcv_have = ((rcv_q - exp_q) < SEQ_W'(DEPTH)) && present[rcv_q[AW-1:0]];
  assign in_gap   = in_valid && (d != '0) && (d < SEQ_W'(DEPTH)) &&
                    (dr != '0) && (dr < SEQ_W'(DEPTH)) && !rcv_have;
  logic in_ahead;
  assign in_ahead = in_valid && (d != '0) && (d < SEQ_W'(DEPTH));
  assign in_old   = in_valid && d[SEQ_W-1];
  assign in_dup   = (in_exp || in_ahead) && present[in_seq[AW-1:0]];
  assign expected = exp_q;

  logic store;
  assign store = (in_exp || in_ahead) && !present[in_seq[AW-1:0]];

  assign out_valid = present[exp_q[AW-1:0]];
  assign out_data  = mem[exp_q[AW-1:0]];
  assign out_seq   = exp_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      present <= '0;
      exp_q   <= '0;
      rcv_q   <= '0;
      held    <= '0;
    end else begin
      if ((store && in_seq == rcv_q) || rcv_have) rcv_q <= rcv_q + 1'b1;
      held <= held + (($clog2(DEPTH)+1)'(store)) - (($clog2(DEPTH)+1)'(out_valid && out_ready));
      if (out_valid && out_ready) begin
        present[exp_q[AW-1:0]] <= 1'b0;
        exp_q <= exp_q + 1'b1;
      end
      if (store) present[in_seq[AW-1:0]] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (store) mem[in_seq[AW-1:0]] <= in_data;
  end

endmodule
