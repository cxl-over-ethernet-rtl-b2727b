// eth_link_model: behavioural stand-in for a pair of 100G Ethernet MAC+PHYs and
// the cable between them, one direction (kind: behavioural model).
//
// A frame offered on tx is accepted when the wire is free; it then occupies the
// wire for its size in bits divided by BITS_PER_CYCLE (310 bits per 322 MHz
// cycle is 100 Gb/s) and arrives DELAY cycles after it was accepted. The
// testbench can drop the next accepted frame (drop_next) or deliver it with the
// CRC-error flag (corrupt_next); each request applies to one frame.
module eth_link_model
  import coe_pkg::*;
#(
  parameter int unsigned DELAY          = 100,
  parameter int unsigned BITS_PER_CYCLE = 310
) (
  input  logic clk,
  input  logic rst_n,
  input  logic tx_valid,
  output logic tx_ready,
  input  pkt_t tx_pkt,
  output logic rx_valid,
  output logic rx_err,
  output pkt_t rx_pkt,
  input  logic drop_next,
  input  logic corrupt_next,
  output int unsigned n_sent,
  output int unsigned n_dropped,
  output int unsigned n_corrupted
);
  typedef struct { longint t; logic err; pkt_t p; } flight_t;
  flight_t     q[$];
  longint      now;
  int unsigned busy;
  logic        drop_pend, corr_pend;

  assign tx_ready = (busy == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= 0; busy <= 0; rx_valid <= 1'b0; rx_err <= 1'b0; rx_pkt <= '0;
      drop_pend <= 1'b0; corr_pend <= 1'b0; n_sent <= 0; n_dropped <= 0; n_corrupted <= 0;
    end else begin
      now <= now + 1;
      if (drop_next)    drop_pend <= 1'b1;
      if (corrupt_next) corr_pend <= 1'b1;
      if (busy != 0) busy <= busy - 1;
      if (tx_valid && tx_ready) begin
        busy   <= (wire_bytes(tx_pkt.cmd.fmt) * 8 + BITS_PER_CYCLE - 1) / BITS_PER_CYCLE - 1;
        n_sent <= n_sent + 1;
        if (drop_pend) begin
          drop_pend <= 1'b0;
          n_dropped <= n_dropped + 1;
        end else begin
          q.push_back('{t: now + DELAY, err: corr_pend, p: tx_pkt});
          if (corr_pend) begin
            corr_pend   <= 1'b0;
            n_corrupted <= n_corrupted + 1;
          end
        end
      end
      rx_valid <= 1'b0;
      if (q.size() > 0 && q[0].t <= now) begin
        rx_valid <= 1'b1;
        rx_err   <= q[0].err;
        rx_pkt   <= q[0].p;
        void'(q.pop_front());
      end
    end
  end
endmodule
