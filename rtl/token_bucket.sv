// token_bucket: shapes the CN transmit stream to the rate chosen by cc_fsm.
//
// The paper adjusts the sending rate with a token bucket; its sizing is this
// design's. Every clock cycle `rate` tokens (Mb/s) are added, and a packet of N
// wire bytes costs N * 8 * CLK_MHZ tokens, so the long-run throughput equals
// `rate` Mb/s exactly. A packet may leave while the balance is not negative; its
// cost is then subtracted (the balance may go below zero, which is repaid before
// the next packet). The balance is capped at BURST_BYTES worth of tokens.
//
// Interface: a valid/ready stream passes through (in_* -> out_*); `in_bytes` is
// the wire size of the packet offered. Combinational from in to out, no storage.
module token_bucket #(
  parameter int unsigned RATE_W      = 20,
  parameter int unsigned CLK_MHZ     = 250,
  parameter int unsigned BURST_BYTES = 1024,
  parameter int unsigned BYTES_W     = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [RATE_W-1:0]  rate,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [BYTES_W-1:0] in_bytes,
  output logic               out_valid,
  input  logic               out_ready
);
  localparam int unsigned BW  = 40;
  localparam longint      CAP = longint'(BURST_BYTES) * 8 * CLK_MHZ;

  logic signed [BW-1:0] tokens, next_tokens;
  logic                 allow;

  assign allow     = !tokens[BW-1];
  assign out_valid = in_valid && allow;
  assign in_ready  = out_ready && allow;

  always_comb begin
    next_tokens = tokens + BW'(rate);
    if (out_valid && out_ready)
      next_tokens = next_tokens - BW'(longint'(in_bytes) * 8 * CLK_MHZ);
    if (next_tokens > BW'(CAP)) next_tokens = BW'(CAP);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tokens <= '0;
    else        tokens <= next_tokens;
  end
endmodule
