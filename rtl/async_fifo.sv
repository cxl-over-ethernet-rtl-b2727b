// async_fifo: dual-clock FIFO used wherever a stream crosses between the 250 MHz
// core clock, the 322.266 MHz Ethernet MAC clock and the 300 MHz DDR clock.
//
// The design sizes its FIFOs from the 256 read + 256 write requests the CXL IP can
// keep in flight, which gives the depth of 512 used by default (paper value).
// Implementation is the usual one (this design's choice): binary pointers with one
// extra wrap bit, converted to Gray code and passed through two flip-flops into the
// other domain. Full and the write-side fill level are computed in the write
// domain, empty in the read domain, both pessimistic by the synchroniser delay.
//
// Interface: write side wr_valid/wr_ready/wr_data, read side rd_valid/rd_ready/
// rd_data (first-word-fall-through: rd_data is valid whenever rd_valid is high).
// Resets are active low and asynchronous to each domain; both must be applied.
//
// Timing: a word written is visible to the reader 3 to 4 read-clock cycles
// later (two synchroniser flops plus the pointer register); freed space is seen
// by the writer after the same delay in write-clock cycles.
module async_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 512   // power of two
) (
  input  logic                     wr_clk,
  input  logic                     wr_rst_n,
  input  logic                     wr_valid,
  output logic                     wr_ready,
  input  logic [W-1:0]             wr_data,
  output logic [$clog2(DEPTH):0]   wr_level,

  input  logic                     rd_clk,
  input  logic                     rd_rst_n,
  output logic                     rd_valid,
  input  logic                     rd_ready,
  output logic [W-1:0]             rd_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];

  logic [AW:0] wptr, rptr;            // binary, own domain
  logic [AW:0] wgray, rgray;          // gray, own domain
  logic [AW:0] rgray_w1, rgray_w2;    // read pointer seen in write domain
  logic [AW:0] wgray_r1, wgray_r2;    // write pointer seen in read domain

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write domain ----------------
  logic [AW:0] rptr_w;
  assign rptr_w   = gray2bin(rgray_w2);
  assign wr_level = wptr - rptr_w;
  assign wr_ready = (wr_level != (AW+1)'(DEPTH));

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wptr     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wr_valid && wr_ready) begin
        wptr  <= wptr + 1'b1;
        wgray <= bin2gray(wptr + 1'b1);
      end
    end
  end

  always_ff @(posedge wr_clk) begin
    if (wr_valid && wr_ready) mem[wptr[AW-1:0]] <= wr_data;
  end

  // ---------------- read domain ----------------
  assign rd_valid = (rgray != wgray_r2);
  assign rd_data  = mem[rptr[AW-1:0]];

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rptr     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_valid && rd_ready) begin
        rptr  <= rptr + 1'b1;
        rgray <= bin2gray(rptr + 1'b1);
      end
    end
  end

endmodule
