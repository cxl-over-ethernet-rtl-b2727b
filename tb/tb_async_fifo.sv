// tb_async_fifo: writes 3000 random words from a 250 MHz domain into the FIFO
// and reads them in a 322 MHz domain, both sides with random stalls, and checks
// that every word comes out once and in order. The FIFO is kept at a depth of 16
// so that it fills; the write-side level must never exceed the depth and the
// FIFO must report full at least once.
`timescale 1ns/1ps
module tb_async_fifo;
  localparam int W = 32, DEPTH = 16, N = 3000;
  logic wclk = 0, rclk = 0, rst_n = 0;
  always #2.0   wclk = !wclk;
  always #1.552 rclk = !rclk;

  logic wr_valid, wr_ready, rd_valid, rd_ready;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(DEPTH):0] wr_level;

  async_fifo #(.W(W), .DEPTH(DEPTH)) dut (
    .wr_clk(wclk), .wr_rst_n(rst_n), .wr_valid, .wr_ready, .wr_data, .wr_level,
    .rd_clk(rclk), .rd_rst_n(rst_n), .rd_valid, .rd_ready, .rd_data);

  int checks = 0, failures = 0, nw = 0, nr = 0, full_seen = 0;
  logic [W-1:0] expq [$];

  always_ff @(posedge wclk) if (rst_n) begin
    if (wr_valid && wr_ready) begin expq.push_back(wr_data); nw <= nw + 1; end
    if (!wr_ready) full_seen <= full_seen + 1;
    if (wr_level > DEPTH) begin failures++; $display("FAIL: level %0d", wr_level); end
  end
  always_ff @(posedge wclk) if (!rst_n) begin wr_valid <= 0; wr_data <= '0; end
    else if (!wr_valid || wr_ready) begin
      wr_valid <= (nw + (wr_valid && wr_ready) < N) && ($urandom_range(0, 3) != 0);
      wr_data  <= $urandom();
    end
  always_ff @(posedge rclk) if (!rst_n) rd_ready <= 0; else rd_ready <= ($urandom_range(0, 2) == 0);
  always_ff @(posedge rclk) if (rst_n && rd_valid && rd_ready) begin
    logic [W-1:0] e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL: read from empty"); end
    else begin
      e = expq.pop_front();
      if (e !== rd_data) begin failures++; $display("FAIL: got %h exp %h", rd_data, e); end
    end
    nr <= nr + 1;
  end

  initial begin
    repeat (5) @(posedge wclk);
    rst_n = 1;
    wait (nr == N);
    repeat (20) @(posedge rclk);
    checks++; if (rd_valid) begin failures++; $display("FAIL: not empty at end"); end
    checks++; if (full_seen == 0) begin failures++; $display("FAIL: never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200us; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
