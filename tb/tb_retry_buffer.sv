// tb_retry_buffer: pushes numbered packets into a 16-entry retry buffer and
// checks which packets it resends, in order, for each trigger:
//   SACK(4) with 0..2 done      -> resend 3 (between last acknowledged and mark)
//   SACK(7) after SACK(4)       -> resend 5, 6 (between the two marks)
//   retx [8, 10)                -> resend 8, 9
//   cumulative ack and full     -> window frees, push_ready follows occupancy
//   no acknowledgment           -> timeout resends the whole window, SACKed too
`timescale 1ns/1ps
module tb_retry_buffer;
  localparam int W = 32, DEPTH = 16, TO = 200;
  logic clk = 0, rst_n = 0;
  always #2 clk = !clk;

  logic push_valid, push_ready, ack_one_valid, ack_cum_valid, sack_valid, retx_valid;
  logic [W-1:0] push_data, rt_data;
  logic [15:0] push_seq, ack_one_seq, ack_cum_seq, sack_seq, retx_lo, retx_hi, rt_seq, base_seq;
  logic rt_valid, rt_ready, empty, timeout_pulse;

  retry_buffer #(.W(W), .DEPTH(DEPTH), .TIMEOUT(TO)) dut (.*);

  int checks = 0, failures = 0;
  int got [$];
  always @(posedge clk) if (rst_n && rt_valid && rt_ready) begin
    got.push_back(int'(rt_seq));
    checks++;
    if (rt_data != 32'hA000_0000 + 32'(rt_seq)) begin
      failures++; $display("FAIL: resent data %h for seq %0d", rt_data, rt_seq);
    end
  end

  task automatic idle();
    push_valid <= 0; ack_one_valid <= 0; ack_cum_valid <= 0; sack_valid <= 0; retx_valid <= 0;
  endtask

  int npushed = 0;
  task automatic push_n(input int n);
    for (int i = 0; i < n; i++) begin
      push_valid <= 1; push_data <= 32'hA000_0000 + 32'(npushed);
      npushed++;
      @(posedge clk);
      while (!push_ready) @(posedge clk);
    end
    push_valid <= 0;
  endtask

  task automatic expect_resend(input int exp[$], input string what);
    repeat (40) @(posedge clk);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: resent %p expected %p", what, got, exp);
    end
    got = {};
  endtask

  initial begin
    idle(); rt_ready = 1; push_data = 0;
    ack_one_seq = 0; ack_cum_seq = 0; sack_seq = 0; retx_lo = 0; retx_hi = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    push_n(10);                                            // 0..9
    for (int s = 0; s < 3; s++) begin
      ack_one_valid <= 1; ack_one_seq <= 16'(s); @(posedge clk);
    end
    ack_one_valid <= 0;
    repeat (4) @(posedge clk);
    checks++; if (base_seq != 3) begin failures++; $display("FAIL: base %0d", base_seq); end
    sack_valid <= 1; sack_seq <= 4; @(posedge clk); sack_valid <= 0;
    expect_resend('{3}, "SACK(4)");
    sack_valid <= 1; sack_seq <= 7; @(posedge clk); sack_valid <= 0;
    expect_resend('{5, 6}, "SACK(7) after SACK(4)");
    retx_valid <= 1; retx_lo <= 8; retx_hi <= 10; @(posedge clk); retx_valid <= 0;
    expect_resend('{8, 9}, "retx [8,10)");
    // timeout: nothing acknowledged for TO cycles -> 3..9 (4 and 7 included)
    repeat (TO) @(posedge clk);
    expect_resend('{3, 4, 5, 6, 7, 8, 9}, "timeout");
    // cumulative ack frees 3..9, then fill to 16 entries
    ack_cum_valid <= 1; ack_cum_seq <= 9; @(posedge clk); ack_cum_valid <= 0;
    @(posedge clk);
    checks++; if (!empty || base_seq != 10) begin failures++; $display("FAIL: cum ack base %0d", base_seq); end
    push_n(16);
    @(posedge clk);
    checks++; if (push_ready) begin failures++; $display("FAIL: not full after 16 pushes"); end
    ack_one_valid <= 1; ack_one_seq <= 10; @(posedge clk); ack_one_valid <= 0;
    repeat (2) @(posedge clk);
    checks++; if (!push_ready) begin failures++; $display("FAIL: no room after ack"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100us; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
