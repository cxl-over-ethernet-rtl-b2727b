// tb_token_bucket: offers a packet every cycle and counts how many the bucket
// lets through in a window, at several rates and packet sizes. The expected
// count is rate * cycles / (bytes * 8 * 250), worked out here from the 250 MHz
// clock; the count may differ from it by the bucket's burst allowance only.
`timescale 1ns/1ps
module tb_token_bucket;
  logic clk = 0, rst_n = 0;
  always #2 clk = !clk;
  logic [19:0] rate;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [7:0] bytes;
  token_bucket #(.RATE_W(20), .CLK_MHZ(250), .BURST_BYTES(1024)) dut (
    .clk, .rst_n, .rate, .in_valid, .in_ready, .in_bytes(bytes), .out_valid, .out_ready);

  int checks = 0, failures = 0;

  task automatic run(input int r, input int b, input int cycles);
    longint sent, expct, tol;
    rate = 20'(r); bytes = 8'(b);
    rst_n = 0; repeat (2) @(posedge clk); rst_n = 1;
    sent = 0;
    repeat (cycles) begin
      @(posedge clk);
      if (in_valid && in_ready) sent++;
    end
    expct = longint'(r) * cycles / (longint'(b) * 8 * 250);
    tol   = 1024 / b + 2;
    checks++;
    if (sent < expct - tol || sent > expct + tol) begin
      failures++;
      $display("FAIL: rate %0d bytes %0d: sent %0d expected %0d", r, b, sent, expct);
    end else $display("rate %0d Mb/s, %0d B: %0d packets (expected %0d)", r, b, sent, expct);
  endtask

  initial begin
    in_valid = 1; out_ready = 1; rate = 0; bytes = 113;
    run(100000, 113, 20000);
    run(50000, 113, 20000);
    run(41000, 49, 20000);
    run(10000, 113, 20000);
    run(1000, 49, 40000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
