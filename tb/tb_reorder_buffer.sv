// tb_reorder_buffer: sends sequence numbers 0..199 to a 16-entry reorder buffer
// in a shuffled order (each number displaced by at most 7 places), with some
// numbers repeated, and checks that they come out exactly once, in order, and
// that the classification outputs (expected / gap / old / already held) agree
// with a model kept by the testbench: a gap is flagged only when a number
// before the packet is missing, and always when the expected one is.
`timescale 1ns/1ps
module tb_reorder_buffer;
  localparam int W = 32, DEPTH = 16, N = 200;
  logic clk = 0, rst_n = 0;
  always #2 clk = !clk;
  logic in_valid, in_exp, in_gap, in_old, in_dup, out_valid, out_ready;
  logic [15:0] in_seq, out_seq, expected;
  logic [W-1:0] in_data, out_data;

  reorder_buffer #(.W(W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, nout = 0;
  int order [$];
  bit seen [int];
  logic [4:0] held;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (int'(out_seq) != nout || out_data != 32'hB000_0000 + 32'(nout)) begin
      failures++; $display("FAIL: out seq %0d data %h, expected %0d", out_seq, out_data, nout);
    end
    seen.delete(nout);
    nout++;
  end

  initial begin
    // shuffled order in blocks of 8, plus duplicates
    for (int b = 0; b < N; b += 8) begin
      int blk [$];
      blk = {};
      for (int i = 0; i < 8; i++) blk.push_back(b + i);
      blk.shuffle();
      foreach (blk[i]) begin
        order.push_back(blk[i]);
        if ($urandom_range(0, 9) == 0) order.push_back(blk[i]);
      end
    end
    in_valid = 0; in_seq = 0; in_data = 0; out_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    foreach (order[k]) begin
      int s, d;
      bit hole;
      s = order[k];
      in_valid <= 1; in_seq <= 16'(s); in_data <= 32'hB000_0000 + 32'(s);
      @(negedge clk);
      d = s - int'(expected);
      checks++;
      // a gap is reported when a number before s is missing; it must be when
      // the expected number itself is missing, and never for a number ahead
      // of stored ones only
      hole = 0;
      for (int m = int'(expected); m < s; m++) if (!seen.exists(m)) hole = 1;
      if (in_exp != (d == 0) || in_old != (d < 0) ||
          (in_gap && !(hole && d < DEPTH)) ||
          (!in_gap && d > 0 && d < DEPTH && !seen.exists(int'(expected))) ||
          in_dup != ((d >= 0) && seen.exists(s))) begin
        failures++;
        $display("FAIL: seq %0d exp %0d: flags e%0d g%0d o%0d d%0d", s, expected, in_exp, in_gap, in_old, in_dup);
      end
      if (d >= 0) seen[s] = 1;
      @(posedge clk);
      in_valid <= 0;
      @(posedge clk);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (nout != N) begin failures++; $display("FAIL: %0d released", nout); end
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
