// tb_cc_fsm: walks the congestion controller through every phase transition
// with timers shortened to t1..t6 = 50, 10, 11, 200, 40, 20 cycles (the paper's
// microsecond values read as cycles) and checks the rate and target rate after
// each step against values worked out by hand from the rules:
// halve on PFC, (CR+TR)/2 per speed-up, TR = 7/8 CR and CR = 3/4 CR on a PFC
// during recovery, +1000 Mb/s per exploration step, one step undone on PFC.
`timescale 1ns/1ps
module tb_cc_fsm;
  logic clk = 0, rst_n = 0;
  always #2 clk = !clk;
  logic pfc = 0;
  logic [19:0] rate, tr;
  logic [2:0] phase;
  logic acc, dup;
  localparam logic [2:0] A = 0, B = 1, C = 2, D = 3, E = 4, F = 5;

  cc_fsm #(.T1(50), .T2(10), .T3(11), .T4(200), .T5(40), .T6(20)) dut (
    .clk, .rst_n, .pfc, .init_rate(20'd100000), .rate, .target_rate(tr), .phase,
    .pfc_accepted(acc), .pfc_duplicate(dup));

  int checks = 0, failures = 0, ndup = 0;
  always @(posedge clk) if (dup) ndup++;

  task automatic expect_state(input logic [2:0] ph, input int cr, input int t, input string what);
    @(negedge clk);
    checks++;
    if (phase !== ph || rate !== 20'(cr) || (t >= 0 && tr !== 20'(t))) begin
      failures++;
      $display("FAIL %s: phase %0d rate %0d tr %0d, expected %0d %0d %0d", what, phase, rate, tr, ph, cr, t);
    end
  endtask

  task automatic give_pfc();
    @(posedge clk) pfc <= 1'b1;
    @(posedge clk) pfc <= 1'b0;
  endtask

  task automatic wait_phase(input logic [2:0] ph, input int maxc);
    int n = 0;
    while (phase != ph && n < maxc) begin @(posedge clk); n++; end
    checks++;
    if (phase != ph) begin failures++; $display("FAIL: phase %0d not reached", ph); end
  endtask

  int rates [$];
  int exp_rates [5] = '{62500, 81250, 90625, 95312, 97656};
  int cyc;

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    expect_state(A, 100000, 100000, "after reset");
    give_pfc();                                   // a -> b
    expect_state(B, 50000, 100000, "a->b halves");
    repeat (3) @(posedge clk);
    give_pfc();                                   // within t2: duplicate
    expect_state(B, 50000, 100000, "duplicate ignored");
    checks++; if (ndup != 1) begin failures++; $display("FAIL: duplicate not flagged"); end
    repeat (15) @(posedge clk);
    give_pfc();                                   // halve again
    expect_state(B, 25000, 100000, "second halving");
    // t1 later -> c, then five speed-ups -> a
    cyc = 0;
    while (phase == B) begin @(posedge clk); cyc++; end
    checks++; if (cyc < 49 || cyc > 51) begin failures++; $display("FAIL: t1 took %0d cycles", cyc); end
    while (phase == C) begin
      @(posedge clk);
      if (rates.size() == 0 || rates[$] != int'(rate)) if (int'(rate) != 25000) rates.push_back(int'(rate));
    end
    checks++;
    if (rates.size() != 5) begin failures++; $display("FAIL: %0d speed-ups", rates.size()); end
    else foreach (exp_rates[i]) if (rates[i] != exp_rates[i]) begin
      failures++; $display("FAIL: speed-up %0d rate %0d expected %0d", i, rates[i], exp_rates[i]);
    end
    expect_state(A, 97656, -1, "c->a after five speed-ups");
    // t4 in a -> e, +1000 every t5
    cyc = 0;
    while (phase == A) begin @(posedge clk); cyc++; end
    checks++; if (cyc < 198 || cyc > 201) begin failures++; $display("FAIL: t4 took %0d cycles", cyc); end
    repeat (100) @(posedge clk);
    expect_state(E, 99656, -1, "two exploration steps");
    give_pfc();                                   // e -> f, roll back one step
    expect_state(F, 98656, -1, "e->f rollback");
    wait_phase(A, 25);                            // t6 -> a
    expect_state(A, 98656, -1, "f->a after t6");
    give_pfc();                                   // a -> b
    expect_state(B, 49328, 98656, "a->b");
    wait_phase(C, 60);
    wait (rate != 20'd49328);
    expect_state(C, 73992, 98656, "first speed-up");
    give_pfc();                                   // c -> d
    expect_state(D, 55494, 64743, "c->d: 3/4 and TR 7/8");
    repeat (15) @(posedge clk);
    give_pfc();                                   // d: 3/4 again
    expect_state(D, 41620, 64743, "d: second 3/4");
    wait_phase(C, 60);                            // t1 -> c
    wait (rate != 20'd41620);
    expect_state(C, 53181, 64743, "d->c then speed-up toward TR");
    wait_phase(A, 100);
    wait_phase(E, 250);
    repeat (45) @(posedge clk);                   // one step
    give_pfc();                                   // e -> f
    repeat (15) @(posedge clk);
    begin
      int cr0;
      cr0 = int'(rate);
      give_pfc();                                 // f -> b, TR := CR
      expect_state(B, cr0 / 2, cr0, "f->b records rate");
    end
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
