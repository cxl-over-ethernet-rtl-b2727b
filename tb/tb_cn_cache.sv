// tb_cn_cache: the 32 KB 4-way cache against a remote memory modelled in the
// testbench (answers after 30 cycles, in order).
// Directed part, in one set: a write miss into an empty set must not touch
// remote memory (no fetch); reading four lines fills the set in E; after
// touching the oldest line, a fifth line must evict the least recently used one
// and not the touched one; a dirty victim must be written back with its data.
// A hit must answer two cycles after the request is accepted.
// Random part: 3000 reads and writes over 16 sets x 10 tags, every read checked
// against a reference memory, every request answered with its id.
`timescale 1ns/1ps
module tb_cn_cache;
  import coe_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = !clk;

  logic req_valid, req_ready, rsp_valid, rsp_ready, mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  mreq_t req, mem_req;
  mrsp_t rsp, mem_rsp;
  logic ev_hit, ev_miss, ev_writeback, ev_wr_nofetch;

  cn_cache dut (.*);

  // remote memory model
  logic [511:0] remote [logic [33:0]];
  mreq_t pend [$];
  int    pend_t [$];
  int    now = 0, n_rd = 0, n_wr = 0;
  assign mem_req_ready = 1'b1;
  always @(posedge clk) begin
    now++;
    mem_rsp_valid <= 1'b0;
    if (rst_n && mem_req_valid && mem_req_ready) begin
      pend.push_back(mem_req); pend_t.push_back(now + 30);
      if (mem_req.we) begin remote[mem_req.addr[39:6]] = mem_req.data; n_wr++; end
      else n_rd++;
    end
    if (pend.size() > 0 && pend_t[0] <= now && (!mem_rsp_valid || mem_rsp_ready)) begin
      mreq_t m;
      m = pend.pop_front(); void'(pend_t.pop_front());
      mem_rsp_valid <= 1'b1;
      mem_rsp.we   <= m.we;
      mem_rsp.id   <= m.id;
      mem_rsp.data <= m.we ? '0 : (remote.exists(m.addr[39:6]) ? remote[m.addr[39:6]] : '0);
    end
  end

  int checks = 0, failures = 0;
  logic [511:0] ref_mem [logic [33:0]];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one access; returns latency in cycles from acceptance to response
  task automatic access(input logic we, input logic [39:0] addr, input logic [511:0] data,
                        output int lat, output logic [511:0] rdata);
    req_valid <= 1; req <= '{we: we, id: 8'(addr[13:6]), addr: addr, data: data};
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    req_valid <= 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!rsp_valid);
    rdata = rsp.data;
    chk(rsp.id == 8'(addr[13:6]) && rsp.we == we, "response id/we");
    if (we) ref_mem[addr[39:6]] = data;
    else chk(rdata == (ref_mem.exists(addr[39:6]) ? ref_mem[addr[39:6]] : '0),
             $sformatf("read data at %h", addr));
  endtask

  function automatic logic [39:0] a_of(input int tag, input int set);
    return 40'(tag) << 13 | 40'(set) << 6;   // 128 sets of 64 B: tag above bit 13
  endfunction

  initial begin
    int lat, r0, w0;
    logic [511:0] d;
    req_valid = 0; req = '0; rsp_ready = 1; mem_rsp_valid = 0; mem_rsp = '0;
    for (int t = 0; t < 16; t++) for (int s = 0; s < 128; s++) begin
      remote[a_of(t, s) >> 6] = {16{32'(t * 1000 + s)}};
      ref_mem[a_of(t, s) >> 6] = {16{32'(t * 1000 + s)}};
    end
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);

    // write miss into an empty set: no remote traffic
    r0 = n_rd; w0 = n_wr;
    access(1, a_of(1, 5), {16{32'hCAFE0001}}, lat, d);
    chk(n_rd == r0 && n_wr == w0 && lat == 2, $sformatf("no-fetch write miss (lat %0d)", lat));
    access(0, a_of(1, 5), '0, lat, d);
    chk(lat == 2, $sformatf("read hit latency %0d", lat));
    access(1, a_of(1, 5), {16{32'hCAFE0002}}, lat, d);
    chk(lat == 2, $sformatf("write hit latency %0d", lat));
    // fill the rest of set 5: tags 2,3,4 (read misses)
    r0 = n_rd;
    for (int t = 2; t <= 4; t++) access(0, a_of(t, 5), '0, lat, d);
    chk(n_rd == r0 + 3, "three read misses fetched");
    access(0, a_of(2, 5), '0, lat, d);      // touch: 1 is now least recent... then 3
    access(0, a_of(1, 5), '0, lat, d);      // touch 1 (M): LRU is now tag 3
    r0 = n_rd; w0 = n_wr;
    access(0, a_of(6, 5), '0, lat, d);      // evicts tag 3 (clean): one read, no write
    chk(n_rd == r0 + 1 && n_wr == w0, "clean LRU victim dropped");
    r0 = n_rd;
    access(0, a_of(3, 5), '0, lat, d);      // tag 3 is gone: miss, evicts tag 4
    chk(n_rd == r0 + 1, "LRU line was the one evicted");
    r0 = n_rd;
    access(0, a_of(1, 5), '0, lat, d);      // still there
    chk(n_rd == r0 && lat == 2, "recently used line kept");
    // now make tag 1 the LRU and force it out: write-back of CAFE0002
    access(0, a_of(6, 5), '0, lat, d);
    access(0, a_of(3, 5), '0, lat, d);
    access(0, a_of(2, 5), '0, lat, d);
    w0 = n_wr;
    access(1, a_of(7, 5), {16{32'hCAFE0003}}, lat, d);   // write miss, set full: evict tag 1 (M)
    chk(n_wr == w0 + 1 && remote[a_of(1, 5) >> 6] == {16{32'hCAFE0002}}, "dirty victim written back");
    chk(lat > 30, $sformatf("write miss with dirty victim waits for the write-back (lat %0d)", lat));

    // random traffic
    for (int i = 0; i < 3000; i++) begin
      logic [39:0] a;
      a = a_of($urandom_range(0, 9), $urandom_range(0, 15) * 3);
      access($urandom_range(0, 1), a, {16{$urandom()}}, lat, d);
    end
    $display("remote reads %0d writes %0d", n_rd, n_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #5ms; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
