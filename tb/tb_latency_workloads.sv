// tb_latency_workloads: the latency experiments of the design's evaluation, run
// on the whole design at its default parameters over clean links, measured at
// the CXL IP's side (from the cycle a request is accepted to the cycle its
// response appears, in 250 MHz core cycles).
//   1. 10,000 line writes to consecutive addresses, then
//   2. 10,000 reads of the same lines (the write and read latency experiments);
//   3. an all-hit scenario: a 32 KB working set, the cache's capacity, read
//      once to load it and then again, every access a hit;
//   4. a memory-latency-checker style mix: 2,000 random 64-byte accesses,
//      half reads, half writes, over 4 MB.
// Every read is checked against a reference memory. Checks: all data, a hit
// costs exactly 2 cycles, every access of the second all-hit pass hits, and
// the remote averages lie above the hit latency. The averages are printed; the
// link model adds 120 MAC cycles each way and the memory model 20 cycles, so
// absolute numbers stand for this set-up only.
`timescale 1ns/1ps
module tb_latency_workloads;
  import coe_pkg::*;

  localparam int unsigned N_SEQ = 10000;
  localparam int unsigned N_MIX = 2000;

  logic clk_cn = 0, clk_mn = 0, clk_eth = 0;
  logic rst_n = 0;
  always #2.000 clk_cn  = !clk_cn;   // 250 MHz
  always #1.667 clk_mn  = !clk_mn;   // 300 MHz
  always #1.552 clk_eth = !clk_eth;  // 322 MHz

  localparam logic [47:0] CN_MAC = 48'h02_00_00_00_00_0C;
  localparam logic [47:0] MN_MAC = 48'h02_00_00_00_00_0F;

  logic        host_req_valid, host_req_ready, host_rsp_valid;
  mreq_t       host_req;
  mrsp_t       host_rsp;
  logic        cn_tx_v, cn_tx_r, cn_rx_v, cn_rx_e, cn_pfc;
  pkt_t        cn_tx_p, cn_rx_p;
  logic        mn_tx_v, mn_tx_r, mn_rx_v, mn_rx_e, mn_pfc_req;
  pkt_t        mn_tx_p, mn_rx_p;
  logic        ddr_req_valid, ddr_req_ready, ddr_rsp_valid;
  dreq_t       ddr_req;
  logic [511:0] ddr_rsp_data;
  logic [19:0] cc_rate;
  logic [2:0]  cc_phase;
  logic [31:0] cn_cnt [12];
  logic [31:0] mn_cnt [9];

  cxl_over_eth dut (
    .clk_cn, .rst_cn_n(rst_n), .clk_mn, .rst_mn_n(rst_n),
    .clk_eth_cn(clk_eth), .rst_eth_cn_n(rst_n), .clk_eth_mn(clk_eth), .rst_eth_mn_n(rst_n),
    .cfg_cn_mac(CN_MAC), .cfg_mn_mac(MN_MAC), .cfg_init_rate(20'd100000),
    .cfg_pfc_threshold(10'd500), .tlb_flush(1'b0),
    .host_req_valid, .host_req_ready, .host_req, .host_rsp_valid, .host_rsp_ready(1'b1), .host_rsp,
    .cn_mac_tx_valid(cn_tx_v), .cn_mac_tx_ready(cn_tx_r), .cn_mac_tx_pkt(cn_tx_p),
    .cn_mac_rx_valid(cn_rx_v), .cn_mac_rx_err(cn_rx_e), .cn_mac_rx_pkt(cn_rx_p),
    .cn_mac_rx_pfc(cn_pfc),
    .mn_mac_tx_valid(mn_tx_v), .mn_mac_tx_ready(mn_tx_r), .mn_mac_tx_pkt(mn_tx_p),
    .mn_mac_rx_valid(mn_rx_v), .mn_mac_rx_err(mn_rx_e), .mn_mac_rx_pkt(mn_rx_p),
    .mn_pfc_req,
    .ddr_req_valid, .ddr_req_ready, .ddr_req, .ddr_rsp_valid, .ddr_rsp_data,
    .cc_rate, .cc_phase, .cn_counters(cn_cnt), .mn_counters(mn_cnt)
  );

  int unsigned up_sent, up_dropped, up_corr_n, dn_sent, dn_dropped, dn_corr_n;
  eth_link_model #(.DELAY(120)) u_up (
    .clk(clk_eth), .rst_n, .tx_valid(cn_tx_v), .tx_ready(cn_tx_r), .tx_pkt(cn_tx_p),
    .rx_valid(mn_rx_v), .rx_err(mn_rx_e), .rx_pkt(mn_rx_p),
    .drop_next(1'b0), .corrupt_next(1'b0),
    .n_sent(up_sent), .n_dropped(up_dropped), .n_corrupted(up_corr_n));
  eth_link_model #(.DELAY(120)) u_dn (
    .clk(clk_eth), .rst_n, .tx_valid(mn_tx_v), .tx_ready(mn_tx_r), .tx_pkt(mn_tx_p),
    .rx_valid(cn_rx_v), .rx_err(cn_rx_e), .rx_pkt(cn_rx_p),
    .drop_next(1'b0), .corrupt_next(1'b0),
    .n_sent(dn_sent), .n_dropped(dn_dropped), .n_corrupted(dn_corr_n));

  // PFC from the MN's receive FIFO, as a pulse per rising edge
  logic mn_pfc_d;
  always_ff @(posedge clk_eth) mn_pfc_d <= mn_pfc_req;
  assign cn_pfc = mn_pfc_req && !mn_pfc_d;

  ddr_model #(.LAT(20)) u_ddr (.clk(clk_mn), .rst_n, .req_valid(ddr_req_valid),
    .req_ready(ddr_req_ready), .req(ddr_req), .rsp_valid(ddr_rsp_valid), .rsp_data(ddr_rsp_data));

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // page table: CMem pages 0..7 of this CN -> pool pages 200+p
  bit used_slot [int];
  function automatic void map_page(input logic [CPAGE_W-1:0] cp, input logic [MPAGE_W-1:0] mp);
    logic [PT_IDX_W-1:0] idx;
    pte_t e;
    idx = pt_hash(CN_MAC, cp);
    while (used_slot.exists(int'(idx))) idx = idx + 1'b1;
    used_slot[int'(idx)] = 1;
    e = '{mp_page: mp, cmem_page: cp, cn_id: CN_MAC, valid: 1'b1};
    u_ddr.poke(pt_slot_addr(idx), DATA_W'(e));
  endfunction

  logic [511:0] ref_mem [logic [33:0]];

  // one access; returns its latency in core cycles
  task automatic access(input bit we, input logic [ADDR_W-1:0] a, input logic [511:0] d,
                        input string tag, output int unsigned lat);
    mreq_t r;
    r.we = we; r.id = ID_W'(a[13:6]); r.addr = a; r.data = d;
    host_req_valid <= 1'b1; host_req <= r;
    @(posedge clk_cn);
    while (!host_req_ready) @(posedge clk_cn);
    host_req_valid <= 1'b0;
    lat = 1;
    @(posedge clk_cn);
    while (!host_rsp_valid) begin @(posedge clk_cn); lat++; end
    if (!we) begin
      logic [511:0] exp;
      exp = ref_mem.exists(a[39:6]) ? ref_mem[a[39:6]] : '0;
      if (host_rsp.data != exp) begin
        failures++;
        $display("FAIL: %s read %h data mismatch", tag, a);
      end
    end else begin
      ref_mem[a[39:6]] = d;
    end
  endtask

  initial begin
    longint unsigned sum;
    int unsigned lat, all_hit, hits0;
    real avg_wr, avg_rd, avg_hit, avg_mix;
    host_req_valid = 0; host_req = '0;
    for (int p = 0; p < 8; p++) map_page(CPAGE_W'(p), MPAGE_W'(200 + p));
    repeat (10) @(posedge clk_cn);
    rst_n = 1;
    repeat (10) @(posedge clk_cn);

    // 1. 10K writes to consecutive lines (640 KB)
    sum = 0;
    for (int i = 0; i < int'(N_SEQ); i++) begin
      access(1'b1, ADDR_W'(i) << 6, {16{32'(i) ^ 32'h5A5A_0000}}, "write", lat);
      sum += lat;
    end
    avg_wr = real'(sum) / N_SEQ;

    // 2. 10K reads of the same lines
    sum = 0;
    for (int i = 0; i < int'(N_SEQ); i++) begin
      access(1'b0, ADDR_W'(i) << 6, '0, "read", lat);
      sum += lat;
    end
    avg_rd = real'(sum) / N_SEQ;
    checks += N_SEQ;   // one data check per read

    // 3. all-hit: a 32 KB working set read twice
    for (int i = 0; i < 512; i++) access(1'b0, ADDR_W'(32'h0010_0000 + 32'(i) * 64), '0, "load", lat);
    hits0 = cn_cnt[0];
    sum = 0; all_hit = 1;
    for (int i = 0; i < 512; i++) begin
      access(1'b0, ADDR_W'(32'h0010_0000 + 32'(i) * 64), '0, "hit", lat);
      sum += lat;
      if (lat != 2) all_hit = 0;
    end
    avg_hit = real'(sum) / 512;
    checks += 1024;
    check(all_hit == 1, "every access of the second 32 KB pass hits in 2 cycles");
    check(cn_cnt[0] - hits0 == 512, $sformatf("hit counter %0d for 512 hits", cn_cnt[0] - hits0));

    // 4. random mix, half reads, half writes, over 4 MB
    sum = 0;
    for (int i = 0; i < int'(N_MIX); i++) begin
      logic [ADDR_W-1:0] a;
      a = ADDR_W'($urandom_range(0, 65535)) << 6;
      access(i[0], a, {16{$urandom()}}, "mix", lat);
      sum += lat;
    end
    avg_mix = real'(sum) / N_MIX;
    checks += N_MIX / 2;

    $display("workload latency (250 MHz core cycles): 10K writes avg %0.1f, 10K reads avg %0.1f, all-hit avg %0.1f, 50/50 mix avg %0.1f",
             avg_wr, avg_rd, avg_hit, avg_mix);
    $display("counters: hit=%0d miss=%0d writeback=%0d nofetch=%0d retx=%0d pfc=%0d tlb_miss=%0d",
             cn_cnt[0], cn_cnt[1], cn_cnt[2], cn_cnt[3], cn_cnt[4], cn_cnt[9], mn_cnt[6]);
    check(avg_hit == 2.0, "all-hit average is the 2-cycle hit latency");
    check(avg_rd > 100.0, "remote reads cross the network");
    check(avg_wr > 2.0 && avg_wr < avg_rd + 100.0, "write average between hit and a remote round trip");
    check(avg_mix > avg_hit, "mixed random accesses slower than all hits");
    check(cn_cnt[4] == 0, "no retransmission on clean links");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
