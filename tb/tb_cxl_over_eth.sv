// tb_cxl_over_eth: end-to-end test of one CN and one MN joined by a modelled
// 100G link, with a modelled DDR controller behind the MN.
//
// The host side issues a random mix of 64-byte reads and writes over a working
// set that overflows the cache sets, and every read is compared with a
// reference memory kept by the testbench. The links drop and corrupt frames on
// a fixed schedule in both directions, and PFC frames reach the CN both from the
// MN's receive-FIFO threshold and from a scripted schedule, so that each
// mechanism of the design is exercised: cache hit / miss / write-back /
// no-fetch write miss, CRC-error drops at both ends, SACK+NAK, gap-triggered
// retransmission, timeout retransmission, duplicate-request response resend,
// TLB miss with page-table walk, PFC handling with duplicate filtering, and all
// six congestion-control phases. A mechanism that never happens counts as a
// failure. Congestion-control times are shortened; everything else is at its
// default size.
`timescale 1ns/1ps
module tb_cxl_over_eth;
  import coe_pkg::*;

  localparam int unsigned N_OPS = 1500;

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
  logic [9:0]  pfc_thr;

  cxl_over_eth #(.T1(500), .T2(100), .T3(110), .T4(2000), .T5(400), .T6(200), .TIMEOUT(3000)) dut (
    .clk_cn, .rst_cn_n(rst_n), .clk_mn, .rst_mn_n(rst_n),
    .clk_eth_cn(clk_eth), .rst_eth_cn_n(rst_n), .clk_eth_mn(clk_eth), .rst_eth_mn_n(rst_n),
    .cfg_cn_mac(CN_MAC), .cfg_mn_mac(MN_MAC), .cfg_init_rate(20'd100000),
    .cfg_pfc_threshold(pfc_thr), .tlb_flush(1'b0),
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

  // ---- link models with a fixed fault schedule ----
  logic up_drop, up_corr, dn_drop, dn_corr;
  int unsigned up_sent, up_dropped, up_corr_n, dn_sent, dn_dropped, dn_corr_n;
  eth_link_model #(.DELAY(120)) u_up (
    .clk(clk_eth), .rst_n, .tx_valid(cn_tx_v), .tx_ready(cn_tx_r), .tx_pkt(cn_tx_p),
    .rx_valid(mn_rx_v), .rx_err(mn_rx_e), .rx_pkt(mn_rx_p),
    .drop_next(up_drop), .corrupt_next(up_corr),
    .n_sent(up_sent), .n_dropped(up_dropped), .n_corrupted(up_corr_n));
  eth_link_model #(.DELAY(120)) u_dn (
    .clk(clk_eth), .rst_n, .tx_valid(mn_tx_v), .tx_ready(mn_tx_r), .tx_pkt(mn_tx_p),
    .rx_valid(cn_rx_v), .rx_err(cn_rx_e), .rx_pkt(cn_rx_p),
    .drop_next(dn_drop), .corrupt_next(dn_corr),
    .n_sent(dn_sent), .n_dropped(dn_dropped), .n_corrupted(dn_corr_n));

  bit nofault;
  initial nofault = $test$plusargs("nofault");
  always_comb begin
    up_drop = !nofault && (up_sent % 37) == 36;
    up_corr = !nofault && (up_sent % 53) == 51;
    dn_drop = !nofault && (dn_sent % 41) == 40;
    dn_corr = !nofault && (dn_sent % 59) == 57;
  end

  // ---- PFC: MN threshold -> CN, plus scripted frames ----
  logic pfc_script;
  logic mn_pfc_d;
  always_ff @(posedge clk_eth) mn_pfc_d <= mn_pfc_req;
  assign cn_pfc = (mn_pfc_req && !mn_pfc_d) || pfc_script;

  // ---- DDR ----
  ddr_model #(.LAT(20)) u_ddr (.clk(clk_mn), .rst_n, .req_valid(ddr_req_valid),
    .req_ready(ddr_req_ready), .req(ddr_req), .rsp_valid(ddr_rsp_valid), .rsp_data(ddr_rsp_data));

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- page table: CMem pages 0..7 of this CN -> pool pages 100+3*p ----
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

  // ---- reference memory, random traffic ----
  logic [511:0] ref_mem [logic [33:0]];
  bit   phase_seen [8];
  always @(posedge clk_cn) if (rst_n) phase_seen[cc_phase] = 1;

  function automatic logic [ADDR_W-1:0] pick_addr();
    // 8 sets x 12 tags in each of 2 pages: 3x the ways of a set
    int unsigned page, set, tagn;
    page = $urandom_range(0, 1) * 5;
    set  = $urandom_range(0, 7) * 9;
    tagn = $urandom_range(0, 11);
    return ADDR_W'(page) << PAGE_BITS | ADDR_W'(tagn) << 13 | ADDR_W'(set) << 6;
  endfunction

  bit stuck = 0;
  task automatic pfc_pulse();
    if (stuck) return;
    @(posedge clk_eth) pfc_script <= 1'b1;
    @(posedge clk_eth) pfc_script <= 1'b0;
  endtask

  // wait for a congestion phase, at most 250,000 core cycles (1 ms); once a
  // wait has failed the rest of the scripted walk is skipped
  task automatic wait_phase(input logic [2:0] ph);
    int unsigned n;
    if (stuck) return;
    n = 0;
    while (cc_phase != ph && n < 250000) begin @(posedge clk_cn); n++; end
    check(cc_phase == ph, $sformatf("congestion phase %0d not reached", ph));
    if (cc_phase != ph) stuck = 1;
  endtask


  initial begin
    host_req_valid = 0; host_req = '0; pfc_script = 0; pfc_thr = 10'd0;
    for (int p = 0; p < 8; p++) map_page(CPAGE_W'(p), MPAGE_W'(100 + 3 * p));
    repeat (10) @(posedge clk_cn);
    rst_n = 1;
    repeat (10) @(posedge clk_cn);

    for (int i = 0; i < int'(N_OPS); i++) begin
      mreq_t r;
      int unsigned t0;
      r.we   = ($urandom_range(0, 1) == 1);
      r.id   = ID_W'(i);
      r.addr = pick_addr();
      r.data = {16{$urandom()}};
      if (i == 600) pfc_thr = 10'd500;       // stop threshold-driven PFC
      host_req_valid <= 1'b1; host_req <= r;
      @(posedge clk_cn);
      while (!host_req_ready) @(posedge clk_cn);
      host_req_valid <= 1'b0;
      t0 = 0;
      @(posedge clk_cn);
      while (!host_rsp_valid) begin @(posedge clk_cn); t0++; end
      check(host_rsp.id == r.id && host_rsp.we == r.we, $sformatf("op %0d: id/we mismatch", i));
      if (!r.we) begin
        logic [511:0] exp;
        exp = ref_mem.exists(r.addr[39:6]) ? ref_mem[r.addr[39:6]] : '0;
        check(host_rsp.data == exp, $sformatf("op %0d: read %h data mismatch", i, r.addr));
      end else begin
        ref_mem[r.addr[39:6]] = r.data;
      end
    end

    // scripted PFC frames walk the controller through every transition:
    // e -> f, f -> b (second frame after the duplicate window), b -> c, c -> d,
    // d -> c, c -> a, a -> b with a duplicate, and finally f -> a.
    wait_phase(3'd4);
    pfc_pulse();                       // e -> f
    repeat (150) @(posedge clk_cn);
    pfc_pulse();                       // f -> b
    wait_phase(3'd2);
    repeat (20) @(posedge clk_cn);
    pfc_pulse();                       // c -> d
    wait_phase(3'd2);           // d -> c after t1
    wait_phase(3'd0);           // c -> a after five speed-ups
    pfc_pulse();                       // a -> b
    repeat (20) @(posedge clk_cn);
    pfc_pulse();                       // duplicate within t2: ignored
    wait_phase(3'd0);
    wait_phase(3'd4);
    pfc_pulse();                       // e -> f
    wait_phase(3'd0);           // f -> a after t6

    // final: every line written must read back through the whole path
    begin
      int n;
      n = 0;
      foreach (ref_mem[a]) begin
        if (n < 64) begin
          host_req_valid <= 1'b1; host_req <= '{we: 1'b0, id: 8'hEE, addr: {a, 6'd0}, data: '0};
          @(posedge clk_cn);
          while (!host_req_ready) @(posedge clk_cn);
          host_req_valid <= 1'b0;
          @(posedge clk_cn);
          while (!host_rsp_valid) @(posedge clk_cn);
          check(host_rsp.data == ref_mem[a], $sformatf("final read %h", a));
        end
        n++;
      end
    end

    $display("mechanisms: hit=%0d miss=%0d writeback=%0d nofetch=%0d cn_retx=%0d cn_crc=%0d cn_sack=%0d cn_gap=%0d cn_timeout=%0d pfc=%0d pfc_dup=%0d",
             cn_cnt[0], cn_cnt[1], cn_cnt[2], cn_cnt[3], cn_cnt[4], cn_cnt[5], cn_cnt[6], cn_cnt[7], cn_cnt[8], cn_cnt[9], cn_cnt[10]);
    $display("mechanisms: mn_req=%0d mn_crc=%0d mn_sack=%0d mn_merged=%0d mn_dup_resend=%0d mn_fault=%0d tlb_miss=%0d mn_pfc_cycles=%0d",
             mn_cnt[0], mn_cnt[1], mn_cnt[2], mn_cnt[3], mn_cnt[4], mn_cnt[5], mn_cnt[6], mn_cnt[8]);
    $display("links: up sent=%0d dropped=%0d corrupted=%0d, down sent=%0d dropped=%0d corrupted=%0d",
             up_sent, up_dropped, up_corr_n, dn_sent, dn_dropped, dn_corr_n);
    check(cn_cnt[0] > 0, "cache hit never happened");
    check(cn_cnt[1] > 0, "cache miss never happened");
    check(cn_cnt[2] > 0, "write-back never happened");
    check(cn_cnt[3] > 0, "no-fetch write miss never happened");
    check(cn_cnt[4] > 0, "CN retransmission never happened");
    check(cn_cnt[5] > 0, "CRC error at CN never happened");
    check(cn_cnt[6] > 0, "SACK at CN never happened");
    check(cn_cnt[7] > 0, "gap-triggered retransmission never happened");
    check(cn_cnt[8] > 0, "timeout retransmission never happened");
    check(cn_cnt[9] > 0, "PFC never acted on");
    check(cn_cnt[10] > 0, "duplicate PFC never filtered");
    check(mn_cnt[1] > 0, "CRC error at MN never happened");
    check(mn_cnt[2] > 0, "SACK+NAK never sent");
    check(mn_cnt[4] > 0, "duplicate-request response resend never happened");
    check(mn_cnt[6] > 0, "TLB miss never happened");
    check(mn_cnt[8] > 0, "PFC threshold never exceeded");
    check(mn_cnt[5] == 0, "unexpected translation fault");
    for (int p = 0; p < 6; p++) check(phase_seen[p], $sformatf("congestion phase %0d never visited", p));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
