// tb_addr_translator: the MN address translator with its page table in a
// modelled pool memory. Checks, against addresses computed here:
// a first access misses the TLB and walks the hashed page table; a repeat hits
// and answers one cycle after acceptance; an entry displaced by a hash
// collision is found by linear probing (one extra read); an unmapped page is a
// fault after PROBES reads; a flush empties the TLB; with more pages in use than
// TLB entries, the oldest entry is replaced (round robin).
`timescale 1ns/1ps
module tb_addr_translator;
  import coe_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = !clk;

  logic flush, req_valid, req_ready, rsp_valid, rsp_fault, pt_req_valid, pt_req_ready, pt_rsp_valid;
  logic [47:0] req_cn_id;
  logic [39:0] req_addr;
  logic [34:0] rsp_addr, pt_req_addr;
  logic [511:0] pt_rsp_data;
  logic ev_tlb_hit, ev_tlb_miss;

  addr_translator #(.TLB_ENTRIES(8), .PROBES(4)) dut (.*);

  dreq_t dreq;
  assign dreq = '{we: 1'b0, addr: pt_req_addr, data: '0};
  ddr_model #(.LAT(10)) mem (.clk, .rst_n, .req_valid(pt_req_valid), .req_ready(pt_req_ready),
    .req(dreq), .rsp_valid(pt_rsp_valid), .rsp_data(pt_rsp_data));

  int checks = 0, failures = 0, n_pt = 0;
  always @(posedge clk) if (pt_req_valid && pt_req_ready) n_pt++;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam logic [47:0] CN_A = 48'h02_00_00_00_00_0A, CN_B = 48'h02_00_00_00_00_0B;

  function automatic void put(input int slot, input logic [47:0] cn, input int cp, input int mp);
    pte_t e;
    e = '{mp_page: MPAGE_W'(mp), cmem_page: CPAGE_W'(cp), cn_id: cn, valid: 1'b1};
    mem.poke(pt_slot_addr(PT_IDX_W'(slot)), DATA_W'(e));
  endfunction

  task automatic xlate(input logic [47:0] cn, input logic [39:0] a, output logic [34:0] pa,
                       output logic f, output int lat, output int reads);
    int r0;
    r0 = n_pt;
    req_valid <= 1; req_cn_id <= cn; req_addr <= a;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    req_valid <= 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!rsp_valid);
    pa = rsp_addr; f = rsp_fault; reads = n_pt - r0;
  endtask

  initial begin
    logic [34:0] pa; logic f; int lat, rd;
    int h;
    flush = 0; req_valid = 0; req_cn_id = 0; req_addr = 0;
    // CN_A pages 0..11 -> pool pages 500+p at their hash slot
    for (int p = 0; p < 12; p++) put(int'(pt_hash(CN_A, CPAGE_W'(p))), CN_A, p, 500 + p);
    // CN_B page 3: its slot taken by a foreign entry, real entry one further
    h = int'(pt_hash(CN_B, CPAGE_W'(3)));
    put(h, CN_B, 77, 9);
    put((h + 1) % (1 << PT_IDX_W), CN_B, 3, 1234);
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);

    xlate(CN_A, 40'(2) << 21 | 40'h1_2340, pa, f, lat, rd);
    chk(!f && pa == (35'(502) << 21 | 35'h1_2340) && rd == 1, $sformatf("walk: pa %h reads %0d", pa, rd));
    xlate(CN_A, 40'(2) << 21 | 40'h0_0040, pa, f, lat, rd);
    chk(!f && pa == (35'(502) << 21 | 35'h40) && rd == 0 && lat == 1, $sformatf("TLB hit: lat %0d", lat));
    xlate(CN_B, 40'(3) << 21 | 40'hFC0, pa, f, lat, rd);
    chk(!f && pa == (35'(1234) << 21 | 35'hFC0) && rd == 2, $sformatf("probe: pa %h reads %0d", pa, rd));
    xlate(CN_B, 40'(4) << 21, pa, f, lat, rd);
    chk(f && rd == 4, $sformatf("fault after %0d reads", rd));
    @(posedge clk) flush <= 1; @(posedge clk) flush <= 0;
    xlate(CN_A, 40'(2) << 21, pa, f, lat, rd);
    chk(!f && rd == 1, "flush empties the TLB");
    // 8-entry TLB: touch pages 0..11 (entries: 2, then 0,1,3..11 -> 2 and 0..3 replaced)
    for (int p = 0; p < 12; p++) if (p != 2) xlate(CN_A, 40'(p) << 21, pa, f, lat, rd);
    xlate(CN_A, 40'(11) << 21, pa, f, lat, rd);
    chk(rd == 0 && pa == 35'(511) << 21, "recent page still in TLB");
    xlate(CN_A, 40'(0) << 21, pa, f, lat, rd);
    chk(rd == 1 && pa == 35'(500) << 21, "oldest page replaced");
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
