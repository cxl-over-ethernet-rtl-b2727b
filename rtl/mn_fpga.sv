// mn_fpga: the memory-node FPGA, between its 100G Ethernet MAC and the DDR4
// controller of the memory pool.
//
// Data path (paper): Ethernet MAC+PHY (vendor IP, outside) -> receive FIFO ->
// mn_pkt_mgr -> addr_translator -> DDR controller (vendor IP, outside), and the
// responses back through a transmit FIFO. The MAC runs at 322.266 MHz and the
// MN logic with the DDR controller at 300 MHz (paper); 512-deep asynchronous
// FIFOs (paper's depth) join them. The receive FIFO's fill level is compared,
// in the MAC clock domain, with cfg_pfc_threshold: above it, pfc_req asks the
// MAC to send PFC pause frames, which is how the paper's congestion experiments
// model a congested switch queue. The page-table reads of the translator and
// the data accesses of the packet manager share the one DDR port; they never
// overlap (the packet manager waits for its translation), and a one-bit owner
// register routes the completion back.
//
// Interface: mac_* and pfc_req (MAC clock), ddr_* and tlb_flush (core clock),
// counters. The DDR port is a simple request/completion handshake standing in
// for the controller's AXI port (this design's simplification): a write is
// completed by a ddr_rsp_valid pulse as well.
//
// Timing: pfc_req follows the receive-FIFO level one MAC cycle later; frames
// cross each async FIFO in 3 to 4 cycles of the receiving clock.
//
// Lint note: rst_n is reported as used both asynchronously and synchronously;
// the synchronous use is the assertion in mn_pkt_mgr (`disable iff`), not logic.
module mn_fpga
  import coe_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH  = 512,
  parameter int unsigned RB_DEPTH    = 512,
  parameter int unsigned TLB_ENTRIES = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clk_eth,
  input  logic                 rst_eth_n,
  input  logic [MAC_W-1:0]     cfg_local_mac,
  input  logic [$clog2(FIFO_DEPTH):0] cfg_pfc_threshold,
  input  logic                 tlb_flush,
  // MAC side
  input  logic                 mac_rx_valid,
  input  logic                 mac_rx_err,
  input  pkt_t                 mac_rx_pkt,
  output logic                 mac_tx_valid,
  input  logic                 mac_tx_ready,
  output pkt_t                 mac_tx_pkt,
  output logic                 pfc_req,
  // DDR controller
  output logic                 ddr_req_valid,
  input  logic                 ddr_req_ready,
  output dreq_t                ddr_req,
  input  logic                 ddr_rsp_valid,
  input  logic [DATA_W-1:0]    ddr_rsp_data,
  // status
  output logic [31:0]          cnt_req,
  output logic [31:0]          cnt_crc_err,
  output logic [31:0]          cnt_sack_sent,
  output logic [31:0]          cnt_merged,
  output logic [31:0]          cnt_dup_resend,
  output logic [31:0]          cnt_fault,
  output logic [31:0]          cnt_tlb_miss,
  output logic [31:0]          cnt_rx_drop,
  output logic [31:0]          cnt_pfc_cycles
);
  // ---------------- receive FIFO with PFC threshold ----------------
  logic [$clog2(FIFO_DEPTH):0] rxq_level, txq_level;
  logic           rxq_wr_ready, rxq_valid, rxq_ready;
  logic [PKT_W:0] rxq_data;

  async_fifo #(.W(PKT_W + 1), .DEPTH(FIFO_DEPTH)) u_rxq (
    .wr_clk(clk_eth), .wr_rst_n(rst_eth_n), .wr_valid(mac_rx_valid), .wr_ready(rxq_wr_ready),
    .wr_data({mac_rx_err, mac_rx_pkt}), .wr_level(rxq_level),
    .rd_clk(clk), .rd_rst_n(rst_n), .rd_valid(rxq_valid), .rd_ready(rxq_ready),
    .rd_data(rxq_data)
  );

  always_ff @(posedge clk_eth or negedge rst_eth_n) begin
    if (!rst_eth_n) begin
      pfc_req        <= 1'b0;
      cnt_rx_drop    <= '0;
      cnt_pfc_cycles <= '0;
    end else begin
      pfc_req <= (rxq_level > cfg_pfc_threshold);
      if (mac_rx_valid && !rxq_wr_ready) cnt_rx_drop <= cnt_rx_drop + 1'b1;
      if (pfc_req) cnt_pfc_cycles <= cnt_pfc_cycles + 1'b1;
    end
  end

  // ---------------- packet manager ----------------
  logic                 pm_tx_valid, pm_tx_ready;
  pkt_t                 pm_tx_pkt;
  logic                 xl_req_valid, xl_req_ready, xl_rsp_valid, xl_rsp_fault;
  logic [MAC_W-1:0]     xl_cn_id;
  logic [ADDR_W-1:0]    xl_addr;
  logic [MP_ADDR_W-1:0] xl_rsp_addr;
  logic                 pm_mem_valid, pm_mem_ready, pm_rsp_valid;
  dreq_t                pm_mem;

  mn_pkt_mgr #(.DEPTH(RB_DEPTH)) u_pm (
    .clk, .rst_n, .cfg_local_mac,
    .rx_valid(rxq_valid), .rx_ready(rxq_ready), .rx_err(rxq_data[PKT_W]),
    .rx_pkt(pkt_t'(rxq_data[PKT_W-1:0])),
    .tx_valid(pm_tx_valid), .tx_ready(pm_tx_ready), .tx_pkt(pm_tx_pkt),
    .xl_req_valid, .xl_req_ready, .xl_cn_id, .xl_addr,
    .xl_rsp_valid, .xl_rsp_addr, .xl_rsp_fault,
    .mem_req_valid(pm_mem_valid), .mem_req_ready(pm_mem_ready), .mem_req(pm_mem),
    .mem_rsp_valid(pm_rsp_valid), .mem_rsp_data(ddr_rsp_data),
    .cnt_req, .cnt_crc_err, .cnt_sack_sent, .cnt_merged, .cnt_dup_resend, .cnt_fault
  );

  // ---------------- address translator ----------------
  logic                 pt_req_valid, pt_req_ready, pt_rsp_valid;
  logic [MP_ADDR_W-1:0] pt_req_addr;
  logic                 ev_tlb_hit, ev_tlb_miss;

  addr_translator #(.TLB_ENTRIES(TLB_ENTRIES)) u_xl (
    .clk, .rst_n, .flush(tlb_flush),
    .req_valid(xl_req_valid), .req_ready(xl_req_ready), .req_cn_id(xl_cn_id), .req_addr(xl_addr),
    .rsp_valid(xl_rsp_valid), .rsp_addr(xl_rsp_addr), .rsp_fault(xl_rsp_fault),
    .pt_req_valid, .pt_req_ready, .pt_req_addr, .pt_rsp_valid, .pt_rsp_data(ddr_rsp_data),
    .ev_tlb_hit, .ev_tlb_miss
  );

  // ---------------- DDR port sharing ----------------
  logic owner_pt;   // the access in flight is a page-table read
  always_comb begin
    ddr_req_valid = pt_req_valid || pm_mem_valid;
    if (pt_req_valid) begin
      ddr_req.we   = 1'b0;
      ddr_req.addr = pt_req_addr;
      ddr_req.data = '0;
    end else begin
      ddr_req = pm_mem;
    end
  end
  assign pt_req_ready = ddr_req_ready;
  assign pm_mem_ready = ddr_req_ready && !pt_req_valid;
  assign pt_rsp_valid = ddr_rsp_valid && owner_pt;
  assign pm_rsp_valid = ddr_rsp_valid && !owner_pt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      owner_pt     <= 1'b0;
      cnt_tlb_miss <= '0;
    end else begin
      if (ddr_req_valid && ddr_req_ready) owner_pt <= pt_req_valid;
      if (ev_tlb_miss) cnt_tlb_miss <= cnt_tlb_miss + 1'b1;
    end
  end

  // ---------------- transmit FIFO ----------------
  logic [PKT_W-1:0] mac_tx_data;
  async_fifo #(.W(PKT_W), .DEPTH(FIFO_DEPTH)) u_txq (
    .wr_clk(clk), .wr_rst_n(rst_n), .wr_valid(pm_tx_valid), .wr_ready(pm_tx_ready),
    .wr_data(pm_tx_pkt), .wr_level(txq_level),
    .rd_clk(clk_eth), .rd_rst_n(rst_eth_n), .rd_valid(mac_tx_valid), .rd_ready(mac_tx_ready),
    .rd_data(mac_tx_data)
  );
  assign mac_tx_pkt = pkt_t'(mac_tx_data);

endmodule
