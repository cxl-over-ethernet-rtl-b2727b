// cn_fpga: the compute-node FPGA. It sits between the CXL IP, which delivers the
// host's CXL.mem reads and writes as AXI transactions, and the 100G Ethernet
// MAC towards the memory node.
//
// Data path (paper, Fig. 4 of the original): CXL agent / CPI-to-AXI (vendor IP,
// outside this module) -> cn_cache -> cn_pkt_mgr -> Ethernet MAC+PHY (vendor IP,
// outside). The congestion control module (cc_fsm) takes the PFC indications
// the MAC reports and sets the rate of a token bucket on the packet manager's
// transmit stream. The core runs at 250 MHz (paper), the MAC side at 322.266 MHz
// (paper); the two are joined by 512-deep asynchronous FIFOs (paper's depth).
// The MAC interface here carries one whole 89-byte frame body per beat with a
// CRC-error flag on receive (this design's simplification of the MAC's 512-bit
// streaming interface; frames never need more than two such beats). The MAC's
// receive side cannot be stalled: a frame arriving at a full FIFO is dropped and
// counted, and then recovered by retransmission.
//
// Interface: host_req_*/host_rsp_* (core clock), mac_* (MAC clock), cfg_* and
// status outputs (core clock).
//
// Timing: a cache hit answers 2 core cycles after acceptance; a miss adds the
// packet manager (1 cycle), the token bucket (which may hold a frame until it
// has tokens) and 3 to 4 MAC cycles per async FIFO crossing each way, plus the
// network and the MN. A PFC reaches cc_fsm 3 to 4 core cycles after the MAC
// flags it.
module cn_fpga
  import coe_pkg::*;
#(
  parameter int unsigned CACHE_BYTES = 32768,
  parameter int unsigned CACHE_WAYS  = 4,
  parameter int unsigned FIFO_DEPTH  = 512,
  parameter int unsigned RB_DEPTH    = 512,
  parameter int unsigned TIMEOUT     = 4096,
  parameter int unsigned RATE_W      = 20,
  parameter int unsigned T1 = 12500,
  parameter int unsigned T2 = 2500,
  parameter int unsigned T3 = 2750,
  parameter int unsigned T4 = 50000,
  parameter int unsigned T5 = 10000,
  parameter int unsigned T6 = 5000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clk_eth,
  input  logic              rst_eth_n,
  input  logic [MAC_W-1:0]  cfg_local_mac,
  input  logic [MAC_W-1:0]  cfg_remote_mac,
  input  logic [RATE_W-1:0] cfg_init_rate,
  // host side (AXI side of the CXL IP)
  input  logic              host_req_valid,
  output logic              host_req_ready,
  input  mreq_t             host_req,
  output logic              host_rsp_valid,
  input  logic              host_rsp_ready,
  output mrsp_t             host_rsp,
  // MAC side
  output logic              mac_tx_valid,
  input  logic              mac_tx_ready,
  output pkt_t              mac_tx_pkt,
  input  logic              mac_rx_valid,
  input  logic              mac_rx_err,
  input  pkt_t              mac_rx_pkt,
  input  logic              mac_rx_pfc,
  // status
  output logic [RATE_W-1:0] cc_rate,
  output logic [2:0]        cc_phase,
  output logic [31:0]       cnt_hit,
  output logic [31:0]       cnt_miss,
  output logic [31:0]       cnt_writeback,
  output logic [31:0]       cnt_wr_nofetch,
  output logic [31:0]       cnt_retx,
  output logic [31:0]       cnt_crc_err,
  output logic [31:0]       cnt_sack,
  output logic [31:0]       cnt_gap,
  output logic [31:0]       cnt_timeout,
  output logic [31:0]       cnt_pfc,
  output logic [31:0]       cnt_pfc_dup,
  output logic [31:0]       cnt_rx_drop
);
  // ---------------- cache ----------------
  logic  m_req_valid, m_req_ready, m_rsp_valid, m_rsp_ready;
  mreq_t m_req;
  mrsp_t m_rsp;
  logic  ev_hit, ev_miss, ev_wb, ev_nofetch;

  cn_cache #(.SIZE_BYTES(CACHE_BYTES), .WAYS(CACHE_WAYS)) u_cache (
    .clk, .rst_n,
    .req_valid(host_req_valid), .req_ready(host_req_ready), .req(host_req),
    .rsp_valid(host_rsp_valid), .rsp_ready(host_rsp_ready), .rsp(host_rsp),
    .mem_req_valid(m_req_valid), .mem_req_ready(m_req_ready), .mem_req(m_req),
    .mem_rsp_valid(m_rsp_valid), .mem_rsp_ready(m_rsp_ready), .mem_rsp(m_rsp),
    .ev_hit, .ev_miss, .ev_writeback(ev_wb), .ev_wr_nofetch(ev_nofetch)
  );

  // ---------------- packet manager ----------------
  logic       pm_tx_valid, pm_tx_ready;
  pkt_t       pm_tx_pkt;
  logic [7:0] pm_tx_bytes;
  logic       rxq_valid;
  logic [PKT_W:0] rxq_data;

  cn_pkt_mgr #(.DEPTH(RB_DEPTH), .TIMEOUT(TIMEOUT)) u_pm (
    .clk, .rst_n, .cfg_local_mac, .cfg_remote_mac,
    .req_valid(m_req_valid), .req_ready(m_req_ready), .req(m_req),
    .rsp_valid(m_rsp_valid), .rsp_ready(m_rsp_ready), .rsp(m_rsp),
    .tx_valid(pm_tx_valid), .tx_ready(pm_tx_ready), .tx_pkt(pm_tx_pkt), .tx_bytes(pm_tx_bytes),
    .rx_valid(rxq_valid), .rx_err(rxq_data[PKT_W]), .rx_pkt(pkt_t'(rxq_data[PKT_W-1:0])),
    .cnt_retx, .cnt_crc_err, .cnt_sack, .cnt_gap, .cnt_timeout
  );

  // ---------------- congestion control + token bucket ----------------
  logic pfc_tgl_eth, pfc_s1, pfc_s2, pfc_s3, pfc_pulse;
  logic pfc_acc, pfc_dup;

  always_ff @(posedge clk_eth or negedge rst_eth_n) begin
    if (!rst_eth_n)      pfc_tgl_eth <= 1'b0;
    else if (mac_rx_pfc) pfc_tgl_eth <= !pfc_tgl_eth;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {pfc_s3, pfc_s2, pfc_s1} <= '0;
    else        {pfc_s3, pfc_s2, pfc_s1} <= {pfc_s2, pfc_s1, pfc_tgl_eth};
  end
  assign pfc_pulse = pfc_s3 ^ pfc_s2;

  logic [RATE_W-1:0] cc_tr;
  cc_fsm #(.RATE_W(RATE_W), .T1(T1), .T2(T2), .T3(T3), .T4(T4), .T5(T5), .T6(T6)) u_cc (
    .clk, .rst_n, .pfc(pfc_pulse), .init_rate(cfg_init_rate),
    .rate(cc_rate), .target_rate(cc_tr), .phase(cc_phase),
    .pfc_accepted(pfc_acc), .pfc_duplicate(pfc_dup)
  );

  logic txq_valid, txq_ready;
  token_bucket #(.RATE_W(RATE_W), .CLK_MHZ(250)) u_tb (
    .clk, .rst_n, .rate(cc_rate),
    .in_valid(pm_tx_valid), .in_ready(pm_tx_ready), .in_bytes(pm_tx_bytes),
    .out_valid(txq_valid), .out_ready(txq_ready)
  );

  // ---------------- clock crossings ----------------
  logic [$clog2(FIFO_DEPTH):0] txq_level, rxq_level;
  logic [PKT_W-1:0] mac_tx_data;
  async_fifo #(.W(PKT_W), .DEPTH(FIFO_DEPTH)) u_txq (
    .wr_clk(clk), .wr_rst_n(rst_n), .wr_valid(txq_valid), .wr_ready(txq_ready),
    .wr_data(pm_tx_pkt), .wr_level(txq_level),
    .rd_clk(clk_eth), .rd_rst_n(rst_eth_n), .rd_valid(mac_tx_valid), .rd_ready(mac_tx_ready),
    .rd_data(mac_tx_data)
  );
  assign mac_tx_pkt = pkt_t'(mac_tx_data);

  logic rxq_wr_ready;
  async_fifo #(.W(PKT_W + 1), .DEPTH(FIFO_DEPTH)) u_rxq (
    .wr_clk(clk_eth), .wr_rst_n(rst_eth_n), .wr_valid(mac_rx_valid), .wr_ready(rxq_wr_ready),
    .wr_data({mac_rx_err, mac_rx_pkt}), .wr_level(rxq_level),
    .rd_clk(clk), .rd_rst_n(rst_n), .rd_valid(rxq_valid), .rd_ready(1'b1),
    .rd_data(rxq_data)
  );

  always_ff @(posedge clk_eth or negedge rst_eth_n) begin
    if (!rst_eth_n) cnt_rx_drop <= '0;
    else if (mac_rx_valid && !rxq_wr_ready) cnt_rx_drop <= cnt_rx_drop + 1'b1;
  end

  // ---------------- statistics ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_hit <= '0; cnt_miss <= '0; cnt_writeback <= '0; cnt_wr_nofetch <= '0;
      cnt_pfc <= '0; cnt_pfc_dup <= '0;
    end else begin
      if (ev_hit)     cnt_hit        <= cnt_hit + 1'b1;
      if (ev_miss)    cnt_miss       <= cnt_miss + 1'b1;
      if (ev_wb)      cnt_writeback  <= cnt_writeback + 1'b1;
      if (ev_nofetch) cnt_wr_nofetch <= cnt_wr_nofetch + 1'b1;
      if (pfc_acc)    cnt_pfc        <= cnt_pfc + 1'b1;
      if (pfc_dup)    cnt_pfc_dup    <= cnt_pfc_dup + 1'b1;
    end
  end

endmodule
