// cxl_over_eth: one compute node and one memory node of the CXL-over-Ethernet
// memory disaggregation system, as built from two FPGA boards.
//
// A host reaches remote memory with ordinary loads and stores: the CXL IP on
// the CN FPGA hands each 64-byte CXL.mem read or write to cn_fpga, which serves
// it from its cache or sends it as an Ethernet frame to mn_fpga; mn_fpga
// translates the address, accesses the pool's DRAM and returns a response frame.
// Retransmission (retry buffers, reorder buffers, SACK/NAK) makes the path
// lossless; PFC-driven rate control keeps it out of congestion.
//
// The parts the design takes from vendors are outside this module and appear
// as ports: the CXL IP's AXI side (host_*), the two Ethernet MAC+PHYs with the
// network between them (cn_mac_*, mn_mac_*, PFC signals), and the DDR4
// controller (ddr_*). Clocks: clk_cn 250 MHz, clk_mn 300 MHz, clk_eth_cn and
// clk_eth_mn 322.266 MHz (one per board's MAC), each with an active-low reset.
//
// Timing: see cn_fpga and mn_fpga; at default parameters a cache hit answers in
// 2 cycles of clk_cn and a remote read miss in about 240 cycles of clk_cn with a
// 20-cycle memory and the link model used by the testbenches.
// What follows the paper: the split into CN and MN FPGAs, the cache, the packet
// protocol, retransmission, congestion control and address translation. This
// design's choice: one CN per MN, whole-frame MAC beats, the simple DDR port.
//
// Lint note: rst_mn_n is reported as used both asynchronously and
// synchronously; the synchronous use is the assertion in mn_pkt_mgr
// (`disable iff`), not logic. Each reset must be released synchronously to its
// clock by a reset bridge outside this design.
module cxl_over_eth
  import coe_pkg::*;
#(
  parameter int unsigned CACHE_BYTES = 32768,
  parameter int unsigned CACHE_WAYS  = 4,
  parameter int unsigned FIFO_DEPTH  = 512,
  parameter int unsigned RB_DEPTH    = 512,
  parameter int unsigned TIMEOUT     = 4096,
  parameter int unsigned TLB_ENTRIES = 64,
  parameter int unsigned RATE_W      = 20,
  parameter int unsigned T1 = 12500,
  parameter int unsigned T2 = 2500,
  parameter int unsigned T3 = 2750,
  parameter int unsigned T4 = 50000,
  parameter int unsigned T5 = 10000,
  parameter int unsigned T6 = 5000
) (
  input  logic              clk_cn,
  input  logic              rst_cn_n,
  input  logic              clk_mn,
  input  logic              rst_mn_n,
  input  logic              clk_eth_cn,
  input  logic              rst_eth_cn_n,
  input  logic              clk_eth_mn,
  input  logic              rst_eth_mn_n,
  input  logic [MAC_W-1:0]  cfg_cn_mac,
  input  logic [MAC_W-1:0]  cfg_mn_mac,
  input  logic [RATE_W-1:0] cfg_init_rate,
  input  logic [$clog2(FIFO_DEPTH):0] cfg_pfc_threshold,
  input  logic              tlb_flush,
  // host (CXL IP AXI side)
  input  logic              host_req_valid,
  output logic              host_req_ready,
  input  mreq_t             host_req,
  output logic              host_rsp_valid,
  input  logic              host_rsp_ready,
  output mrsp_t             host_rsp,
  // CN MAC
  output logic              cn_mac_tx_valid,
  input  logic              cn_mac_tx_ready,
  output pkt_t              cn_mac_tx_pkt,
  input  logic              cn_mac_rx_valid,
  input  logic              cn_mac_rx_err,
  input  pkt_t              cn_mac_rx_pkt,
  input  logic              cn_mac_rx_pfc,
  // MN MAC
  output logic              mn_mac_tx_valid,
  input  logic              mn_mac_tx_ready,
  output pkt_t              mn_mac_tx_pkt,
  input  logic              mn_mac_rx_valid,
  input  logic              mn_mac_rx_err,
  input  pkt_t              mn_mac_rx_pkt,
  output logic              mn_pfc_req,
  // DDR controller
  output logic              ddr_req_valid,
  input  logic              ddr_req_ready,
  output dreq_t             ddr_req,
  input  logic              ddr_rsp_valid,
  input  logic [DATA_W-1:0] ddr_rsp_data,
  // status
  output logic [RATE_W-1:0] cc_rate,
  output logic [2:0]        cc_phase,
  output logic [31:0]       cn_counters [12],
  output logic [31:0]       mn_counters [9]
);
  cn_fpga #(
    .CACHE_BYTES(CACHE_BYTES), .CACHE_WAYS(CACHE_WAYS), .FIFO_DEPTH(FIFO_DEPTH),
    .RB_DEPTH(RB_DEPTH), .TIMEOUT(TIMEOUT), .RATE_W(RATE_W),
    .T1(T1), .T2(T2), .T3(T3), .T4(T4), .T5(T5), .T6(T6)
  ) u_cn (
    .clk(clk_cn), .rst_n(rst_cn_n), .clk_eth(clk_eth_cn), .rst_eth_n(rst_eth_cn_n),
    .cfg_local_mac(cfg_cn_mac), .cfg_remote_mac(cfg_mn_mac), .cfg_init_rate,
    .host_req_valid, .host_req_ready, .host_req, .host_rsp_valid, .host_rsp_ready, .host_rsp,
    .mac_tx_valid(cn_mac_tx_valid), .mac_tx_ready(cn_mac_tx_ready), .mac_tx_pkt(cn_mac_tx_pkt),
    .mac_rx_valid(cn_mac_rx_valid), .mac_rx_err(cn_mac_rx_err), .mac_rx_pkt(cn_mac_rx_pkt),
    .mac_rx_pfc(cn_mac_rx_pfc),
    .cc_rate, .cc_phase,
    .cnt_hit(cn_counters[0]), .cnt_miss(cn_counters[1]), .cnt_writeback(cn_counters[2]),
    .cnt_wr_nofetch(cn_counters[3]), .cnt_retx(cn_counters[4]), .cnt_crc_err(cn_counters[5]),
    .cnt_sack(cn_counters[6]), .cnt_gap(cn_counters[7]), .cnt_timeout(cn_counters[8]),
    .cnt_pfc(cn_counters[9]), .cnt_pfc_dup(cn_counters[10]), .cnt_rx_drop(cn_counters[11])
  );

  mn_fpga #(.FIFO_DEPTH(FIFO_DEPTH), .RB_DEPTH(RB_DEPTH), .TLB_ENTRIES(TLB_ENTRIES)) u_mn (
    .clk(clk_mn), .rst_n(rst_mn_n), .clk_eth(clk_eth_mn), .rst_eth_n(rst_eth_mn_n),
    .cfg_local_mac(cfg_mn_mac), .cfg_pfc_threshold, .tlb_flush,
    .mac_rx_valid(mn_mac_rx_valid), .mac_rx_err(mn_mac_rx_err), .mac_rx_pkt(mn_mac_rx_pkt),
    .mac_tx_valid(mn_mac_tx_valid), .mac_tx_ready(mn_mac_tx_ready), .mac_tx_pkt(mn_mac_tx_pkt),
    .pfc_req(mn_pfc_req),
    .ddr_req_valid, .ddr_req_ready, .ddr_req, .ddr_rsp_valid, .ddr_rsp_data,
    .cnt_req(mn_counters[0]), .cnt_crc_err(mn_counters[1]), .cnt_sack_sent(mn_counters[2]),
    .cnt_merged(mn_counters[3]), .cnt_dup_resend(mn_counters[4]), .cnt_fault(mn_counters[5]),
    .cnt_tlb_miss(mn_counters[6]), .cnt_rx_drop(mn_counters[7]), .cnt_pfc_cycles(mn_counters[8])
  );

endmodule
