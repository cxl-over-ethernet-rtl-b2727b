// addr_translator: MN address translation from CMem (the CN's view of remote
// memory) to MPMem (the memory pool's physical address).
//
// Following the paper, a TLB on the MN FPGA is searched like a CAM with the CN
// id (the CN's MAC address) and the CMem address, and on a miss the complete
// page table, kept in the memory pool and indexed by a hash of CN id and CMem
// address, is read. This design's choices: 2 MB pages, TLB_ENTRIES entries with
// round-robin replacement, a page table of one 64-byte slot per pool page at
// PT_BASE (coe_pkg::pte_t in the low bits of the slot), hash coe_pkg::pt_hash,
// collisions resolved by linear probing over at most PROBES slots, and a miss
// after PROBES slots reported as a fault. `flush` empties the TLB (after the
// global memory manager changes a mapping).
//
// Interface: req_valid/req_ready with cn_id and the CMem address; rsp_valid is
// a one-cycle pulse with the MPMem address or fault. pt_* reads page-table
// slots from the pool (one read in flight). Timing: a TLB hit answers one cycle
// after the request is accepted; a miss costs one pool read per probe.
module addr_translator
  import coe_pkg::*;
#(
  parameter int unsigned TLB_ENTRIES = 64,
  parameter int unsigned PROBES      = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 flush,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic [MAC_W-1:0]     req_cn_id,
  input  logic [ADDR_W-1:0]    req_addr,
  output logic                 rsp_valid,
  output logic [MP_ADDR_W-1:0] rsp_addr,
  output logic                 rsp_fault,
  output logic                 pt_req_valid,
  input  logic                 pt_req_ready,
  output logic [MP_ADDR_W-1:0] pt_req_addr,
  input  logic                 pt_rsp_valid,
  input  logic [DATA_W-1:0]    pt_rsp_data,
  output logic                 ev_tlb_hit,
  output logic                 ev_tlb_miss
);
  localparam int unsigned TI_W = $clog2(TLB_ENTRIES);

  typedef enum logic [2:0] { X_IDLE, X_LOOKUP, X_WALK, X_WAIT, X_RSP } xstate_e;
  xstate_e xs;

  pte_t                 tlb [TLB_ENTRIES];
  logic [TLB_ENTRIES-1:0] tlb_v;
  logic [TI_W-1:0]      rr;
  logic [MAC_W-1:0]     cn_q;
  logic [ADDR_W-1:0]    addr_q;
  logic [CPAGE_W-1:0]   cpage_q;
  logic [PT_IDX_W-1:0]  idx_q;
  logic [$clog2(PROBES+1)-1:0] probe_q;
  logic [MPAGE_W-1:0]   mpage_q;
  logic                 fault_q;

  assign cpage_q = addr_q[ADDR_W-1:PAGE_BITS];

  // CAM search
  logic             cam_hit;
  logic [MPAGE_W-1:0] cam_page;
  always_comb begin
    cam_hit  = 1'b0;
    cam_page = '0;
    for (int i = 0; i < int'(TLB_ENTRIES); i++)
      if (tlb_v[i] && tlb[i].cn_id == cn_q && tlb[i].cmem_page == cpage_q) begin
        cam_hit  = 1'b1;
        cam_page = tlb[i].mp_page;
      end
  end

  pte_t pte_rd;
  assign pte_rd = pte_t'(pt_rsp_data[$bits(pte_t)-1:0]);
  logic pte_match;
  assign pte_match = pte_rd.valid && pte_rd.cn_id == cn_q && pte_rd.cmem_page == cpage_q;

  assign req_ready    = (xs == X_IDLE);
  assign pt_req_valid = (xs == X_WALK);
  assign pt_req_addr  = pt_slot_addr(idx_q);
  assign rsp_valid    = (xs == X_LOOKUP && cam_hit) || (xs == X_RSP);
  assign rsp_addr     = (xs == X_LOOKUP) ? {cam_page, addr_q[PAGE_BITS-1:0]}
                                         : {mpage_q, addr_q[PAGE_BITS-1:0]};
  assign rsp_fault    = (xs == X_RSP) && fault_q;
  assign ev_tlb_hit   = (xs == X_LOOKUP) && cam_hit;
  assign ev_tlb_miss  = (xs == X_LOOKUP) && !cam_hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs      <= X_IDLE;
      tlb_v   <= '0;
      rr      <= '0;
      cn_q    <= '0;
      addr_q  <= '0;
      idx_q   <= '0;
      probe_q <= '0;
      mpage_q <= '0;
      fault_q <= 1'b0;
    end else begin
      unique case (xs)
        X_IDLE: if (req_valid) begin
          cn_q   <= req_cn_id;
          addr_q <= req_addr;
          xs     <= X_LOOKUP;
        end
        X_LOOKUP: begin
          if (cam_hit) xs <= X_IDLE;
          else begin
            idx_q   <= pt_hash(cn_q, cpage_q);
            probe_q <= '0;
            xs      <= X_WALK;
          end
        end
        X_WALK: if (pt_req_ready) xs <= X_WAIT;
        X_WAIT: if (pt_rsp_valid) begin
          if (pte_match) begin
            mpage_q <= pte_rd.mp_page;
            fault_q <= 1'b0;
            tlb[rr] <= pte_rd;
            tlb_v[rr] <= 1'b1;
            rr      <= rr + 1'b1;
            xs      <= X_RSP;
          end else if (probe_q == ($clog2(PROBES+1))'(PROBES - 1)) begin
            mpage_q <= '0;
            fault_q <= 1'b1;
            xs      <= X_RSP;
          end else begin
            probe_q <= probe_q + 1'b1;
            idx_q   <= idx_q + 1'b1;
            xs      <= X_WALK;
          end
        end
        X_RSP: xs <= X_IDLE;
        default: xs <= X_IDLE;
      endcase
      if (flush) tlb_v <= '0;
    end
  end

endmodule
