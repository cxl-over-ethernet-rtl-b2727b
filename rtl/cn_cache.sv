// cn_cache: the compute-node cache that sits between the CXL agent and the CN
// packet manager and holds remote-memory lines on the CN FPGA.
//
// Organisation (paper): 32 KB, 4-way set associative, LRU replacement, 64-byte
// lines (the CXL.mem granule), three line states of MESI: M, E and I. The cache
// is private to its CN, so nothing is ever snooped or invalidated from outside.
// Policies (paper):
//   read hit            answered from the cache
//   write hit           line updated, state M
//   read miss           line fetched from remote memory, installed in E
//   write miss, a free way in the set
//                       the full line is written into the free way (state M)
//                       without fetching it and without telling the MN
//   write miss, set full / read miss with an M victim
//                       the LRU victim, if M, is written back to remote memory
// Choices of this design: one request is handled at a time (blocking); a write
// miss that evicts an M line waits for the write-back response before answering
// (this is what makes that case cost a network round trip, as in the paper's
// latency table); a read miss posts the write-back and sends the read right
// behind it, then discards the write-back response; requests always carry a
// whole line (no byte enables); LRU is kept as a 2-bit age per way.
//
// Interface: host side req_*/rsp_* (mreq_t/mrsp_t from coe_pkg, the AXI side of
// the CXL IP), remote side mem_req_*/mem_rsp_* to the CN packet manager.
// Timing: a hit is answered two cycles after the request is accepted.
module cn_cache
  import coe_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 32768,
  parameter int unsigned WAYS       = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req_valid,
  output logic  req_ready,
  input  mreq_t req,
  output logic  rsp_valid,
  input  logic  rsp_ready,
  output mrsp_t rsp,
  output logic  mem_req_valid,
  input  logic  mem_req_ready,
  output mreq_t mem_req,
  input  logic  mem_rsp_valid,
  output logic  mem_rsp_ready,
  input  mrsp_t mem_rsp,
  // event strobes for statistics
  output logic  ev_hit,
  output logic  ev_miss,
  output logic  ev_writeback,
  output logic  ev_wr_nofetch
);
  localparam int unsigned OFF_W  = $clog2(LINE_BYTES);
  localparam int unsigned SETS   = SIZE_BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned SET_W  = $clog2(SETS);
  localparam int unsigned WAY_W  = $clog2(WAYS);
  localparam int unsigned TAG_W  = ADDR_W - SET_W - OFF_W;

  typedef enum logic [1:0] { LS_I = 2'd0, LS_E = 2'd1, LS_M = 2'd2 } lstate_e;
  typedef enum logic [2:0] {
    S_IDLE, S_LOOKUP, S_WB_REQ, S_RD_REQ, S_WAIT_WB, S_WAIT_RD, S_RESP
  } cstate_e;

  logic [DATA_W-1:0] data_mem [SETS*WAYS];
  logic [TAG_W-1:0]  tag_mem  [SETS][WAYS];
  lstate_e           st_mem   [SETS][WAYS];
  logic [WAY_W-1:0]  age_mem  [SETS][WAYS];

  cstate_e           cs;
  mreq_t             r;            // request being served
  mrsp_t             rsp_q;
  logic [WAY_W-1:0]  way_q;        // way chosen for the fill / install
  logic [TAG_W-1:0]  victim_tag_q;

  logic [SET_W-1:0]  set_i;
  logic [TAG_W-1:0]  tag_i;
  assign set_i = r.addr[OFF_W +: SET_W];
  assign tag_i = r.addr[ADDR_W-1 -: TAG_W];

  // ---- lookup ----
  logic             hit, has_free;
  logic [WAY_W-1:0] hit_way, free_way, lru_way, victim_way;
  always_comb begin
    hit = 1'b0; hit_way = '0; has_free = 1'b0; free_way = '0; lru_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (st_mem[set_i][w] != LS_I && tag_mem[set_i][w] == tag_i) begin
        hit = 1'b1; hit_way = WAY_W'(w);
      end
      if (st_mem[set_i][w] == LS_I) begin
        has_free = 1'b1; free_way = WAY_W'(w);
      end
      if (age_mem[set_i][w] == WAY_W'(WAYS - 1)) lru_way = WAY_W'(w);
    end
    victim_way = has_free ? free_way : lru_way;
  end

  logic             touch;
  logic [WAY_W-1:0] touch_way;

  assign req_ready     = (cs == S_IDLE);
  assign rsp_valid     = (cs == S_RESP);
  assign rsp           = rsp_q;
  assign mem_rsp_ready = (cs == S_WAIT_WB) || (cs == S_WAIT_RD);

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req       = '0;
    if (cs == S_WB_REQ) begin
      mem_req_valid = 1'b1;
      mem_req.we    = 1'b1;
      mem_req.id    = r.id;
      mem_req.addr  = {victim_tag_q, set_i, OFF_W'(0)};
      mem_req.data  = data_mem[{set_i, way_q}];
    end else if (cs == S_RD_REQ) begin
      mem_req_valid = 1'b1;
      mem_req.we    = 1'b0;
      mem_req.id    = r.id;
      mem_req.addr  = {tag_i, set_i, OFF_W'(0)};
    end
  end

  assign ev_hit        = (cs == S_LOOKUP) && hit;
  assign ev_miss       = (cs == S_LOOKUP) && !hit;
  assign ev_writeback  = (cs == S_WB_REQ) && mem_req_ready;
  assign ev_wr_nofetch = (cs == S_LOOKUP) && !hit && r.we && has_free;

  always_comb begin
    touch = 1'b0; touch_way = way_q;
    if (cs == S_LOOKUP && hit) begin touch = 1'b1; touch_way = hit_way; end
    else if (cs == S_LOOKUP && r.we && has_free) begin touch = 1'b1; touch_way = free_way; end
    else if (cs == S_LOOKUP && r.we && st_mem[set_i][victim_way] != LS_M) begin
      touch = 1'b1; touch_way = victim_way;
    end
    else if (cs == S_WAIT_WB && mem_rsp_valid && mem_rsp.we) touch = 1'b1;
    else if (cs == S_WAIT_RD && mem_rsp_valid && !mem_rsp.we) touch = 1'b1;
  end

  // ---- control, tags, states, ages ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs <= S_IDLE;
      r  <= '0;
      rsp_q <= '0;
      way_q <= '0;
      victim_tag_q <= '0;
      for (int s = 0; s < int'(SETS); s++)
        for (int w = 0; w < int'(WAYS); w++) begin
          st_mem[s][w]  <= LS_I;
          age_mem[s][w] <= WAY_W'(w);
        end
    end else begin
      if (touch) begin
        for (int w = 0; w < int'(WAYS); w++)
          if (age_mem[set_i][w] < age_mem[set_i][touch_way]) age_mem[set_i][w] <= age_mem[set_i][w] + 1'b1;
        age_mem[set_i][touch_way] <= '0;
      end

      unique case (cs)
        S_IDLE: if (req_valid) begin
          r  <= req;
          cs <= S_LOOKUP;
        end
        S_LOOKUP: begin
          rsp_q.we <= r.we;
          rsp_q.id <= r.id;
          way_q        <= victim_way;
          victim_tag_q <= tag_mem[set_i][victim_way];
          if (hit) begin
            rsp_q.data <= r.we ? '0 : data_mem[{set_i, hit_way}];
            if (r.we) st_mem[set_i][hit_way] <= LS_M;
            cs <= S_RESP;
          end else if (r.we && has_free) begin
            tag_mem[set_i][free_way] <= tag_i;
            st_mem[set_i][free_way]  <= LS_M;
            rsp_q.data <= '0;
            cs <= S_RESP;
          end else if (st_mem[set_i][victim_way] == LS_M) begin
            cs <= S_WB_REQ;
          end else if (r.we) begin
            // clean victim: overwrite in place
            tag_mem[set_i][victim_way] <= tag_i;
            st_mem[set_i][victim_way]  <= LS_M;
            rsp_q.data <= '0;
            cs <= S_RESP;
          end else begin
            cs <= S_RD_REQ;
          end
        end
        S_WB_REQ: if (mem_req_ready) begin
          st_mem[set_i][way_q] <= LS_I;
          cs <= r.we ? S_WAIT_WB : S_RD_REQ;
        end
        S_RD_REQ: if (mem_req_ready) cs <= S_WAIT_RD;
        S_WAIT_WB: if (mem_rsp_valid && mem_rsp.we) begin
          tag_mem[set_i][way_q] <= tag_i;
          st_mem[set_i][way_q]  <= LS_M;
          rsp_q.data <= '0;
          cs <= S_RESP;
        end
        S_WAIT_RD: if (mem_rsp_valid && !mem_rsp.we) begin
          tag_mem[set_i][way_q] <= tag_i;
          st_mem[set_i][way_q]  <= LS_E;
          rsp_q.data <= mem_rsp.data;
          cs <= S_RESP;
        end
        S_RESP: if (rsp_ready) cs <= S_IDLE;
        default: cs <= S_IDLE;
      endcase
    end
  end

  // ---- data array ----
  always_ff @(posedge clk) begin
    if (cs == S_LOOKUP && r.we) begin
      if (hit)                                          data_mem[{set_i, hit_way}]    <= r.data;
      else if (has_free)                                data_mem[{set_i, free_way}]   <= r.data;
      else if (st_mem[set_i][victim_way] != LS_M)       data_mem[{set_i, victim_way}] <= r.data;
    end
    if (cs == S_WAIT_WB && mem_rsp_valid && mem_rsp.we) data_mem[{set_i, way_q}] <= r.data;
    if (cs == S_WAIT_RD && mem_rsp_valid && !mem_rsp.we) data_mem[{set_i, way_q}] <= mem_rsp.data;
  end

endmodule
