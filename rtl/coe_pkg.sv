// coe_pkg: types and constants shared by the CXL-over-Ethernet blocks.
//
// The packet format follows the write-request layout of the design: destination
// MAC, source MAC, EtherType, Command, two sequence numbers, the AXI write id, the
// address and a 64-byte data field, 89 bytes without preamble and CRC. The order
// of the fields and the 89-byte total are the paper's; the width of each field
// is this design's choice: only DA/SA (6 bytes each), Type (2) and data (64) are
// fixed by Ethernet and the 64-byte line, which leaves 11 bytes split here as
// Command 1, Seq 2, Ack 2, Awid 1, Address 5.
//
// Command byte: bits [2:0] give the packet format, bits [5:4] flag a selective
// acknowledgment (SACK) and a negative acknowledgment (NAK) merged into the
// packet. A response (read or write) is itself the acknowledgment of the request
// with the same sequence number. The encodings are this design's own.
//
// Timing: none (types, constants and pure functions only).
package coe_pkg;

  localparam int unsigned LINE_BYTES = 64;          // cache line / CXL.mem data granule
  localparam int unsigned DATA_W     = 512;         // data path width
  localparam int unsigned ADDR_W     = 40;          // CMem address carried in packets
  localparam int unsigned SEQ_W      = 16;
  localparam int unsigned ID_W       = 8;
  localparam int unsigned MAC_W      = 48;
  localparam logic [15:0] ETYPE_COE  = 16'h88B5;    // IEEE local experimental EtherType

  // Packet formats (Command[2:0]).
  typedef enum logic [2:0] {
    CMD_NONE   = 3'd0,
    CMD_RD_REQ = 3'd1,
    CMD_WR_REQ = 3'd2,
    CMD_RD_RSP = 3'd3,
    CMD_WR_RSP = 3'd4,
    CMD_NAK    = 3'd5,   // stand-alone NAK
    CMD_SACK   = 3'd6,   // stand-alone SACK(+NAK)
    CMD_PAD    = 3'd7
  } cmd_e;

  typedef struct packed {
    logic       rsvd1;
    logic       rsvd0;
    logic       sack;    // addr[15:0] holds the selectively acknowledged sequence number
    logic       nak;     // ack field holds the first missing sequence number
    logic       rsvd2;
    cmd_e       fmt;
  } command_t;

  // 89-byte frame body, first transmitted byte in the most significant position.
  typedef struct packed {
    logic [MAC_W-1:0]  da;
    logic [MAC_W-1:0]  sa;
    logic [15:0]       etype;
    command_t          cmd;
    logic [SEQ_W-1:0]  seq;    // own sequence number (responses: the request answered)
    logic [SEQ_W-1:0]  ack;    // requests: last in-order response seen; NAK: missing seq
    logic [ID_W-1:0]   awid;
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] data;
  } pkt_t;

  localparam int unsigned PKT_W     = $bits(pkt_t);     // 712 bits = 89 bytes
  localparam int unsigned PKT_BYTES = PKT_W / 8;
  localparam int unsigned HDR_BYTES = PKT_BYTES - LINE_BYTES; // 25: a read request
  // Bytes a frame takes on the wire besides its body: preamble+SFD 8, CRC 4, gap 12.
  localparam int unsigned WIRE_OVERHEAD = 24;

  // Memory request / response as delivered by the CXL IP's AXI side (one 64-byte beat).
  typedef struct packed {
    logic              we;
    logic [ID_W-1:0]   id;
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] data;
  } mreq_t;

  typedef struct packed {
    logic              we;
    logic [ID_W-1:0]   id;
    logic [DATA_W-1:0] data;
  } mrsp_t;

  // Memory-pool (DDR) access at the MN, after address translation.
  localparam int unsigned MP_ADDR_W = 35;  // 32 GB of DRAM on the MN board

  typedef struct packed {
    logic                 we;
    logic [MP_ADDR_W-1:0] addr;
    logic [DATA_W-1:0]    data;
  } dreq_t;

  // Address translation at the MN. Pages are PAGE_BITS large; the page table
  // lives in the pool, one entry per 64-byte line, at PT_BASE, indexed by a hash
  // of CN id and CMem page with linear probing. Sizes are this design's choice.
  localparam int unsigned PAGE_BITS   = 21;                   // 2 MB pages
  localparam int unsigned CPAGE_W     = ADDR_W - PAGE_BITS;   // CMem page number
  localparam int unsigned MPAGE_W     = MP_ADDR_W - PAGE_BITS;// MPMem page number
  localparam int unsigned PT_IDX_W    = MPAGE_W;              // one slot per pool page
  localparam logic [MP_ADDR_W-1:0] PT_BASE = MP_ADDR_W'(64'h7_FF00_0000); // top 16 MB

  typedef struct packed {
    logic [MPAGE_W-1:0] mp_page;
    logic [CPAGE_W-1:0] cmem_page;
    logic [MAC_W-1:0]   cn_id;
    logic               valid;
  } pte_t;

  function automatic logic [PT_IDX_W-1:0] pt_hash(input logic [MAC_W-1:0] cn_id,
                                                  input logic [CPAGE_W-1:0] cpage);
    logic [63:0] x;
    logic [PT_IDX_W-1:0] h;
    x = {16'h0, cn_id} ^ {45'h0, cpage} ^ ({45'h0, cpage} << 23);
    h = '0;
    for (int i = 0; i < 64; i += int'(PT_IDX_W)) h = h ^ PT_IDX_W'(x >> i);
    return h;
  endfunction

  function automatic logic [MP_ADDR_W-1:0] pt_slot_addr(input logic [PT_IDX_W-1:0] idx);
    return PT_BASE + (MP_ADDR_W'(idx) << $clog2(LINE_BYTES));
  endfunction

  // Sequence-number helpers: distance from a to b modulo 2^SEQ_W.
  function automatic logic [SEQ_W-1:0] seq_dist(input logic [SEQ_W-1:0] from_s,
                                                 input logic [SEQ_W-1:0] to_s);
    return to_s - from_s;
  endfunction

  // Bytes a packet of this format occupies on the wire (read requests carry no data,
  // nor do write responses and stand-alone acknowledgments).
  function automatic int unsigned wire_bytes(input cmd_e fmt);
    if (fmt == CMD_WR_REQ || fmt == CMD_RD_RSP) return PKT_BYTES + WIRE_OVERHEAD;
    return HDR_BYTES + WIRE_OVERHEAD;
  endfunction

endpackage
