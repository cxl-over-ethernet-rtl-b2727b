# CXL over Ethernet — FPGA memory disaggregation RTL

This is synthesizable SystemVerilog for the FPGA logic of a memory-disaggregation system. A
server (the compute node, CN) sees remote memory as ordinary CXL.mem memory. An FPGA on the CN
carries each memory access over 100G Ethernet to a second FPGA on a memory node (MN). The MN
translates the address and accesses its DDR4 pool. The CN FPGA also holds a small cache, so
accesses that hit never go on the network.

The design follows "CXL over Ethernet: A Novel FPGA-based Memory Disaggregation Design in Data
Centers". The paper describes the architecture and the protocol rules. Most of the
micro-architecture here (buffer organisation, handshakes, encodings, timing) is this design's own
choice. Each such choice is listed under "Departures and choices" below and in the opening comment
of every file.

## What is in the repository

| File | Role |
|---|---|
| `rtl/coe_pkg.sv` | Shared types and constants: the 89-byte packet, commands, request/response structs, address-translation layout and helpers |
| `rtl/async_fifo.sv` | Dual-clock Gray-pointer FIFO, 512 deep, used at every clock crossing |
| `rtl/cn_cache.sv` | 32 KB, 4-way, LRU, 64-byte lines with M/E/I states; a write miss is installed without a fetch |
| `rtl/cc_fsm.sv` | Switch-independent congestion control: the six-phase rate state machine driven by PFC |
| `rtl/token_bucket.sv` | Paces transmitted frames to the rate that `cc_fsm` sets |
| `rtl/retry_buffer.sv` | Sent packets held by sequence number until acknowledged; selective, range and timeout resends |
| `rtl/reorder_buffer.sv` | Releases received packets in sequence order; classifies arrivals as expected, gap or old |
| `rtl/cn_pkt_mgr.sv` | CN packet manager: turns cache misses and write-backs into request frames and runs the CN side of the retransmission protocol |
| `rtl/mn_pkt_mgr.sv` | MN packet manager: processes requests in order, returns responses (ACKs), sends delayed SACK+NAK and resends lost responses |
| `rtl/addr_translator.sv` | CMem to pool-address translation: a CAM TLB plus a hashed page table in the pool |
| `rtl/cn_fpga.sv` | CN FPGA: cache, packet manager, congestion control, token bucket, crossings to the MAC clock |
| `rtl/mn_fpga.sv` | MN FPGA: receive FIFO with the PFC threshold, packet manager, translator, DDR port sharing |
| `rtl/cxl_over_eth.sv` | Top: one CN FPGA and one MN FPGA. The CXL IP, both MACs and the DDR controller are ports. |
| `tb/` | One self-checking testbench per block, plus two behavioural models: `ddr_model.sv` and `eth_link_model.sv` (a lossy, delaying link) |

Not in the RTL are the vendor parts the paper uses and does not design. They appear as ports of
the top:
- the CXL 1.1 soft IP with the PCIe Gen4 x8 block;
- the 100G Ethernet MAC/PHY;
- the DDR4 controller and its DRAM;
- the clock generators.

The Global Memory Manager, which allocates pool pages to CNs, is a management agent in the paper
with no hardware described. Its output, the page table in the pool, is filled by the testbenches.

## Data path

```
host CPU ──CXL.mem──> [CXL IP] ──mreq_t──> cn_cache ──miss/write-back──> cn_pkt_mgr ──> token_bucket
                                                                                    │
      clk 250 MHz                                  async_fifo ──> [100G MAC] 322.266 MHz ──> link
                                                                                    │
link ──> [MAC] ──> async_fifo (level > threshold ⇒ PFC) ──> mn_pkt_mgr ──> addr_translator
                                                                 │                 │ page-table reads
                                                                 └──> [DDR4 controller] 300 MHz
```

Responses take the reverse path. At the CN they pass the reorder buffer in cn_pkt_mgr, which puts
them back in request order before the cache receives them.

### Packet format (`coe_pkg::pkt_t`, 89 bytes, 712 bits)

| Field | Bytes | Use |
|---|---|---|
| DA, SA | 6 + 6 | MAC addresses. The CN's MAC is also its identity at the MN. |
| EtherType | 2 | 0x88B5 |
| Command | 1 | bits [2:0] give the format: 1 RD_REQ, 2 WR_REQ, 3 RD_RSP, 4 WR_RSP, 5 NAK, 6 SACK. Bit 4 is the NAK flag and bit 5 the SACK flag, so a response can also carry SACK+NAK. |
| Seq | 2 | Sequence number. A response reuses the number of the request it answers. |
| Ack | 2 | In a request: the last response the CN has received in order. In a NAK: the missing request. |
| AWID | 1 | AXI-style transaction id, returned unchanged |
| Address | 5 | The 40-bit CMem address. In a SACK, bits [15:0] hold the SACKed sequence number. |
| Data | 64 | One cache line |

Frames without data (read requests, write responses, SACK/NAK) are 25 bytes on the wire plus
framing. The token bucket charges each frame its wire size plus 24 bytes of preamble, CRC and
inter-frame gap.

## Mechanisms

**Cache** (`cn_cache`). The cache is blocking and takes one request at a time.
- A hit answers 2 cycles after the request is accepted.
- A read miss takes the LRU (or a free) way. If the victim is M, its write-back is posted first,
  then the line is read. The line is installed in state E.
- A write miss with a free way is written straight into the cache in state M, with no network
  traffic, as the paper specifies. With every way valid, an M victim is written back, and the
  cache waits for that write to be acknowledged. The new line is then installed without a fetch,
  because a request always writes the whole line.
- Lines are never shared between CNs, so M/E/I is all the coherence needed.

**Retransmission** (`retry_buffer`, `reorder_buffer`, both packet managers). This is the most
involved part.
- Both sides keep a retry buffer (512 packets) for what they send, and a reorder buffer for what
  they receive.
- The MN's response with sequence number s is the ACK of request s.
- At the MN:
  - **Request ahead of a missing one** (or after a CRC error has been dropped): the request is
    stored. A SACK(s)+NAK(missing) is scheduled but not sent at once. If a response is being
    prepared, it leaves merged into that response as SACK+NAK+ACK. If the access engine is quiet,
    it leaves as a stand-alone SACK frame.
  - **Request older than the one expected**: the CN has lost that response. The MN resends the
    stored response at once and does not access memory again.
  - **Ack field of each request**: frees the MN's response retry buffer cumulatively.
- At the CN:
  - **SACK**: marks the packet in the retry buffer. The CN resends the packets between the
    previous SACK mark (or the oldest unacknowledged packet) and the new mark, skipping any that
    are already acknowledged or marked.
  - **Response s arriving after response p, with s > p+1**: the CN resends requests p+1 … s-1 at
    once.
  - **Nothing acknowledged for TIMEOUT cycles**: the CN resends the whole window and clears the
    SACK marks. Without the clearing, a SACKed request whose response was lost would never be
    resent.
- Resends take priority over new requests. Resent requests carry a refreshed ack field.

**Congestion control** (`cc_fsm`, `token_bucket`, PFC in `mn_fpga`).
- The MN asks its MAC for PFC while the receive FIFO holds more than `cfg_pfc_threshold` entries.
- At the CN, a PFC received by the MAC crosses into the core clock and drives the six phases:

| Phase | What happens |
|---|---|
| a Stable | After t4 with no PFC, go to e |
| b PFC Response | On entry TR := CR and CR := CR/2. A further PFC halves CR again and restarts t1. After t1, go to c. |
| c Fast Recovery | Every t3, CR := (CR+TR)/2. After five speed-ups, back to a. A PFC goes to d. |
| d Recovery PFC | On entry TR := 7/8·CR and CR := 3/4·CR. A further PFC takes CR to 3/4 again and restarts t1. After t1, back to c. |
| e Exploration | Every t5, CR += 1 Gbps up to 100 Gbps. A PFC undoes one step and goes to f. |
| f Guessing | After t6 with no PFC, go to a. A PFC goes to b. |

- In every phase, a PFC within t2 of the last accepted one is a duplicate and is ignored.
- At 250 MHz the timers are 12,500, 2,500, 2,750, 50,000, 10,000 and 5,000 cycles (50, 10, 11,
  200, 40 and 20 µs).
- The token bucket adds `rate` tokens per cycle, with the rate in Mb/s. A frame of N bytes costs
  N·8·250 tokens, so throughput equals the set rate.

**Address translation** (`addr_translator`).
- A fully associative TLB of 64 entries, keyed by (CN MAC, CMem 2 MB page), answers a hit in one
  cycle. Replacement is round-robin.
- On a miss, the translator reads the page table in the pool. The table sits at `PT_BASE`, the top
  16 MB of the 32 GB pool, with one 64-byte slot per entry.
- The slot index is an XOR-fold hash of the CN id and the page. On a collision the next slot is
  read (linear probing), up to 4 reads, and then the access faults.
- A fault is answered with zero data.
- The translator and the access engine share the single DDR port.

**Clocking.**
- CN core: 250 MHz, the CXL IP clock.
- Both MACs: 322.266 MHz.
- MN core and DDR: 300 MHz.
- Every crossing is an `async_fifo` (512 deep, as in the paper) or the toggle synchroniser on the
  PFC pulse.
- Reset is asynchronous active-low, one reset per clock domain. Each reset must be released
  synchronously to its clock, by a reset bridge outside this RTL. Lint reports the MN reset as
  used both synchronously and asynchronously. The synchronous use is only the `disable iff` of an
  assertion in `mn_pkt_mgr`; all flip-flops reset asynchronously.

## Interfaces of the top (`cxl_over_eth`)

| Port group | Meaning |
|---|---|
| `clk_cn`, `clk_mn`, `clk_eth_cn`, `clk_eth_mn` and their `rst_*_n` | Four clocks with matching resets |
| `cfg_cn_mac`, `cfg_mn_mac`, `cfg_init_rate`, `cfg_pfc_threshold`, `tlb_flush` | Static configuration |
| `host_req_*` / `host_rsp_*` | The CXL IP's side: 64-byte line read/write requests (`mreq_t`) and responses (`mrsp_t`) with valid/ready |
| `cn_mac_*`, `mn_mac_*` | Frame interfaces of the two MACs, one whole frame per beat, plus `rx_err` (bad CRC) and, at the CN, `rx_pfc`. `mn_pfc_req` asks the MN MAC to send PFC. |
| `ddr_*` | One-line request/completion port standing in for the controller's AXI ports |
| `cc_rate`, `cc_phase`, `cn_counters[12]`, `mn_counters[9]` | Status and event counters |

## Departures and choices

Each of these is a choice made here, not something the paper gives:
- The cache is blocking, with one miss outstanding. The paper sizes its buffers for 256 + 256
  requests in flight. The buffers here are that size, but the cache never fills them.
- Because of the blocking cache, host traffic keeps at most two requests in flight. It cannot
  fill the MN receive FIFO to the 20–105 entry thresholds of the congestion experiments, so those
  thresholds are only reached with faster or multiple request sources.
- The MAC frame interface carries a whole 712-bit frame per beat. A real 512-bit MAC stream
  interface needs a small width converter.
- The memory port is a simple request/completion handshake rather than AXI.
- Row-column-bank mapping and interleaving belong to the DDR controller's configuration and are
  not here.
- Command codes, field order within the 89 bytes, and the EtherType are not given in the text.
- The retry timeout (4,096 cycles), the 1 Gbps rate floor, and the 1 KB token-bucket depth are
  assumed values.
- One CN is served per MN port, as in the two-board prototype. Several CNs need one sequence state
  each.
- 2 MB pages, a 64-entry TLB, four probes, and round-robin TLB replacement are assumed.
- The MN takes up to 4 requests ahead of the one being processed. This lets a gap be seen, and its
  SACK merged, during a memory access, while a slow memory still backs traffic up into the PFC
  FIFO.
- Right after a gap is filled, the MN's gap detector catches up one packet per cycle. A further
  gap seen in that window is left to the CN's response-gap rule or timeout.
- The latencies in the paper (415 ns cache hit, 1.97 µs remote) include the CXL IP, PCIe, MAC/PHY
  and cable. Those parts are outside this RTL.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it covers |
|---|---|
| `tb_async_fifo` | Random two-clock traffic with full and empty reached; order and level |
| `tb_cc_fsm` | Every phase transition and the exact rates (e.g. speed-ups 62.5 → 81.25 → 90.625 … Gbps), duplicate PFC |
| `tb_token_bucket` | Measured throughput at several rates |
| `tb_retry_buffer` | Per-packet ACK, cumulative ACK, SACK ranges, range resend, timeout |
| `tb_reorder_buffer` | Shuffled and duplicated input against a reference model |
| `tb_cn_cache` | Random traffic against a reference memory, plus directed LRU, no-fetch, write-back and latency cases |
| `tb_addr_translator` | TLB hit and miss, probing, fault, flush |
| `tb_cn_pkt_mgr` | Frame fields, gap rule, SACK, CRC drop, timeout |
| `tb_mn_pkt_mgr` | Ordering, stand-alone and merged SACK+NAK, duplicate resend, cumulative ACK, fault, back-pressure |
| `tb_cxl_over_eth` | The whole system at shortened timers |
| `tb_latency_workloads` | The latency experiments at default parameters over clean links: 10,000 writes then 10,000 reads, a 32 KB all-hit pass, and a 50/50 random mix |
| `tb_cxl_over_eth_full` | The top with every parameter at its default: 400 operations over the faulty links, read-back check, latency measurement |

`tb_cxl_over_eth` runs the whole system at shortened timers:
- 1,500 random reads and writes from the host;
- links that drop and corrupt frames at regular intervals;
- a PFC phase in which the MN FIFO threshold is low, plus a scripted PFC walk through all six
  phases.

It counts every mechanism: hits, misses, write-backs, no-fetch writes, CRC drops, SACKs, gap
resends, timeouts, duplicate resends, TLB misses, PFC and duplicate PFC. It fails any mechanism
that never happened, and checks all data against a reference.

One mechanism is the exception: a SACK merged into a response. The blocking cache never has a
request waiting behind a lost one while a response is being built, so this cannot occur in the
system test. It is covered in `tb_mn_pkt_mgr` instead.

Measured at default parameters, with link delay excluded:
- a cache hit answers in 2 cycles (8 ns);
- a remote read miss takes 241 cycles at 250 MHz (0.96 µs), with a 20-cycle DDR model and the
  link model's serialisation delay.

`tb_latency_workloads` measures average latency at the host side, in 250 MHz cycles, with the
same link and memory models:

| Workload | Average latency |
|---|---|
| 10,000 writes to consecutive lines | 210.8 cycles |
| 10,000 reads of the same lines | 223.2 cycles |
| All-hit 32 KB pass | 2.0 cycles |
| 50/50 read/write mix over 4 MB | 153.3 cycles |

The first 512 writes fill free ways without network traffic. Every later write evicts a dirty line
and waits for its write-back. The reads each post a write-back and then fetch the line.

Synthesis of the top (yosys, generic cells): about 3,300 cells, 8,500 flip-flop bits and 3.2 Mbit
of memory. Most of the memory is the four 512 × 712-bit packet buffers and the FIFOs.

To simulate a testbench with Verilator 5:

```
t=tb_cxl_over_eth
verilator --binary --timing --assert --top-module $t -Mdir obj_$t -y rtl -y tb +libext+.sv -Irtl rtl/coe_pkg.sv tb/$t.sv
obj_$t/V$t
```

`tb_cxl_over_eth` accepts `+nofault` to run over clean links.
