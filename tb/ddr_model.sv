// ddr_model: behavioural stand-in for the memory node's DDR4 controller and DRAM
// (kind: behavioural model, simulation only).
//
// One access at a time: a request is accepted when idle, and LAT cycles later
// ddr_rsp_valid pulses, with the line read (reads) or as a write completion.
// Storage is sparse (an associative array of 64-byte lines, zero when never
// written). The testbench fills page-table slots with poke().
module ddr_model
  import coe_pkg::*;
#(
  parameter int unsigned LAT = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  dreq_t             req,
  output logic              rsp_valid,
  output logic [DATA_W-1:0] rsp_data
);
  logic [DATA_W-1:0] mem [logic [MP_ADDR_W-7:0]];
  int unsigned       cnt;
  logic              busy;
  dreq_t             q;
  int unsigned       n_rd, n_wr;

  function automatic logic [DATA_W-1:0] peek(input logic [MP_ADDR_W-1:0] a);
    if (mem.exists(a[MP_ADDR_W-1:6])) return mem[a[MP_ADDR_W-1:6]];
    return '0;
  endfunction

  function automatic void poke(input logic [MP_ADDR_W-1:0] a, input logic [DATA_W-1:0] d);
    mem[a[MP_ADDR_W-1:6]] = d;
  endfunction

  assign req_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= 0; rsp_valid <= 1'b0; rsp_data <= '0; q <= '0;
      n_rd <= 0; n_wr <= 0;
    end else begin
      rsp_valid <= 1'b0;
      if (!busy && req_valid) begin
        busy <= 1'b1; q <= req; cnt <= LAT;
      end else if (busy) begin
        if (cnt <= 1) begin
          busy      <= 1'b0;
          rsp_valid <= 1'b1;
          if (q.we) begin
            mem[q.addr[MP_ADDR_W-1:6]] = q.data;
            rsp_data <= '0;
            n_wr <= n_wr + 1;
          end else begin
            rsp_data <= peek(q.addr);
            n_rd <= n_rd + 1;
          end
        end else cnt <= cnt - 1;
      end
    end
  end
endmodule
