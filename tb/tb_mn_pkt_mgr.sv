// tb_mn_pkt_mgr: the MN packet manager with the compute node played by the
// testbench, a stub address translator (fixed offset, fault on address bit 39)
// and the behavioural DDR model.
// Checks: writes land in memory at the translated address and reads return
// them; responses carry the request's sequence number, format, id and the
// swapped MAC addresses; a request ahead of the expected one produces a
// stand-alone SACK+NAK when the engine is quiet, and one merged into the
// response in progress when it is busy; out-of-order requests are served in
// order once the gap is filled; a duplicate request makes the stored response
// go out again; a CRC-error frame is dropped; the cumulative acknowledgment
// frees stored responses; a translation fault is answered with zero data.
`timescale 1ns/1ps
module tb_mn_pkt_mgr;
  import coe_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = !clk;

  localparam logic [47:0] ME = 48'h02_00_00_00_00_0F, CN = 48'h02_00_00_00_00_0C;
  localparam logic [MP_ADDR_W-1:0] OFFS = 35'h1_0000_0000;

  logic rx_valid, rx_ready, rx_err, tx_valid, tx_ready;
  pkt_t rx_pkt, tx_pkt;
  logic xl_req_valid, xl_req_ready, xl_rsp_valid, xl_rsp_fault;
  logic [MAC_W-1:0] xl_cn_id;
  logic [ADDR_W-1:0] xl_addr;
  logic [MP_ADDR_W-1:0] xl_rsp_addr;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  dreq_t mem_req;
  logic [DATA_W-1:0] mem_rsp_data;
  logic [31:0] cnt_req, cnt_crc_err, cnt_sack_sent, cnt_merged, cnt_dup_resend, cnt_fault;

  mn_pkt_mgr #(.DEPTH(32)) dut (.clk, .rst_n, .cfg_local_mac(ME),
    .rx_valid, .rx_ready, .rx_err, .rx_pkt, .tx_valid, .tx_ready, .tx_pkt,
    .xl_req_valid, .xl_req_ready, .xl_cn_id, .xl_addr, .xl_rsp_valid, .xl_rsp_addr, .xl_rsp_fault,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_rsp_valid, .mem_rsp_data,
    .cnt_req, .cnt_crc_err, .cnt_sack_sent, .cnt_merged, .cnt_dup_resend, .cnt_fault);

  ddr_model #(.LAT(20)) u_ddr (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  // translator stub: answers one cycle after the request
  assign xl_req_ready = 1'b1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xl_rsp_valid <= 1'b0; xl_rsp_addr <= '0; xl_rsp_fault <= 1'b0;
    end else begin
      xl_rsp_valid <= xl_req_valid;
      xl_rsp_addr  <= xl_addr[MP_ADDR_W-1:0] + OFFS;
      xl_rsp_fault <= xl_addr[ADDR_W-1];
    end
  end

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  pkt_t sent [$];
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) sent.push_back(tx_pkt);

  function automatic logic [DATA_W-1:0] pat(input int n);
    return {16{32'(n * 32'h9E37_79B9)}};
  endfunction

  // one request frame; ack = last in-order response the CN has seen
  task automatic send(input int s, input bit we, input logic [ADDR_W-1:0] a,
                      input int ack = 16'hFFFF, input bit err = 0);
    pkt_t p;
    p = '0;
    p.da = ME; p.sa = CN; p.etype = ETYPE_COE;
    p.cmd.fmt = we ? CMD_WR_REQ : CMD_RD_REQ;
    p.seq = 16'(s); p.ack = 16'(ack); p.awid = 8'(s + 3); p.addr = a;
    p.data = we ? pat(s) : '0;
    @(negedge clk);
    rx_valid = 1; rx_err = err; rx_pkt = p;
    while (!rx_ready) @(negedge clk);
    @(negedge clk);
    rx_valid = 0; rx_err = 0;
  endtask

  task automatic idle(input int n);
    repeat (n) @(posedge clk);
  endtask

  // the next frame sent must be a response to request s
  task automatic expect_rsp(input int s, input bit we, input logic [DATA_W-1:0] d, input string tag);
    pkt_t p;
    chk(sent.size() > 0, {tag, ": a response was sent"});
    if (sent.size() == 0) return;
    p = sent.pop_front();
    chk(p.cmd.fmt == (we ? CMD_WR_RSP : CMD_RD_RSP), {tag, ": format"});
    chk(p.seq == 16'(s), $sformatf("%s: seq %0d expected %0d", tag, p.seq, s));
    chk(p.awid == 8'(s + 3), {tag, ": id"});
    chk(p.da == CN && p.sa == ME && p.etype == ETYPE_COE, {tag, ": MAC header"});
    if (!we) chk(p.data == d, {tag, ": read data"});
  endtask

  localparam logic [ADDR_W-1:0] A0 = 40'h00_0012_3440, A1 = 40'h00_0456_7800, A2 = 40'h00_0000_0040;
  pkt_t p;

  initial begin
    rx_valid = 0; rx_err = 0; rx_pkt = '0; tx_ready = 1;
    repeat (4) @(posedge clk);
    rst_n = 1;

    // 1. in order: write then read the same line, and another write
    send(0, 1, A0);
    send(1, 0, A0);
    send(2, 1, A1);
    idle(200);
    expect_rsp(0, 1, '0, "write 0");
    expect_rsp(1, 0, pat(0), "read 1");
    expect_rsp(2, 1, '0, "write 2");
    chk(u_ddr.peek(A0[MP_ADDR_W-1:0] + OFFS) == pat(0), "write 0 stored at the translated address");
    chk(u_ddr.peek(A1[MP_ADDR_W-1:0] + OFFS) == pat(2), "write 2 stored at the translated address");
    chk(sent.size() == 0, "nothing else sent");

    // 2. gap with the engine quiet: 4 before 3 gives a stand-alone SACK(4)+NAK(3)
    send(4, 0, A1, 2);
    idle(100);
    chk(sent.size() == 1, "one frame for the gap");
    if (sent.size() > 0) begin
      p = sent.pop_front();
      chk(p.cmd.fmt == CMD_SACK && p.cmd.sack && p.cmd.nak, "stand-alone SACK+NAK frame");
      chk(p.ack == 16'd3, "NAK names the missing request 3");
      chk(p.addr[15:0] == 16'd4, "SACK names request 4");
      chk(p.da == CN, "SACK addressed to the CN");
    end
    chk(cnt_sack_sent == 1 && cnt_merged == 0, "SACK counted, not merged");
    send(3, 0, A0, 2);
    idle(200);
    expect_rsp(3, 0, pat(0), "filled gap 3");
    expect_rsp(4, 0, pat(2), "held 4 after 3");
    chk(sent.size() == 0, "no extra frame after the gap");

    // 3. gap while the engine is busy: SACK(7)+NAK(6) rides on response 5
    send(5, 0, A0, 4);
    send(7, 1, A2, 4);
    idle(200);
    chk(sent.size() == 1, "only response 5 sent while 6 is missing");
    if (sent.size() > 0) begin
      p = sent[0];
      chk(p.cmd.sack && p.cmd.nak && p.ack == 16'd6 && p.addr[15:0] == 16'd7,
          "response 5 carries SACK(7)+NAK(6)");
    end
    expect_rsp(5, 0, pat(0), "merged response 5");
    chk(cnt_merged == 1 && cnt_sack_sent == 2, "merged SACK counted");
    send(6, 1, A1, 5);
    idle(200);
    expect_rsp(6, 1, '0, "filled gap 6");
    expect_rsp(7, 1, '0, "held 7 after 6");
    chk(u_ddr.peek(A1[MP_ADDR_W-1:0] + OFFS) == pat(6), "write 6 stored");
    chk(u_ddr.peek(A2[MP_ADDR_W-1:0] + OFFS) == pat(7), "write 7 stored, after 6");

    // 4. duplicate of an answered request (the CN lost response 7): the
    //    stored response is resent, the memory is not written again
    send(7, 1, A2, 6);
    idle(50);
    expect_rsp(7, 1, '0, "resent response 7");
    chk(cnt_dup_resend == 1, "duplicate counted");
    chk(u_ddr.n_wr == 4, $sformatf("duplicate not written again (writes %0d)", u_ddr.n_wr));

    // 5. CRC error: dropped, then the good copy is served
    send(8, 0, A2, 7, 1);
    idle(100);
    chk(sent.size() == 0 && cnt_crc_err == 1, "CRC-error frame dropped");
    send(8, 0, A2, 7);
    idle(100);
    expect_rsp(8, 0, pat(7), "request 8 after CRC drop");

    // 6. cumulative ACK: the CN has seen up to 8, so a duplicate of 5 finds
    //    nothing stored to resend
    send(9, 0, A2, 8);
    idle(100);
    expect_rsp(9, 0, pat(7), "request 9");
    send(5, 0, A0, 8);
    idle(50);
    chk(sent.size() == 0, "freed response not resent");
    send(10, 1, A0, 9);
    idle(100);
    expect_rsp(10, 1, '0, "request 10");

    // 7. translation fault: zero data, no memory access
    send(11, 0, 40'h80_0000_0000 | A0, 10);
    idle(100);
    expect_rsp(11, 0, '0, "faulting read returns zero");
    chk(cnt_fault == 1, "fault counted");
    chk(cnt_req == 14, $sformatf("requests counted (%0d)", cnt_req));

    // 8. back-pressure: the transmit side stalls, and a burst of requests
    //    still comes back complete and in order once it resumes
    tx_ready = 0;
    for (int i = 0; i < 5; i++) send(12 + i, 0, A0, 11);
    idle(100);
    tx_ready = 1;
    idle(600);
    for (int i = 0; i < 5; i++) expect_rsp(12 + i, 0, pat(10), "burst after stall");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
