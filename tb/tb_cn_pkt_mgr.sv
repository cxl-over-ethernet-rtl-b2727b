// tb_cn_pkt_mgr: the CN packet manager with the memory node played by the
// testbench, which inspects every frame sent and answers by hand.
// Checks: request frames carry the MAC addresses, EtherType, format, id,
// address, data and consecutive sequence numbers; the acknowledgment field
// tracks the last in-order response; responses reach the cache side in request
// order with the right id and data although they arrive out of order; a lost
// response is recovered by resending the requests between the previous and the
// next response (gap rule); a SACK resends only the requests between the last
// acknowledged one and the SACKed one; a CRC-error frame is dropped; a request
// left unanswered is resent after the timeout.
`timescale 1ns/1ps
module tb_cn_pkt_mgr;
  import coe_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = !clk;

  localparam logic [47:0] ME = 48'h02_00_00_00_00_0C, MN = 48'h02_00_00_00_00_0F;
  logic req_valid, req_ready, rsp_valid, rsp_ready, tx_valid, tx_ready, rx_valid, rx_err;
  mreq_t req; mrsp_t rsp; pkt_t tx_pkt, rx_pkt;
  logic [7:0] tx_bytes;
  logic [31:0] cnt_retx, cnt_crc_err, cnt_sack, cnt_gap, cnt_timeout;

  cn_pkt_mgr #(.DEPTH(32), .TIMEOUT(300)) dut (.clk, .rst_n, .cfg_local_mac(ME), .cfg_remote_mac(MN),
    .req_valid, .req_ready, .req, .rsp_valid, .rsp_ready, .rsp, .tx_valid, .tx_ready, .tx_pkt,
    .tx_bytes, .rx_valid, .rx_err, .rx_pkt, .cnt_retx, .cnt_crc_err, .cnt_sack, .cnt_gap, .cnt_timeout);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  pkt_t sent [$];
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) sent.push_back(tx_pkt);
  mrsp_t got [$];
  always @(posedge clk) if (rst_n && rsp_valid && rsp_ready) got.push_back(rsp);

  mreq_t reqs [int];
  task automatic issue(input int n);
    mreq_t r;
    r.we = n[0]; r.id = 8'(n); r.addr = 40'(n) << 6; r.data = {16{32'(n * 7)}};
    reqs[n] = r;
    // drive in the second half of the cycle, so the handshake edge is unambiguous
    @(negedge clk);
    req_valid = 1; req = r;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic answer(input int s, input bit err = 0, input bit sack = 0, input int sack_s = 0);
    pkt_t p;
    p = '0;
    p.da = ME; p.sa = MN; p.etype = ETYPE_COE;
    p.cmd.fmt = reqs[s].we ? CMD_WR_RSP : CMD_RD_RSP;
    p.seq = 16'(s); p.awid = reqs[s].id;
    p.data = reqs[s].we ? '0 : {16{32'(s * 13)}};
    if (sack) begin p.cmd.sack = 1; p.cmd.nak = 1; p.addr = 40'(sack_s); end
    @(negedge clk);
    rx_valid = 1; rx_err = err; rx_pkt = p;
    @(negedge clk);
    rx_valid = 0; rx_err = 0;
  endtask

  task automatic sack_only(input int nak_s, input int sack_s);
    pkt_t p;
    p = '0;
    p.da = ME; p.sa = MN; p.etype = ETYPE_COE; p.cmd.fmt = CMD_SACK; p.cmd.sack = 1; p.cmd.nak = 1;
    p.ack = 16'(nak_s); p.addr = 40'(sack_s);
    @(negedge clk);
    rx_valid = 1; rx_pkt = p;
    @(negedge clk);
    rx_valid = 0;
  endtask

  function automatic string seqs(input pkt_t q[$]);
    string s = "";
    foreach (q[i]) s = {s, $sformatf("%0d ", q[i].seq)};
    return s;
  endfunction

  initial begin
    req_valid = 0; req = '0; tx_ready = 1; rsp_ready = 1; rx_valid = 0; rx_err = 0; rx_pkt = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);

    // 8 requests, fields of each frame
    for (int n = 0; n < 8; n++) issue(n);
    repeat (3) @(posedge clk);
    chk(sent.size() == 8, $sformatf("eight frames sent: %s", seqs(sent)));
    foreach (sent[i]) begin
      pkt_t p; p = sent[i];
      chk(p.da == MN && p.sa == ME && p.etype == ETYPE_COE && p.seq == 16'(i) && p.ack == 16'hFFFF &&
          p.cmd.fmt == (i % 2 ? CMD_WR_REQ : CMD_RD_REQ) && p.awid == 8'(i) && p.addr == 40'(i) << 6 &&
          p.data == (i % 2 ? {16{32'(i * 7)}} : '0), $sformatf("frame %0d fields", i));
    end
    sent = {};
    // responses 0,1 then 3 (2 lost): request 2 must be resent at once
    answer(0); answer(1); answer(3);
    repeat (5) @(posedge clk);
    chk(sent.size() == 1 && sent[0].seq == 2, $sformatf("gap rule resent: %s", seqs(sent)));
    chk(sent.size() > 0 && sent[0].ack == 16'd1, "resent frame carries ack 1");
    sent = {};
    answer(2); answer(4); answer(5); answer(6); answer(7);
    repeat (5) @(posedge clk);
    chk(got.size() == 8, $sformatf("%0d responses delivered", got.size()));
    foreach (got[i])
      chk(got[i].id == 8'(i) && got[i].we == i[0] && got[i].data == (i[0] ? '0 : {16{32'(i * 13)}}),
          $sformatf("response %0d in order", i));
    got = {};

    // SACK: requests 8..13 outstanding, MN got 8 and 11 but not 9, 10
    for (int n = 8; n < 14; n++) issue(n);
    repeat (3) @(posedge clk); sent = {};
    answer(8);
    sack_only(9, 11);
    repeat (10) @(posedge clk);
    chk(sent.size() == 2 && sent[0].seq == 9 && sent[1].seq == 10, $sformatf("SACK resent: %s", seqs(sent)));
    sent = {};
    // a response arriving with a CRC error is dropped ...
    answer(9, 1);
    repeat (3) @(posedge clk);
    chk(cnt_crc_err == 1 && got.size() == 1, "CRC-error response dropped");
    // ... and, with nothing else arriving, the timeout resends 9..13 (11 included)
    repeat (320) @(posedge clk);
    chk(cnt_timeout >= 1, "timeout fired");
    chk(sent.size() >= 5 && sent[0].seq == 9 && sent[4].seq == 13, $sformatf("timeout resent: %s", seqs(sent)));
    for (int n = 9; n < 14; n++) answer(n);
    repeat (5) @(posedge clk);
    chk(got.size() == 6, $sformatf("all responses delivered (%0d)", got.size()));
    foreach (got[i]) chk(got[i].id == 8'(8 + i), "response order after recovery");
    chk(cnt_gap == 1 && cnt_sack == 1, "gap and SACK counted");
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
