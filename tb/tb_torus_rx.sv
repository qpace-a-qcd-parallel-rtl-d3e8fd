// tb_torus_rx -- self-checking testbench of the torus link receiver.
//
// Builds XGMII frames itself (with a bit-serial CRC-32 of its own), feeds them to the
// receiver and checks: ACK for good packets, NACK for a bad checksum, silence for a
// packet out of sequence, NACK when the receive buffer is full, delivery of the payload
// to base + 128*remote offset + local offset, the completion notification, that a VC
// without credit is overtaken by one with credit, and the hand-over of received
// command packets.
`timescale 1ns/1ps
module tb_torus_rx;
  import qpace_pkg::*;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  xgmii_t xg_rx = XGMII_IDLE;
  logic cmd_valid, ack_valid; ptype_e cmd_type, ack_type; logic [SEQ_W-1:0] cmd_seq, ack_seq;
  logic cr_valid = 0, cr_ready; logic [2:0] cr_vc = 0; credit_t cr_credit = '0;
  logic [ADDR_W-1:0] base [NUM_VC];
  logic o_valid, o_ready = 1, o_last; logic [ADDR_W-1:0] o_addr; logic [BEAT_W-1:0] o_data;
  logic notify_valid; logic [2:0] notify_vc;
  logic [15:0] s_ok, s_crc, s_nobuf, s_ovt;

  torus_rx dut (.*, .stat_rx_ok(s_ok), .stat_crc_err(s_crc), .stat_nobuf(s_nobuf), .stat_overtake(s_ovt));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [31:0] ref_crc(input logic [31:0] words[$]);
    logic [31:0] r;
    r = 32'hFFFFFFFF;
    foreach (words[i]) for (int b = 31; b >= 0; b--) begin
      logic fb;
      fb = r[31] ^ words[i][b];
      r = r << 1;
      if (fb) r = r ^ 32'h04C11DB7;
    end
    return r;
  endfunction
  function automatic logic [31:0] pword(input int pkt, input int w);
    return 32'(pkt * 7919 + w * 31) ^ 32'h5A5A1234;
  endfunction

  // ---------------- monitors ----------------
  typedef struct { ptype_e t; int seq; } cmd_t;
  cmd_t cmds[$], rcvd[$];
  typedef struct { logic [ADDR_W-1:0] a; logic [BEAT_W-1:0] d; logic last; } beat_t;
  beat_t beats[$];
  int notes[$];
  always @(posedge clk) if (rst_n) begin
    cmd_t c; beat_t b;
    if (cmd_valid) begin c.t = cmd_type; c.seq = cmd_seq; cmds.push_back(c); end
    if (ack_valid) begin c.t = ack_type; c.seq = ack_seq; rcvd.push_back(c); end
    if (o_valid && o_ready) begin b.a = o_addr; b.d = o_data; b.last = o_last; beats.push_back(b); end
    if (notify_valid) notes.push_back(notify_vc);
  end

  // ---------------- stimulus (driven on the falling edge) ----------------
  task automatic put(input xgmii_t w);
    @(negedge clk); xg_rx = w;
  endtask
  task automatic send_pkt(input int pkt, input int vc, input int seq, input int roff, input bit corrupt, input int pig = -1);
    logic [31:0] ws[$];
    hdr_t h;
    h = '0; h.ptype = PT_DATA; h.vc = 3'(vc); h.seq = SEQ_W'(seq); h.roff = ROFF_W'(roff);
    ws.push_back(h);
    for (int i = 0; i < 32; i++) ws.push_back(pword(pkt, i));
    put(XGMII_START);
    foreach (ws[i]) put('{ctl: 4'h0, d: ws[i]});
    put('{ctl: 4'h0, d: ref_crc(ws) ^ (corrupt ? 32'h1 : 32'h0)});
    if (pig >= 0) begin                         // ACK carried inside the data frame
      hdr_t c;
      c = '0; c.ptype = PT_ACK; c.seq = SEQ_W'(pig);
      put('{ctl: 4'h0, d: c});
    end
    put(XGMII_TERM);
    put(XGMII_IDLE);
  endtask
  task automatic send_cmd(input ptype_e t, input int seq);
    hdr_t h;
    h = '0; h.ptype = t; h.seq = SEQ_W'(seq);
    put(XGMII_START); put('{ctl: 4'h0, d: h}); put(XGMII_TERM); put(XGMII_IDLE);
  endtask
  task automatic credit(input int vc, input int loff, input int n);
    @(negedge clk); cr_valid = 1; cr_vc = 3'(vc); cr_credit.loff = LOFF_W'(loff); cr_credit.npkts = NPKT_W'(n);
    @(negedge clk); cr_valid = 0;
  endtask
  task automatic wait_cycles(input int n); repeat (n) @(posedge clk); endtask

  // check that the next 8 beats carry packet pkt at address a
  task automatic check_delivery(input int pkt, input logic [ADDR_W-1:0] a, input string what);
    bit ok;
    ok = (beats.size() >= 8);
    for (int b = 0; ok && b < 8; b++) begin
      beat_t x;
      x = beats[b];
      if (x.a != a + ADDR_W'(16 * b)) ok = 0;
      if (x.d != {pword(pkt, 4*b+3), pword(pkt, 4*b+2), pword(pkt, 4*b+1), pword(pkt, 4*b)}) ok = 0;
      if (x.last != (b == 7)) ok = 0;
    end
    check(ok, what);
    if (beats.size() >= 8) repeat (8) void'(beats.pop_front());
  endtask
  function automatic bit last_cmd(input ptype_e t, input int seq);
    if (cmds.size() == 0) return 0;
    return cmds[cmds.size()-1].t == t && cmds[cmds.size()-1].seq == seq;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < NUM_VC; v++) base[v] = ADDR_W'(64'h100_0000_0000 + v * 64'h1000_0000);
    wait_cycles(4); rst_n = 1; wait_cycles(2);
    // 1) two packets on VC1 under one credit of two packets
    credit(1, 'h4000, 2);
    send_pkt(100, 1, 0, 3, 0);
    wait_cycles(3);
    check(last_cmd(PT_ACK, 0) && cmds.size() == 1, "ACK 0");
    wait_cycles(12);
    check_delivery(100, base[1] + 3 * 128 + 'h4000, "packet 0 delivered to base+roff+loff");
    check(notes.size() == 0, "no notification before the credit is used up");
    send_pkt(101, 1, 1, 4, 0);
    wait_cycles(15);
    check(last_cmd(PT_ACK, 1), "ACK 1");
    check_delivery(101, base[1] + 4 * 128 + 'h4000, "packet 1 delivered");
    check(notes.size() == 1 && notes[0] == 1, "notification for VC1");
    // 2) bad checksum -> NACK, out-of-sequence -> dropped, then the good copy
    credit(2, 0, 3);
    send_pkt(102, 2, 2, 0, 1);
    wait_cycles(3);
    check(last_cmd(PT_NACK, 2) && s_crc == 1, "NACK 2 on bad checksum");
    send_pkt(103, 2, 3, 1, 0);
    wait_cycles(3);
    check(cmds.size() == 3 && beats.size() == 0, "packet 3 after refused packet 2: dropped, no answer");
    send_pkt(102, 2, 2, 0, 0);
    send_pkt(103, 2, 3, 1, 0);
    wait_cycles(15);
    check(cmds.size() == 5 && last_cmd(PT_ACK, 3), "ACK 2 and 3 after repetition");
    check_delivery(102, base[2] + 0, "packet 2 delivered");
    check_delivery(103, base[2] + 128, "packet 3 delivered");
    // 3) VC4 has no credit: VC5 overtakes it
    send_pkt(104, 4, 4, 0, 0);
    credit(5, 'h80, 1);
    send_pkt(105, 5, 5, 2, 0);
    wait_cycles(15);
    check_delivery(105, base[5] + 256 + 'h80, "VC5 packet overtakes waiting VC4 packet");
    check(s_ovt == 1, "overtake counted");
    check(beats.size() == 0, "VC4 packet waits for its credit");
    credit(4, 'h100, 1);
    wait_cycles(15);
    check_delivery(104, base[4] + 'h100, "VC4 packet delivered after its credit");
    // 4) buffer full: interface stalled, 8 slots fill, the 9th packet is refused
    o_ready = 0;
    credit(6, 0, 4); credit(6, 'h1000, 4); credit(7, 0, 4);
    for (int i = 0; i < 8; i++) send_pkt(110 + i, (i < 4) ? 6 : 7, 6 + i, i, 0);
    wait_cycles(2);
    check(last_cmd(PT_ACK, 13), "8 packets accepted");
    send_pkt(118, 7, 14, 8, 0);
    wait_cycles(3);
    check(last_cmd(PT_NACK, 14) && s_nobuf == 1, "9th packet refused: buffer full");
    @(negedge clk); o_ready = 1;
    wait_cycles(100);
    check(beats.size() == 64, $sformatf("8 packets delivered after the stall (%0d beats)", beats.size()));
    send_pkt(118, 7, 14, 8, 0);
    wait_cycles(15);
    check(last_cmd(PT_ACK, 14), "9th packet accepted on repetition");
    // 5) received command packets go to the local transmitter
    send_cmd(PT_ACK, 7);
    send_cmd(PT_NACK, 9);
    wait_cycles(3);
    check(rcvd.size() == 2 && rcvd[0].t == PT_ACK && rcvd[0].seq == 7 && rcvd[1].t == PT_NACK && rcvd[1].seq == 9,
          "command packets handed over");
    // 6) a command word carried between checksum and TERMINATE of a data packet
    credit(2, 'h400, 1);
    send_pkt(119, 2, 15, 9, 0, 21);
    wait_cycles(3);
    check(rcvd.size() == 3 && rcvd[2].t == PT_ACK && rcvd[2].seq == 21, "piggy-backed command handed over");
    check(last_cmd(PT_ACK, 15), "packet with a piggy-backed command accepted");
    check(s_ok == 16, $sformatf("packets accepted %0d", s_ok));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
