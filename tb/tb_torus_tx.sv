// tb_torus_tx -- self-checking testbench of the torus link transmitter.
//
// Writes packets into the transmit FIFO and decodes the XGMII stream: framing, header,
// payload, CRC-32 (computed here bit-serially, independently of the design) and the
// 36-cycle packet time. Then checks go-back-N retransmission after a NACK, that a
// timeout repeats an unacknowledged packet, that the FIFO holds the writer back when
// 16 packets wait for acknowledgement, and that queued command packets are sent, on
// their own or inside a data frame.
`timescale 1ns/1ps
module tb_torus_tx;
  import qpace_pkg::*;
  localparam int TMO = 300;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic wr_valid = 0, wr_ready;
  logic [BEAT_W-1:0] wr_data = '0;
  logic [2:0] wr_beat = '0, wr_vc = '0;
  logic [ROFF_W-1:0] wr_roff = '0;
  logic cmd_valid = 0; ptype_e cmd_type = PT_ACK; logic [SEQ_W-1:0] cmd_seq = '0;
  logic ack_valid = 0; ptype_e ack_type = PT_ACK; logic [SEQ_W-1:0] ack_seq = '0;
  xgmii_t xg_tx;
  logic [15:0] s_sent, s_retx, s_tmo;
  logic busy;

  torus_tx #(.TIMEOUT(TMO)) dut (.*, .stat_sent(s_sent), .stat_retx(s_retx), .stat_timeouts(s_tmo));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // reference CRC: bit-serial division, written independently
  function automatic logic [31:0] ref_crc(input logic [31:0] words[$]);
    logic [31:0] r = 32'hFFFFFFFF;
    foreach (words[i]) for (int b = 31; b >= 0; b--) begin
      logic fb = r[31] ^ words[i][b];
      r = r << 1;
      if (fb) r = r ^ 32'h04C11DB7;
    end
    return r;
  endfunction

  function automatic logic [31:0] pword(input int pkt, input int w);
    return 32'(pkt * 1000 + w) ^ 32'hA5A50000;
  endfunction

  // ---------------- monitor: collect frames ----------------
  typedef struct { logic [31:0] w[$]; longint t_start; longint t_end; } frame_t;
  frame_t frames[$];
  frame_t cur;
  bit in_frame = 0;
  longint cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (xg_tx.ctl == 4'h1 && xg_tx.d[7:0] == XG_START) begin
        in_frame = 1; cur.w = {}; cur.t_start = cyc;
      end else if (in_frame && xg_tx.ctl[0] && xg_tx.d[7:0] == XG_TERM) begin
        in_frame = 0; cur.t_end = cyc; frames.push_back(cur);
      end else if (in_frame) begin
        if (xg_tx.ctl != 0) begin failures++; $display("FAIL: control char inside frame"); end
        cur.w.push_back(xg_tx.d);
      end
    end
  end

  function automatic bit seen(input int seq);
    foreach (frames[i]) if (frames[i].w.size() == 34 && frames[i].w[0][26:22] == 5'(seq)) return 1;
    return 0;
  endfunction

  task automatic write_pkt(input int pkt, input logic [2:0] vc, input logic [ROFF_W-1:0] roff);
    for (int b = 0; b < 8; b++) begin
      wr_valid <= 1; wr_beat <= 3'(b); wr_vc <= vc; wr_roff <= roff;
      wr_data  <= {pword(pkt, 4*b+3), pword(pkt, 4*b+2), pword(pkt, 4*b+1), pword(pkt, 4*b)};
      @(posedge clk);
      while (!wr_ready) @(posedge clk);
    end
    wr_valid <= 0;
  endtask

  // commands "received" by the local receiver: queued, one per cycle, driven at the
  // falling edge so the transmitter samples them cleanly
  typedef struct { ptype_e t; int seq; } cmd_t;
  cmd_t ackq[$];
  cmd_t cq_head;
  always @(negedge clk) begin
    if (ackq.size() > 0) begin
      cmd_t c;
      c = ackq.pop_front();
      ack_valid = 1; ack_type = c.t; ack_seq = SEQ_W'(c.seq);
    end else ack_valid = 0;
  end
  task automatic send_cmd_in(input ptype_e t, input int seq);
    cmd_t c;
    c.t = t; c.seq = seq;
    ackq.push_back(c);
    @(posedge clk);
    while (ackq.size() > 0) @(posedge clk);
  endtask

  // check a data frame
  task automatic check_data(input frame_t f, input int pkt, input int seq, input int vc, input int roff);
    hdr_t h;
    logic [31:0] cw[$];
    check(f.w.size() == 34, $sformatf("data frame has %0d words", f.w.size()));
    if (f.w.size() != 34) return;
    h = hdr_t'(f.w[0]);
    check(h.ptype == PT_DATA && h.seq == SEQ_W'(seq) && h.vc == 3'(vc) && h.roff == ROFF_W'(roff),
          $sformatf("header %h (want seq %0d vc %0d roff %0d)", f.w[0], seq, vc, roff));
    for (int i = 0; i < 32; i++)
      if (f.w[1+i] != pword(pkt, i)) begin check(0, $sformatf("payload word %0d of pkt %0d", i, pkt)); return; end
    check(1, "payload");
    for (int i = 0; i < 33; i++) cw.push_back(f.w[i]);
    check(f.w[33] == ref_crc(cw), "checksum");
    check(f.t_end - f.t_start == 35, $sformatf("frame spans %0d cycles, want 36", f.t_end - f.t_start + 1));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    foreach (frames[i]) $display("frame %0d size %0d hdr %h t %0d", i, frames[i].w.size(), frames[i].w[0], frames[i].t_start);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    // 1) three packets, sent back to back
    write_pkt(0, 3'd1, 21'h10);
    write_pkt(1, 3'd2, 21'h11);
    write_pkt(2, 3'd7, 21'h1FFFFF);
    wait (frames.size() == 3);
    check_data(frames[0], 0, 0, 1, 'h10);
    check_data(frames[1], 1, 1, 2, 'h11);
    check_data(frames[2], 2, 2, 7, 'h1FFFFF);
    check(frames[1].t_start == frames[0].t_end + 1, "back-to-back frames");
    // 2) ACK 0, NACK 1 -> packets 1 and 2 again
    send_cmd_in(PT_ACK, 0);
    send_cmd_in(PT_NACK, 1);
    wait (frames.size() == 5);
    check_data(frames[3], 1, 1, 2, 'h11);
    check_data(frames[4], 2, 2, 7, 'h1FFFFF);
    check(s_retx == 1, "one rewind counted");
    // a NACK for a packet that is not the oldest is ignored
    send_cmd_in(PT_NACK, 2);
    send_cmd_in(PT_ACK, 1);
    send_cmd_in(PT_ACK, 2);
    repeat (50) @(posedge clk);
    check(frames.size() == 5 && !busy, "stale NACK ignored, FIFO empty after ACKs");
    // 3) timeout: packet 3 not acknowledged
    write_pkt(3, 3'd0, 21'h5);
    wait (frames.size() == 7);
    check_data(frames[6], 3, 3, 0, 'h5);
    check(s_tmo == 1, "timeout counted");
    check(frames[6].t_start - frames[5].t_start >= TMO, "retransmission only after the timeout");
    send_cmd_in(PT_ACK, 3);
    // 4) command packet from the local receiver
    cmd_valid <= 1; cmd_type <= PT_NACK; cmd_seq <= 5'd9; @(posedge clk); cmd_valid <= 0;
    wait (frames.size() == 8);
    check(frames[7].w.size() == 1 && frames[7].w[0][31:30] == PT_NACK && frames[7].w[0][26:22] == 5'd9,
          "command packet NACK 9");
    check(frames[7].t_end - frames[7].t_start == 2, "command packet takes 3 cycles");
    // 5) back-pressure: 16 packets unacknowledged, the 17th is held
    for (int p = 0; p < 16; p++) write_pkt(10 + p, 3'd4, 21'(p));
    #1 check(!wr_ready, "FIFO full after 16 packets");
    fork
      write_pkt(26, 3'd4, 21'd16);
      begin
        repeat (100) @(posedge clk);
        check(!wr_ready && wr_valid, "writer held back while FIFO full");
        send_cmd_in(PT_ACK, 4);   // oldest is seq 4
      end
    join
    check(1, "17th packet accepted after an ACK");
    for (int q = 5; q < 20; q++) begin
      while (!seen(q)) @(posedge clk);
      send_cmd_in(PT_ACK, q);
    end
    // the 17th packet (sequence number 20) goes out once its turn comes
    while (!(frames[frames.size()-1].w.size() == 34 && frames[frames.size()-1].w[0][26:22] == 5'd20))
      @(posedge clk);
    check_data(frames[frames.size()-1], 26, 20, 4, 16);
    // 6) a command queued while a data packet goes out rides inside that packet's frame,
    //    between checksum and TERMINATE (one extra cycle instead of a 3-cycle frame)
    write_pkt(27, 3'd1, 21'd7);
    while (!in_frame) @(posedge clk);
    repeat (5) @(posedge clk);
    begin
      int n0;
      cmd_valid <= 1; cmd_type <= PT_ACK; cmd_seq <= 5'd17; @(posedge clk); cmd_valid <= 0;
      n0 = frames.size();
      while (frames.size() == n0) @(posedge clk);
      check(frames[n0].w.size() == 35 && frames[n0].w[34][31:30] == PT_ACK && frames[n0].w[34][26:22] == 5'd17,
            "command carried inside the data frame");
      check(frames[n0].t_end - frames[n0].t_start == 36, "data frame with command takes 37 cycles");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
