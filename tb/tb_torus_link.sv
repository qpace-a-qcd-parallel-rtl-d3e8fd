// tb_torus_link -- self-checking testbench of one complete torus link (transmitter,
// receiver and registers).
//
// Two links, A and B, are cabled back to back with 12 cycles of delay each way and a
// reduced FIFO (4 packets) and timeout so that the test is short. Both directions carry
// random messages at the same time, so data and ACK/NACK command packets share each
// cable. Base addresses are set over DCR. Checks: every packet arrives once, in order
// per VC, at base + 128*roff + loff with its data; one notification per credit; the
// status registers count the packets sent and received; base registers read back.
// Watchdog 400000 cycles.
`timescale 1ns/1ps
module tb_torus_link;
  import qpace_pkg::*;
  localparam int WATCHDOG = 400000;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  dcr_req_t dreq;
  dcr_rsp_t drsp;
  // one DCR access: request held until the one-cycle acknowledge
  task automatic dcr(input bit we, input logic [9:0] a, input logic [31:0] wd, output logic [31:0] rd);
    int n;
    @(negedge clk);
    dreq.req = 1; dreq.we = we; dreq.addr = a; dreq.wdata = wd;
    n = 0;
    do begin @(posedge clk); #1; n++; end while (!drsp.ack && n < 100);
    rd = drsp.rdata;
    @(negedge clk);
    dreq = '0;
  endtask
  logic wr_valid [2], wr_ready [2], cr_valid [2], cr_ready [2];
  logic [BEAT_W-1:0] wr_data [2];
  logic [2:0] wr_beat [2], wr_vc [2], cr_vc [2];
  logic [ROFF_W-1:0] wr_roff [2];
  credit_t cr_credit [2];
  logic o_valid [2], o_ready [2], o_last [2], notify_valid [2], busy [2];
  logic [ADDR_W-1:0] o_addr [2];
  logic [BEAT_W-1:0] o_data [2];
  logic [2:0] notify_vc [2];
  xgmii_t xg_tx [2], xg_rx [2];
  xgmii_t pipe [2][12];
  dcr_rsp_t rsp [2];
  assign drsp = rsp[0].ack ? rsp[0] : rsp[1];
  for (genvar n = 0; n < 2; n++) begin : g_n
    torus_link #(.DEV(4'(8 + n)), .FIFO_BYTES(512), .TIMEOUT(400)) u (
      .clk, .rst_n,
      .wr_valid(wr_valid[n]), .wr_ready(wr_ready[n]), .wr_data(wr_data[n]), .wr_beat(wr_beat[n]),
      .wr_vc(wr_vc[n]), .wr_roff(wr_roff[n]),
      .cr_valid(cr_valid[n]), .cr_ready(cr_ready[n]), .cr_vc(cr_vc[n]), .cr_credit(cr_credit[n]),
      .o_valid(o_valid[n]), .o_ready(o_ready[n]), .o_addr(o_addr[n]), .o_data(o_data[n]), .o_last(o_last[n]),
      .notify_valid(notify_valid[n]), .notify_vc(notify_vc[n]),
      .xg_tx(xg_tx[n]), .xg_rx(xg_rx[n]), .dcr_i(dreq), .dcr_o(rsp[n]), .busy(busy[n]));
    always @(posedge clk) begin
      pipe[n][0] <= xg_tx[n];
      for (int i = 1; i < 12; i++) pipe[n][i] <= pipe[n][i-1];
    end
    assign xg_rx[1-n] = pipe[n][11];
    always @(negedge clk) o_ready[n] = ($urandom_range(0, 3) != 0);
  end
  // expected arrivals per receiving node, in order per VC
  typedef struct { logic [ADDR_W-1:0] a; logic [BEAT_W-1:0] d; } beat_t;
  beat_t expq [2][NUM_VC][$];
  int notes [2], beats_ok [2], beats_bad [2], pk_sent [2];
  for (genvar n = 0; n < 2; n++) begin : g_mon
    int cur_vc = -1;
    always @(posedge clk) if (rst_n) begin
      if (notify_valid[n]) notes[n]++;
      if (o_valid[n] && o_ready[n]) begin
        beat_t e;
        int v;
        v = int'(o_data[n][127:124]);
        if (expq[n][v].size() > 0) begin
          e = expq[n][v].pop_front();
          if (e.a == o_addr[n] && e.d == o_data[n]) beats_ok[n]++;
          else begin beats_bad[n]++; $display("bad beat node %0d vc %0d: %h %h exp %h %h", n, v, o_addr[n], o_data[n], e.a, e.d); end
        end else beats_bad[n]++;
      end
    end
  end
  logic [ADDR_W-1:0] base [2][NUM_VC];
  // sender n: a message of npk packets on VC v, credit at receiver 1-n
  task automatic message(input int n, input int v, input int npk, input int roff0, input int loff);
    @(negedge clk);
    cr_valid[1-n] = 1; cr_vc[1-n] = 3'(v); cr_credit[1-n] = '{npkts: NPKT_W'(npk), loff: LOFF_W'(loff)};
    @(posedge clk); while (!cr_ready[1-n]) @(posedge clk);
    @(negedge clk); cr_valid[1-n] = 0;
    for (int p = 0; p < npk; p++) begin
      for (int b = 0; b < 8; b++) begin
        beat_t e;
        e.d = {4'(v), 28'(n), 32'(roff0 + p), 32'(b), $urandom};
        e.a = base[1-n][v] + ADDR_W'(128 * (roff0 + p)) + ADDR_W'(loff) + ADDR_W'(16 * b);
        expq[1-n][v].push_back(e);
        wr_valid[n] = 1; wr_data[n] = e.d; wr_beat[n] = 3'(b); wr_vc[n] = 3'(v); wr_roff[n] = ROFF_W'(roff0 + p);
        #1;
        while (!wr_ready[n]) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      pk_sent[n]++;
    end
    wr_valid[n] = 0;
  endtask
  initial begin
    logic [31:0] rd;
    dreq = '0;
    for (int n = 0; n < 2; n++) begin
      wr_valid[n] = 0; cr_valid[n] = 0; wr_data[n] = 0; wr_beat[n] = 0; wr_vc[n] = 0; wr_roff[n] = 0;
      cr_vc[n] = 0; cr_credit[n] = '0; notes[n] = 0; beats_ok[n] = 0; beats_bad[n] = 0; pk_sent[n] = 0;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 2; n++)
      for (int v = 0; v < NUM_VC; v++) begin
        base[n][v] = ADDR_W'({$urandom, $urandom}) & ~ADDR_W'(32'hFFFF_FFFF);
        base[n][v][31:20] = 12'($urandom);
        dcr(1, {4'(8 + n), 6'(v)}, base[n][v][31:0], rd);
        dcr(1, {4'(8 + n), 6'(8 + v)}, 32'(base[n][v][ADDR_W-1:32]), rd);
      end
    dcr(0, {4'd9, 6'd3}, 0, rd);   check(rd == base[1][3][31:0], "base low read back");
    dcr(0, {4'd9, 6'd11}, 0, rd);  check(rd == 32'(base[1][3][ADDR_W-1:32]), "base high read back");
    fork
      for (int m = 0; m < 10; m++) message(0, $urandom_range(0, 7), $urandom_range(1, 9), $urandom_range(0, 1000), 16 * $urandom_range(0, 100));
      for (int m = 0; m < 10; m++) message(1, $urandom_range(0, 7), $urandom_range(1, 9), $urandom_range(0, 1000), 16 * $urandom_range(0, 100));
    join
    while (busy[0] || busy[1]) @(posedge clk);
    repeat (100) @(posedge clk);
    for (int n = 0; n < 2; n++) begin
      int left;
      left = 0;
      for (int v = 0; v < NUM_VC; v++) left += expq[n][v].size();
      check(left == 0 && beats_bad[n] == 0, $sformatf("node %0d: all beats at their address (%0d left, %0d bad)", n, left, beats_bad[n]));
      check(notes[n] == 10, $sformatf("node %0d: one notification per message (%0d)", n, notes[n]));
      dcr(0, {4'(8 + n), 6'd16}, 0, rd);
      check(rd[15:0] == 16'(pk_sent[n]) && rd[31:16] == 0, $sformatf("node %0d: sent count %0d, no retransmission", n, rd[15:0]));
      dcr(0, {4'(8 + n), 6'd17}, 0, rd);
      check(rd[31:16] == 16'(pk_sent[1-n]), $sformatf("node %0d: received count %0d", n, rd[31:16]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
