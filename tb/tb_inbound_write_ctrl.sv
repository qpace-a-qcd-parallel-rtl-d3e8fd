// tb_inbound_write_ctrl -- self-checking testbench of the inbound-write arbiter.
//
// Six link models each offer packets of eight beats (address and data tagged with
// the link and packet number) at random times; the master interface accepts at random.
// Checks: the eight beats of a packet are never interleaved with another link's, each
// link's packets arrive complete and in order, no link waits more than five packets'
// time while others are served (round-robin fairness), and the conflict counter counts.
// Watchdog 200000 cycles.
`timescale 1ns/1ps
module tb_inbound_write_ctrl;
  import qpace_pkg::*;
  localparam int WATCHDOG = 200000;
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
  localparam int N = NUM_LINKS;
  logic [N-1:0] r_valid, r_ready, r_last;
  logic [ADDR_W-1:0] r_addr [N];
  logic [BEAT_W-1:0] r_data [N];
  logic m_valid, m_ready, m_last;
  logic [ADDR_W-1:0] m_addr;
  logic [BEAT_W-1:0] m_data;
  logic [15:0] stat_conflicts;
  inbound_write_ctrl dut (.*);
  int pkt [N], beat [N], todo [N];
  int got_pkt [N];
  int cur_link = -1, cur_beat = 0;
  int wait_pk [N];
  int max_wait = 0;
  // link models: offer packet pkt[l] beat beat[l]
  for (genvar l = 0; l < N; l++) begin : g_l
    always @(negedge clk) begin
      r_valid[l] = (todo[l] > 0);
      r_addr[l]  = ADDR_W'({8'(l), 16'(pkt[l]), 3'(beat[l]), 4'b0});
      r_data[l]  = {32'(l), 32'(pkt[l]), 32'(beat[l]), 32'hABCD};
      r_last[l]  = (beat[l] == 7);
    end
    always @(posedge clk) if (rst_n && r_valid[l] && r_ready[l]) begin
      if (beat[l] == 7) begin beat[l] = 0; pkt[l]++; todo[l]--; end
      else beat[l]++;
    end
  end
  always @(negedge clk) m_ready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    int l, p, b;
    l = int'(m_data[127:96]); p = int'(m_data[95:64]); b = int'(m_data[63:32]);
    check(m_addr == ADDR_W'({8'(l), 16'(p), 3'(b), 4'b0}), "address goes with data");
    if (cur_link < 0) begin
      cur_link = l; cur_beat = 0;
      check(p == got_pkt[l], $sformatf("link %0d packet %0d in order", l, p));
      for (int k = 0; k < N; k++) if (k != l && todo[k] > 0) begin
        wait_pk[k]++;
        if (wait_pk[k] > max_wait) max_wait = wait_pk[k];
      end
      wait_pk[l] = 0;
    end
    check(l == cur_link && b == cur_beat, "beats of one packet not interleaved");
    check(m_last == (b == 7), "last beat marked");
    cur_beat++;
    if (m_last) begin cur_link = -1; got_pkt[l]++; end
  end
  initial begin
    for (int l = 0; l < N; l++) begin pkt[l] = 0; beat[l] = 0; todo[l] = 0; got_pkt[l] = 0; wait_pk[l] = 0; end
    m_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      int l;
      l = $urandom_range(0, N - 1);
      todo[l] += $urandom_range(1, 3);
      repeat ($urandom_range(0, 12)) @(posedge clk);
    end
    begin
      int left;
      do begin
        @(posedge clk);
        left = 0;
        for (int l = 0; l < N; l++) left += todo[l];
      end while (left > 0);
    end
    repeat (20) @(posedge clk);
    for (int l = 0; l < N; l++) check(got_pkt[l] == pkt[l], $sformatf("link %0d: %0d packets delivered", l, got_pkt[l]));
    check(max_wait <= N - 1, $sformatf("round-robin: longest wait %0d packets", max_wait));
    check(stat_conflicts > 0, "conflicts counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
