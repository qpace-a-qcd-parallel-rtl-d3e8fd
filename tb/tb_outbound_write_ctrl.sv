// tb_outbound_write_ctrl -- self-checking testbench of the outbound-write controller.
//
// Random 128-bit writes from a processor model: packet beats for all six links, credits,
// and writes to a region or link that does not exist. Each link's FIFO and credit port
// accept at random. A scoreboard expects every valid write, in order, on exactly the
// addressed port with its data, beat, VC, remote offset or credit, and counts dropped
// writes against err_count. It also checks that s_ready is low exactly while the
// addressed port refuses. Watchdog 100000 cycles.
`timescale 1ns/1ps
module tb_outbound_write_ctrl;
  import qpace_pkg::*;
  localparam int WATCHDOG = 100000;
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
  logic s_valid, s_ready;
  logic [OB_ADDR_W-1:0] s_addr;
  logic [BEAT_W-1:0] s_data;
  logic [NUM_LINKS-1:0] tx_valid, tx_ready, cr_valid, cr_ready;
  logic [BEAT_W-1:0] tx_data;
  logic [2:0] tx_beat, tx_vc, cr_vc;
  logic [ROFF_W-1:0] tx_roff;
  credit_t cr_credit;
  logic [15:0] err_count;
  outbound_write_ctrl dut (.*);
  typedef struct { logic [OB_ADDR_W-1:0] a; logic [BEAT_W-1:0] d; } wr_t;
  wr_t wq [$], exp_q [$];
  int bad_writes = 0, seen = 0, stalls = 0;
  always @(posedge clk) if (rst_n) begin
    if (s_valid && s_ready) void'(wq.pop_front());
    if ((tx_valid & tx_ready) != 0 || (cr_valid & cr_ready) != 0) begin
      wr_t e;
      logic [1:0] reg_;
      logic [2:0] l;
      e = exp_q.pop_front();
      reg_ = e.a[35:34]; l = e.a[33:31];
      seen++;
      if (reg_ == 0) begin
        check(tx_valid == (6'b1 << l) && cr_valid == 0, "write steered to its link FIFO only");
        check(tx_data == e.d && tx_beat == e.a[6:4] && tx_vc == e.a[30:28] && tx_roff == e.a[27:7], "beat fields");
      end else begin
        check(cr_valid == (6'b1 << l) && tx_valid == 0, "credit steered to its link only");
        check(cr_vc == e.a[30:28] && cr_credit == e.d[47:0], "credit fields");
      end
    end
    if ((tx_valid & ~tx_ready) != 0 || (cr_valid & ~cr_ready) != 0) begin
      stalls++;
      check(!s_ready, "processor held back while the target refuses");
    end
  end
  always @(negedge clk) begin
    tx_ready = 6'($urandom) | 6'($urandom);
    cr_ready = 6'($urandom);
    if (wq.size() > 0) begin s_valid = 1; s_addr = wq[0].a; s_data = wq[0].d; end
    else begin s_valid = 0; s_addr = '0; s_data = '0; end
  end
  initial begin
    s_valid = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      wr_t w;
      int k;
      k = $urandom_range(0, 9);
      w.d = {$urandom, $urandom, $urandom, $urandom};
      w.a = {2'(k < 7 ? 0 : 1), 3'($urandom_range(0, 5)), 3'($urandom), 21'($urandom), 3'($urandom), 4'b0};
      if (k == 9) begin
        if ($urandom_range(0, 1)) w.a[35:34] = 2'($urandom_range(2, 3));
        else w.a[33:31] = 3'($urandom_range(6, 7));
        bad_writes++;
      end else exp_q.push_back(w);
      wq.push_back(w);
    end
    while (wq.size() > 0) @(posedge clk);
    repeat (20) @(posedge clk);
    check(exp_q.size() == 0, $sformatf("all valid writes delivered (%0d left)", exp_q.size()));
    check(err_count == 16'(bad_writes), $sformatf("dropped writes counted %0d vs %0d", err_count, bad_writes));
    check(stalls > 0, "back-pressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
