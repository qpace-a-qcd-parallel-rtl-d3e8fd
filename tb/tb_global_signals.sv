// tb_global_signals -- self-checking testbench of the node's global-signal port.
//
// Three global_signals instances (three nodes) share a model of the tree: the down
// lines are the AND of line 0 and the OR of line 1 of all nodes, after 3 cycles. Checks:
// the condition line follows software, the AND result is seen, a barrier completes only
// after the last node entered it and on all nodes, a kill from one node reaches all and
// raises their interrupt, clearing the kill flag. Watchdog 20000 cycles.
`timescale 1ns/1ps
module tb_global_signals;
  import qpace_pkg::*;
  localparam int WATCHDOG = 20000;
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
  logic [1:0] up [3];
  logic [1:0] down, d1, d2;
  logic       kill [3];
  dcr_rsp_t   rsp [3];
  assign drsp = rsp[0].ack ? rsp[0] : rsp[1].ack ? rsp[1] : rsp[2];
  for (genvar i = 0; i < 3; i++) begin : g_n
    global_signals #(.DEV(4'(4 + i))) u (.clk, .rst_n, .dcr_i(dreq), .dcr_o(rsp[i]), .gs_up(up[i]), .gs_down(down), .irq_kill(kill[i]));
  end
  always @(posedge clk or negedge rst_n) if (!rst_n) begin
    d1 <= '0; d2 <= '0; down <= '0;
  end else begin
    d1 <= {up[0][1] | up[1][1] | up[2][1], up[0][0] & up[1][0] & up[2][0]};
    d2 <= d1; down <= d2;
  end
  function automatic logic [9:0] ra(input int node, input int r);
    return {4'(4 + node), 6'(r)};
  endfunction
  initial begin
    logic [31:0] rd;
    dreq = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (5) @(posedge clk);
    check(down == 2'b00, "lines low after reset");
    dcr(1, ra(0, 0), 1, rd); dcr(1, ra(1, 0), 1, rd);
    repeat (10) @(posedge clk);
    dcr(0, ra(0, 1), 0, rd); check(rd[0] == 0, "AND low while one node low");
    dcr(1, ra(2, 0), 1, rd);
    repeat (10) @(posedge clk);
    dcr(0, ra(1, 1), 0, rd); check(rd[0] == 1, "AND high when all high");
    for (int i = 0; i < 3; i++) dcr(1, ra(i, 0), 0, rd);
    repeat (10) @(posedge clk);
    // barrier, nodes enter in random order with delays
    for (int i = 0; i < 3; i++) begin
      dcr(1, ra(i, 2), 1, rd);
      repeat ($urandom_range(5, 40)) @(posedge clk);
      if (i < 2) begin
        dcr(0, ra(0, 1), 0, rd); check(!rd[3], "barrier not done before all entered");
      end
    end
    repeat (40) @(posedge clk);
    for (int i = 0; i < 3; i++) begin
      dcr(0, ra(i, 1), 0, rd); check(rd[3], $sformatf("barrier done on node %0d", i));
    end
    check(!kill[0] && !kill[1] && !kill[2], "no kill yet");
    dcr(1, ra(1, 0), 2, rd);
    repeat (12) @(posedge clk);
    check(kill[0] && kill[1] && kill[2], "kill reached all nodes");
    dcr(1, ra(1, 0), 0, rd);
    repeat (12) @(posedge clk);
    dcr(1, ra(2, 1), 4, rd);
    dcr(0, ra(2, 1), 0, rd); check(!rd[2] && !kill[2], "kill flag cleared");
    check(kill[0], "kill flag kept on a node that did not clear it");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
