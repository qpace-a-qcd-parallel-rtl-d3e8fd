// tb_gsig_tree_node -- self-checking testbench of one global-signal tree level.
//
// A two-level tree at the paper's size: a root node with 2 children, each a root-card
// node with 16 node cards. Random up-line patterns and partition masks are applied;
// after the pipeline delay (four register stages) every node card must see line 0 =
// AND and line 1 = OR over the node cards in the partition. Watchdog 100000 cycles.
`timescale 1ns/1ps
module tb_gsig_tree_node;
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
  logic [1:0]  leaf_up [2][16];
  logic [1:0]  leaf_down [2];
  logic [15:0] leaf_mask [2];
  logic [1:0]  mid_up [2];
  logic [1:0]  top_down;
  logic [1:0]  top_up;
  for (genvar i = 0; i < 2; i++) begin : g_rc
    gsig_tree_node #(.N_CHILD(16)) u_rc (.clk, .rst_n, .mask(leaf_mask[i]), .child_up(leaf_up[i]),
      .child_down(leaf_down[i]), .parent_up(mid_up[i]), .parent_down(top_down));
  end
  gsig_tree_node #(.N_CHILD(2), .IS_ROOT(1'b1)) u_top (.clk, .rst_n, .mask(2'b11), .child_up(mid_up),
    .child_down(top_down), .parent_up(top_up), .parent_down(2'b00));
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      logic a, o;
      bit anyin;
      @(negedge clk);
      a = 1; o = 0; anyin = 0;
      for (int i = 0; i < 2; i++) begin
        leaf_mask[i] = (t % 3 == 0) ? 16'hFFFF : 16'($urandom);
        for (int k = 0; k < 16; k++) begin
          leaf_up[i][k][0] = ($urandom_range(0, 9) != 0) || (t % 4 == 0);
          leaf_up[i][k][1] = ($urandom_range(0, 19) == 0);
          if (leaf_mask[i][k]) begin
            anyin = 1; a &= leaf_up[i][k][0]; o |= leaf_up[i][k][1];
          end
        end
      end
      repeat (4) @(posedge clk);
      #1;
      check(leaf_down[0] == {o, a} && leaf_down[1] == {o, a},
            $sformatf("pattern %0d: down %b %b, expected %b", t, leaf_down[0], leaf_down[1], {o, a}));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
