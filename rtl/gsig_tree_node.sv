// gsig_tree_node -- one level of the global signal tree (root card or superroot card).
//
// Each node card sends two lines up the tree and receives two lines down. A tree node
// combines the lines of its children: line 0 by AND (global condition, barrier), line 1
// by OR (kill). Children not in the partition (mask bit 0) are left out of both. The
// result goes up to the parent; at the top of the tree (IS_ROOT) it is turned round
// and sent down. Whatever comes down is sent, registered, to every child.
// Timing: one register per level on the way up and one on the way down.
// From the paper: the second tree level sits on the root card (16 node cards) and the
// higher levels on the superroot card, each in a programmable logic device. The
// AND/OR rule, the partition mask and the registers are this design's choices.
module gsig_tree_node #(
  parameter int N_CHILD = 16,
  parameter bit IS_ROOT = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_CHILD-1:0] mask,
  input  logic [1:0]       child_up [N_CHILD],
  output logic [1:0]       child_down,
  output logic [1:0]       parent_up,
  input  logic [1:0]       parent_down
);
  logic [1:0] comb_up;
  always_comb begin
    comb_up = 2'b01;
    for (int i = 0; i < N_CHILD; i++) begin
      if (mask[i]) begin
        comb_up[0] = comb_up[0] & child_up[i][0];
        comb_up[1] = comb_up[1] | child_up[i][1];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      parent_up  <= '0;
      child_down <= '0;
    end else begin
      parent_up  <= comb_up;
      child_down <= IS_ROOT ? parent_up : parent_down;
    end
  end
endmodule
