// global_signals -- the NWP's port to the global signal tree network.
//
// The global signal network is a simple tree with two signals in each direction. This
// design gives the two up-going lines and the two down-going lines these meanings:
//   line 0  condition: the tree forms the AND of all nodes' line 0 and sends it back
//           down. It serves to evaluate a global condition and, with the four-phase
//           protocol below, as a barrier to synchronise the nodes.
//   line 1  kill: the tree forms the OR of all nodes' line 1 and sends it back down;
//           a node that sees it raised gets an interrupt (irq_kill).
// Barrier: software writes register 2; the block raises line 0, waits until the tree
// reports all nodes raised it (down line 0 high), lowers line 0, waits until the tree
// reports it low again and then sets barrier_done. While no barrier runs, line 0
// follows the condition bit written by software.
//
// DCR registers (device DEV): 0 {kill_req, cond} read/write; 1 read {28'b0,
// barrier_done, kill_seen, down[1:0]}, write bit 2 = 1 clears kill_seen; 2 write: start
// a barrier (clears barrier_done).
// The down-going lines pass a two-flop synchroniser.
//
// From the paper: a two-wire tree used for global conditions, synchronisation and an
// interrupting kill signal, a 4-bit interface (two lines per direction). The meaning of
// each line, the AND/OR rule and the barrier protocol are this design's choices.
module global_signals
  import qpace_pkg::*;
#(
  parameter logic [3:0] DEV = DCR_DEV_GSIG
) (
  input  logic       clk,
  input  logic       rst_n,
  input  dcr_req_t   dcr_i,
  output dcr_rsp_t   dcr_o,
  output logic [1:0] gs_up,
  input  logic [1:0] gs_down,
  output logic       irq_kill
);
  typedef enum logic [1:0] {B_IDLE, B_RAISE, B_LOWER} bstate_e;
  bstate_e    bs;
  logic [1:0] ctrl;
  logic [1:0] d1, d2;
  logic       kill_seen, done;
  logic       sel;
  logic [5:0] ra;
  assign sel      = dcr_i.req && (dcr_i.addr[9:6] == DEV) && !dcr_o.ack;
  assign ra       = dcr_i.addr[5:0];
  assign irq_kill = kill_seen;

  always_comb begin
    gs_up[1] = ctrl[1];
    unique case (bs)
      B_RAISE: gs_up[0] = 1'b1;
      B_LOWER: gs_up[0] = 1'b0;
      default: gs_up[0] = ctrl[0];
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dcr_o <= '0; bs <= B_IDLE; ctrl <= '0; d1 <= '0; d2 <= '0;
      kill_seen <= 1'b0; done <= 1'b0;
    end else begin
      d1 <= gs_down;
      d2 <= d1;
      if (d2[1]) kill_seen <= 1'b1;
      unique case (bs)
        B_RAISE: if (d2[0])  bs <= B_LOWER;
        B_LOWER: if (!d2[0]) begin bs <= B_IDLE; done <= 1'b1; end
        default: ;
      endcase
      dcr_o <= '0;
      if (sel) begin
        dcr_o.ack <= 1'b1;
        if (dcr_i.we) begin
          if (ra == 6'd0) ctrl <= dcr_i.wdata[1:0];
          if (ra == 6'd1 && dcr_i.wdata[2]) kill_seen <= 1'b0;
          if (ra == 6'd2 && bs == B_IDLE) begin bs <= B_RAISE; done <= 1'b0; end
        end else begin
          unique case (ra)
            6'd0:    dcr_o.rdata <= {30'd0, ctrl};
            6'd1:    dcr_o.rdata <= {28'd0, done, kill_seen, d2};
            default: dcr_o.rdata <= '0;
          endcase
        end
      end
    end
  end
endmodule
