// torus_phy_model -- behavioural model of one direction of a torus link between two
// NWPs: the pair of 10-Gigabit Ethernet PHYs and the cable. It delays the XGMII word
// stream by LATENCY cycles (serialisation, 8b/10b coding and cable), and on request
// corrupts one data word (flip_req) or swallows a whole frame (drop_req) of the next
// data packet that passes, so that the link's error handling can be exercised.
`timescale 1ns/1ps
module torus_phy_model
  import qpace_pkg::*;
#(
  parameter int LATENCY = 40
) (
  input  logic   clk,
  input  xgmii_t din,
  output xgmii_t dout,
  input  logic   flip_req,    // pulse: corrupt a payload word of the next data packet
  input  logic   drop_req,    // pulse: remove the next data packet completely
  output int     flips_done,
  output int     drops_done
);
  xgmii_t pipe [LATENCY];
  bit flip_pend = 0, drop_pend = 0, dropping = 0;
  int word_no = 0;
  initial begin
    for (int i = 0; i < LATENCY; i++) pipe[i] = XGMII_IDLE;
    flips_done = 0; drops_done = 0;
  end
  assign dout = pipe[LATENCY-1];
  always @(posedge clk) begin
    xgmii_t w;
    w = din;
    if (flip_req) flip_pend = 1;
    if (drop_req) drop_pend = 1;
    if (w.ctl == 4'h1 && w.d[7:0] == XG_START) word_no = 0;
    else word_no++;
    // word 1 is the header; a data packet has ptype 00
    if (word_no == 1 && w.ctl == 4'h0 && w.d[31:30] == 2'b00 && drop_pend) begin
      dropping = 1; drop_pend = 0; drops_done++;
    end
    if (word_no == 5 && w.ctl == 4'h0 && flip_pend && !dropping) begin
      w.d[3] = ~w.d[3]; flip_pend = 0; flips_done++;
    end
    if (dropping) begin
      if (w.ctl[0] && w.d[7:0] == XG_TERM) dropping = 0;
      w = XGMII_IDLE;
    end
    for (int i = LATENCY - 1; i > 0; i--) pipe[i] = pipe[i-1];
    pipe[0] = w;
  end
endmodule
