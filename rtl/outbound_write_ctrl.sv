// outbound_write_ctrl -- steers the processor's writes into the torus links.
//
// A message is sent by a DMA put from a Synergistic Processing Element's local store
// into the NWP. The control information travels in the address of the put (see
// qpace_pkg): region, link, virtual channel, remote offset in 128-byte units and the
// beat within the packet. This controller decodes each 128-bit write beat and passes
// it, after one register stage, to
//   * the transmit FIFO of the addressed link (region 0), or
//   * the credit queue of the addressed link's receiver (region 1; the beat's low
//     48 bits hold the credit: packet count in 47:32, local byte offset in 31:0).
// A write the target cannot take is not acknowledged (s_ready low) until it can: a full
// transmit FIFO holds the processor back. Writes to a region or link that does not
// exist are acknowledged, dropped and counted in err_count.
//
// Timing: one beat per clock when the target is ready; one cycle of latency.
// From the paper: control information encoded in the put address, writes blocked when
// the FIFO is full, 128-bit data path. The address layout and the credit write are this
// design's choices.
module outbound_write_ctrl
  import qpace_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  // slave interface (writes from the processor)
  input  logic                   s_valid,
  output logic                   s_ready,
  input  logic [OB_ADDR_W-1:0]   s_addr,
  input  logic [BEAT_W-1:0]      s_data,
  // transmit FIFOs
  output logic [NUM_LINKS-1:0]   tx_valid,
  input  logic [NUM_LINKS-1:0]   tx_ready,
  output logic [BEAT_W-1:0]      tx_data,
  output logic [2:0]             tx_beat,
  output logic [2:0]             tx_vc,
  output logic [ROFF_W-1:0]      tx_roff,
  // credits
  output logic [NUM_LINKS-1:0]   cr_valid,
  input  logic [NUM_LINKS-1:0]   cr_ready,
  output logic [2:0]             cr_vc,
  output credit_t                cr_credit,
  output logic [15:0]            err_count
);
  typedef struct packed {
    logic [1:0]        region;
    logic [2:0]        link;
    logic [2:0]        vc;
    logic [ROFF_W-1:0] roff;
    logic [2:0]        beat;
    logic [3:0]        byte_off;
  } ob_addr_t;

  logic        pv;
  ob_addr_t    pa;
  logic [BEAT_W-1:0] pd;

  logic valid_target, is_tx, is_cr, target_ready, out_fire;
  assign is_tx        = (pa.region == OB_REGION_TXDATA);
  assign is_cr        = (pa.region == OB_REGION_CREDIT);
  assign valid_target = (is_tx || is_cr) && (pa.link < 3'(NUM_LINKS));
  always_comb begin
    target_ready = 1'b1;                         // dropped writes always complete
    if (valid_target) target_ready = is_tx ? tx_ready[pa.link] : cr_ready[pa.link];
  end
  assign out_fire = pv && target_ready;
  assign s_ready  = !pv || out_fire;

  always_comb begin
    tx_valid = '0;
    cr_valid = '0;
    if (pv && valid_target) begin
      if (is_tx) tx_valid[pa.link] = 1'b1;
      else       cr_valid[pa.link] = 1'b1;
    end
  end
  assign tx_data   = pd;
  assign tx_beat   = pa.beat;
  assign tx_vc     = pa.vc;
  assign tx_roff   = pa.roff;
  assign cr_vc     = pa.vc;
  assign cr_credit = credit_t'(pd[$bits(credit_t)-1:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pv <= 1'b0; pa <= '0; pd <= '0; err_count <= '0;
    end else begin
      if (out_fire && !valid_target) err_count <= err_count + 1'b1;
      if (s_ready) begin
        pv <= s_valid;
        if (s_valid) begin
          pa <= ob_addr_t'(s_addr);
          pd <= s_data;
        end
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_valid && !s_ready |=> s_valid && $stable(s_addr) && $stable(s_data));
endmodule
