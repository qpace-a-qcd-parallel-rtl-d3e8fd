// rgmii_adapter -- byte stream of the Ethernet MAC to/from the 4-bit transceiver port.
//
// The Gigabit Ethernet transceiver is reached over a reduced media independent
// interface that carries 4 bits per cycle at 250 MHz in each direction. The MAC works
// on bytes, so each byte takes two cycles: low nibble first, then high nibble. The
// control line is high for both nibbles of every byte of a frame.
// Transmit: the MAC offers a byte with tx_valid (tx_ready pulses every second cycle
// while a frame is sent, when the adapter takes the byte); tx_valid low ends the frame.
// Receive: a frame starts when rx_ctl rises; every second nibble completes a byte on
// rx_data with rx_valid; rx_end pulses when rx_ctl falls.
// From the paper: the 4-bit, 250 MHz interface to the 1000BASE-T transceiver. Nibble
// order and the single clock for both nibbles are this design's choices (the MAC itself
// is a hard core of the FPGA and not part of this RTL).
module rgmii_adapter (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       tx_valid,
  input  logic [7:0] tx_data,
  output logic       tx_ready,
  output logic [3:0] rgmii_txd,
  output logic       rgmii_tx_ctl,
  input  logic [3:0] rgmii_rxd,
  input  logic       rgmii_rx_ctl,
  output logic       rx_valid,
  output logic [7:0] rx_data,
  output logic       rx_end
);
  logic       tph;       // 0: low nibble next, 1: high nibble next
  logic [3:0] thi;
  assign tx_ready = tx_valid && !tph;

  logic       rph, rctl_q;
  logic [3:0] rlo;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tph <= 1'b0; thi <= '0; rgmii_txd <= '0; rgmii_tx_ctl <= 1'b0;
      rph <= 1'b0; rctl_q <= 1'b0; rlo <= '0; rx_valid <= 1'b0; rx_data <= '0; rx_end <= 1'b0;
    end else begin
      // transmit
      if (!tph) begin
        if (tx_valid) begin
          rgmii_txd    <= tx_data[3:0];
          thi          <= tx_data[7:4];
          rgmii_tx_ctl <= 1'b1;
          tph          <= 1'b1;
        end else begin
          rgmii_txd    <= '0;
          rgmii_tx_ctl <= 1'b0;
        end
      end else begin
        rgmii_txd <= thi;
        tph       <= 1'b0;
      end
      // receive
      rctl_q   <= rgmii_rx_ctl;
      rx_valid <= 1'b0;
      rx_end   <= rctl_q && !rgmii_rx_ctl;
      if (rgmii_rx_ctl) begin
        if (!rph) begin
          rlo <= rgmii_rxd;
          rph <= 1'b1;
        end else begin
          rx_data  <= {rgmii_rxd, rlo};
          rx_valid <= 1'b1;
          rph      <= 1'b0;
        end
      end else begin
        rph <= 1'b0;
      end
    end
  end
endmodule
