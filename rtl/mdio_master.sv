// mdio_master -- management interface master for the transceivers (PHYs).
//
// Sends one management frame at a time on MDC/MDIO, as defined for Ethernet PHYs:
//   32 preamble ones, ST (2), OP (2), PHY address (5), register/device address (5),
//   turnaround (2), data (16)  =  64 bits.
// Software gives ST and OP, so both the clause-22 (ST = 01) and clause-45 (ST = 00)
// frames of 10-Gigabit PHYs can be sent. For a read (OP[1] = 1) the master releases
// MDIO from the turnaround on and samples the 16 data bits. MDIO changes after the
// falling edge of MDC and is sampled on the rising edge.
// DCR registers (device DEV): 0 write {st[31:30], op[29:28], phy[27:23], reg[22:18],
// 2'b0, data[15:0]} starts a frame (ignored while busy); 1 read {15'b0, busy, rdata};
// 2 half-period of MDC in clock cycles.
// Used, for example, to select the primary or the redundant serial interface of a
// torus PHY, with which the machine is repartitioned.
// From the paper: MDIO lines to the torus transceivers and to the Ethernet transceiver.
// Everything else follows the Ethernet management-frame convention and is this
// design's choice.
module mdio_master
  import qpace_pkg::*;
#(
  parameter logic [3:0] DEV        = DCR_DEV_MDIO_T,
  parameter int         HALF_RESET = 40
) (
  input  logic     clk,
  input  logic     rst_n,
  input  dcr_req_t dcr_i,
  output dcr_rsp_t dcr_o,
  output logic     mdc,
  output logic     mdio_o,
  output logic     mdio_oe,
  input  logic     mdio_i
);
  logic [15:0] half, cnt;
  logic        busy, rd;
  logic [6:0]  bitn;          // bit being driven, 0..63
  logic [63:0] frame;
  logic [15:0] rdata;
  logic        sel;
  logic [5:0]  ra;
  assign sel = dcr_i.req && (dcr_i.addr[9:6] == DEV) && !dcr_o.ack;
  assign ra  = dcr_i.addr[5:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dcr_o <= '0; half <= 16'(HALF_RESET); cnt <= '0; busy <= 1'b0; rd <= 1'b0;
      bitn <= '0; frame <= '0; rdata <= '0; mdc <= 1'b0; mdio_o <= 1'b1; mdio_oe <= 1'b0;
    end else begin
      dcr_o <= '0;
      if (sel) begin
        dcr_o.ack <= 1'b1;
        if (dcr_i.we) begin
          if (ra == 6'd0 && !busy) begin
            frame   <= {32'hFFFF_FFFF, dcr_i.wdata[31:18], 2'b10, dcr_i.wdata[15:0]};
            rd      <= dcr_i.wdata[29];
            busy    <= 1'b1;
            bitn    <= '0;
            cnt     <= '0;
            mdc     <= 1'b0;
            mdio_o  <= 1'b1;
            mdio_oe <= 1'b1;
          end
          if (ra == 6'd2) half <= (dcr_i.wdata[15:0] == 16'd0) ? 16'd1 : dcr_i.wdata[15:0];
        end else begin
          unique case (ra)
            6'd1:    dcr_o.rdata <= {15'd0, busy, rdata};
            6'd2:    dcr_o.rdata <= {16'd0, half};
            default: dcr_o.rdata <= '0;
          endcase
        end
      end
      if (busy) begin
        if (cnt == half - 1'b1) begin
          cnt <= '0;
          mdc <= !mdc;
          if (!mdc) begin                         // rising edge: sample
            if (rd && bitn >= 7'd48) rdata <= {rdata[14:0], mdio_i};
          end else begin                          // falling edge: next bit
            if (bitn == 7'd63) begin
              busy    <= 1'b0;
              mdio_oe <= 1'b0;
            end else begin
              bitn    <= bitn + 1'b1;
              mdio_o  <= frame[6'd62 - bitn[5:0]];
              mdio_oe <= !(rd && bitn + 1'b1 >= 7'd46);
            end
          end
        end else cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
