// spi_master -- SPI master towards the configuration flash.
//
// Moves one byte at a time in SPI mode 0 (clock idle low, data out changes after the
// falling edge, data in sampled on the rising edge, most significant bit first). The
// processor drives it over the DCR bus:
//   0  write: send the byte in bits 7:0 (ignored while busy); read: last byte received
//   1  read: {31'b0, busy}
//   2  {15'b0, cs_active (bit 16), half-period of the SPI clock in cycles (15:0)}
// The chip select follows cs_active, so a flash command of several bytes keeps it low.
// Timing: a byte takes 16 half-periods.
// From the paper: an SPI master on the DCR bus connects to the flash. Mode, register
// map and clock divider are this design's choices.
module spi_master
  import qpace_pkg::*;
#(
  parameter logic [3:0] DEV        = DCR_DEV_SPI,
  parameter int         HALF_RESET = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  dcr_req_t dcr_i,
  output dcr_rsp_t dcr_o,
  output logic     sck,
  output logic     cs_n,
  output logic     mosi,
  input  logic     miso
);
  logic [15:0] half;
  logic        cs_act, busy;
  logic [15:0] cnt;
  logic [3:0]  edges;
  logic [7:0]  sh, rx;
  logic        sel;
  logic [5:0]  ra;
  assign sel  = dcr_i.req && (dcr_i.addr[9:6] == DEV) && !dcr_o.ack;
  assign ra   = dcr_i.addr[5:0];
  assign cs_n = !cs_act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dcr_o <= '0; half <= 16'(HALF_RESET); cs_act <= 1'b0; busy <= 1'b0;
      cnt <= '0; edges <= '0; sh <= '0; rx <= '0; sck <= 1'b0; mosi <= 1'b0;
    end else begin
      dcr_o <= '0;
      if (sel) begin
        dcr_o.ack <= 1'b1;
        if (dcr_i.we) begin
          if (ra == 6'd0 && !busy) begin
            sh    <= dcr_i.wdata[7:0];
            mosi  <= dcr_i.wdata[7];
            busy  <= 1'b1;
            cnt   <= '0;
            edges <= '0;
          end
          if (ra == 6'd2) begin
            half   <= (dcr_i.wdata[15:0] == 16'd0) ? 16'd1 : dcr_i.wdata[15:0];
            cs_act <= dcr_i.wdata[16];
          end
        end else begin
          unique case (ra)
            6'd0:    dcr_o.rdata <= {24'd0, rx};
            6'd1:    dcr_o.rdata <= {31'd0, busy};
            6'd2:    dcr_o.rdata <= {15'd0, cs_act, half};
            default: dcr_o.rdata <= '0;
          endcase
        end
      end
      if (busy) begin
        if (cnt == half - 1'b1) begin
          cnt   <= '0;
          edges <= edges + 1'b1;
          sck   <= !sck;
          if (!sck) begin                      // rising edge: sample
            rx <= {rx[6:0], miso};
          end else begin                       // falling edge: next bit out
            sh   <= {sh[6:0], 1'b0};
            mosi <= sh[6];
            if (edges == 4'd15) busy <= 1'b0;
          end
        end else cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
