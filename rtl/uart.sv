// uart -- serial link between the processor and the service processor or root card.
//
// A standard asynchronous receiver/transmitter (8 data bits, no parity, one stop bit,
// least significant bit first) with a 16-byte FIFO in each direction, programmed over
// the DCR bus. The bit time is DIV clock cycles (register 2).
//
// DCR registers (device DEV, register = addr[5:0]):
//   0  write: queue a byte for sending; read: {23'b0, valid, byte} and remove the byte
//   1  read: {28'b0, overrun, tx_full, tx_empty, rx_nonempty}; write bit 3 = 1 clears
//      the overrun flag
//   2  bit time in clock cycles (16 bits), read/write
// irq is high while received bytes wait.
// Timing: one bit per DIV cycles; a frame is 10 bit times. The receiver samples in the
// middle of each bit after detecting the start edge.
//
// From the paper: two UARTs link the processor to the service processor and to the root
// card, accessed over the DCR bus. The frame format, FIFOs, register map and the default
// bit time (115200 baud at 166 MHz) are this design's choices.
module uart
  import qpace_pkg::*;
#(
  parameter logic [3:0] DEV       = DCR_DEV_UART0,
  parameter int         DIV_RESET = 1441,
  parameter int         FIFO_DEPTH = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  dcr_req_t  dcr_i,
  output dcr_rsp_t  dcr_o,
  output logic      txd,
  input  logic      rxd,
  output logic      irq
);
  localparam int CW = $clog2(FIFO_DEPTH + 1);
  logic [15:0] div;
  logic        overrun;

  // ---------------- FIFOs ----------------
  logic       tf_wr, tf_rd, tf_full, tf_empty;
  logic [7:0] tf_q;
  logic       rf_wr, rf_rd, rf_full, rf_empty;
  logic [7:0] rf_d, rf_q;
  logic [CW-1:0] tf_cnt, rf_cnt;
  sync_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) u_tf (.clk, .rst_n, .wr_en(tf_wr), .wdata(dcr_i.wdata[7:0]),
    .rd_en(tf_rd), .rdata(tf_q), .full(tf_full), .empty(tf_empty), .count(tf_cnt));
  sync_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) u_rf (.clk, .rst_n, .wr_en(rf_wr), .wdata(rf_d),
    .rd_en(rf_rd), .rdata(rf_q), .full(rf_full), .empty(rf_empty), .count(rf_cnt));

  // ---------------- DCR ----------------
  logic       sel;
  logic [5:0] ra;
  assign sel   = dcr_i.req && (dcr_i.addr[9:6] == DEV) && !dcr_o.ack;
  assign ra    = dcr_i.addr[5:0];
  assign tf_wr = sel && dcr_i.we && ra == 6'd0 && !tf_full;
  assign rf_rd = sel && !dcr_i.we && ra == 6'd0 && !rf_empty;
  assign irq   = !rf_empty;

  // ---------------- transmitter ----------------
  logic [15:0] tcnt;
  logic [3:0]  tbit;
  logic [9:0]  tsh;
  logic        tbusy;
  assign tf_rd = !tbusy && !tf_empty;

  // ---------------- receiver ----------------
  logic [2:0]  rs;
  logic        rbusy;
  logic [15:0] rcnt;
  logic [3:0]  rbit;
  logic [7:0]  rsh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dcr_o <= '0; div <= 16'(DIV_RESET); overrun <= 1'b0;
      tcnt <= '0; tbit <= '0; tsh <= '1; tbusy <= 1'b0; txd <= 1'b1;
      rs <= '1; rbusy <= 1'b0; rcnt <= '0; rbit <= '0; rsh <= '0;
      rf_wr <= 1'b0; rf_d <= '0;
    end else begin
      // DCR
      dcr_o <= '0;
      if (sel) begin
        dcr_o.ack <= 1'b1;
        if (dcr_i.we) begin
          if (ra == 6'd1 && dcr_i.wdata[3]) overrun <= 1'b0;
          if (ra == 6'd2) div <= dcr_i.wdata[15:0];
        end else begin
          unique case (ra)
            6'd0:    dcr_o.rdata <= {23'd0, !rf_empty, rf_empty ? 8'h00 : rf_q};
            6'd1:    dcr_o.rdata <= {28'd0, overrun, tf_full, tf_empty, !rf_empty};
            6'd2:    dcr_o.rdata <= {16'd0, div};
            default: dcr_o.rdata <= '0;
          endcase
        end
      end
      // transmit
      if (tf_rd) begin
        tsh   <= {1'b1, tf_q, 1'b0};
        tbusy <= 1'b1;
        tbit  <= '0;
        tcnt  <= '0;
        txd   <= 1'b0;
      end else if (tbusy) begin
        if (tcnt == div - 1'b1) begin
          tcnt <= '0;
          if (tbit == 4'd9) begin
            tbusy <= 1'b0;
            txd   <= 1'b1;
          end else begin
            tbit <= tbit + 1'b1;
            txd  <= tsh[tbit + 1'b1];
          end
        end else tcnt <= tcnt + 1'b1;
      end
      // receive
      rs    <= {rs[1:0], rxd};
      rf_wr <= 1'b0;
      if (!rbusy) begin
        if (rs[2] && !rs[1]) begin            // start edge
          rbusy <= 1'b1;
          rcnt  <= '0;
          rbit  <= '0;
        end
      end else begin
        if (rcnt == ((rbit == 4'd0) ? (div >> 1) : div) - 1'b1) begin
          rcnt <= '0;
          rbit <= rbit + 1'b1;
          if (rbit == 4'd0) begin
            if (rs[1]) rbusy <= 1'b0;          // glitch, not a start bit
          end else if (rbit <= 4'd8) begin
            rsh <= {rs[1], rsh[7:1]};
          end else begin                       // stop bit
            rbusy <= 1'b0;
            if (rs[1]) begin
              if (rf_full) overrun <= 1'b1;
              else begin
                rf_wr <= 1'b1;
                rf_d  <= rsh;
              end
            end
          end
        end else rcnt <= rcnt + 1'b1;
      end
    end
  end
endmodule
