// torus_link -- one complete torus-network link of the network processor.
//
// Joins a transmitter (torus_tx) and a receiver (torus_rx) for one of the six
// neighbours and gives them their registers on the DCR bus. As in the paper's data and
// control path picture, the receiver passes to the local transmitter both the ACK/NACK
// answers it must send and the ACK/NACK answers it received for our own packets.
//
// DCR registers (device number DEV, register = addr[5:0]):
//   0..7   base address of VC 0..7, bits 31:0           read/write
//   8..15  base address of VC 0..7, bits ADDR_W-1:32    read/write
//   16     {retransmissions, data packets sent}          read only
//   17     {packets received, timeouts}                  read only
//   18     {no-buffer NACKs, checksum NACKs}             read only
//   19     {16'b0, packets that overtook a waiting VC}   read only
// A DCR request is acknowledged one cycle after it is seen, with read data.
//
// From the paper: one base address per link and VC, configuration and status
// registers reached over the DCR bus. The register map is this design's choice.
module torus_link
  import qpace_pkg::*;
#(
  parameter logic [3:0] DEV        = DCR_DEV_LINK0,
  parameter int         FIFO_BYTES = TX_FIFO_BYTES,
  parameter int         RX_SLOTS   = 8,
  parameter int         TIMEOUT    = 2048
) (
  input  logic                clk,
  input  logic                rst_n,
  // transmit FIFO write port
  input  logic                wr_valid,
  output logic                wr_ready,
  input  logic [BEAT_W-1:0]   wr_data,
  input  logic [2:0]          wr_beat,
  input  logic [2:0]          wr_vc,
  input  logic [ROFF_W-1:0]   wr_roff,
  // credits
  input  logic                cr_valid,
  output logic                cr_ready,
  input  logic [2:0]          cr_vc,
  input  credit_t             cr_credit,
  // packet writes towards the processor
  output logic                o_valid,
  input  logic                o_ready,
  output logic [ADDR_W-1:0]   o_addr,
  output logic [BEAT_W-1:0]   o_data,
  output logic                o_last,
  output logic                notify_valid,
  output logic [2:0]          notify_vc,
  // XGMII
  output xgmii_t              xg_tx,
  input  xgmii_t              xg_rx,
  // DCR bus
  input  dcr_req_t            dcr_i,
  output dcr_rsp_t            dcr_o,
  output logic                busy
);
  logic             rc_valid, ra_valid;
  ptype_e           rc_type, ra_type;
  logic [SEQ_W-1:0] rc_seq, ra_seq;
  logic [15:0] s_sent, s_retx, s_tmo, s_ok, s_crc, s_nobuf, s_ovt;
  logic [ADDR_W-1:0] base [NUM_VC];

  torus_tx #(.FIFO_BYTES(FIFO_BYTES), .TIMEOUT(TIMEOUT)) u_tx (
    .clk, .rst_n,
    .wr_valid, .wr_ready, .wr_data, .wr_beat, .wr_vc, .wr_roff,
    .cmd_valid(rc_valid), .cmd_type(rc_type), .cmd_seq(rc_seq),
    .ack_valid(ra_valid), .ack_type(ra_type), .ack_seq(ra_seq),
    .xg_tx,
    .stat_sent(s_sent), .stat_retx(s_retx), .stat_timeouts(s_tmo), .busy
  );

  torus_rx #(.RX_SLOTS(RX_SLOTS)) u_rx (
    .clk, .rst_n, .xg_rx,
    .cmd_valid(rc_valid), .cmd_type(rc_type), .cmd_seq(rc_seq),
    .ack_valid(ra_valid), .ack_type(ra_type), .ack_seq(ra_seq),
    .cr_valid, .cr_ready, .cr_vc, .cr_credit,
    .base,
    .o_valid, .o_ready, .o_addr, .o_data, .o_last, .notify_valid, .notify_vc,
    .stat_rx_ok(s_ok), .stat_crc_err(s_crc), .stat_nobuf(s_nobuf), .stat_overtake(s_ovt)
  );

  // ---------------- DCR registers ----------------
  logic       sel;
  logic [5:0] ra;
  assign sel = dcr_i.req && (dcr_i.addr[9:6] == DEV);
  assign ra  = dcr_i.addr[5:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dcr_o <= '0;
      for (int v = 0; v < NUM_VC; v++) base[v] <= '0;
    end else begin
      dcr_o <= '0;
      if (sel && !dcr_o.ack) begin
        dcr_o.ack <= 1'b1;
        if (dcr_i.we) begin
          if (ra < 6'd8)       base[ra[2:0]][31:0]       <= dcr_i.wdata;
          else if (ra < 6'd16) base[ra[2:0]][ADDR_W-1:32] <= dcr_i.wdata[ADDR_W-33:0];
        end else begin
          unique case (ra) inside
            [6'd0:6'd7]:  dcr_o.rdata <= base[ra[2:0]][31:0];
            [6'd8:6'd15]: dcr_o.rdata <= 32'(base[ra[2:0]][ADDR_W-1:32]);
            6'd16:        dcr_o.rdata <= {s_retx, s_sent};
            6'd17:        dcr_o.rdata <= {s_ok, s_tmo};
            6'd18:        dcr_o.rdata <= {s_nobuf, s_crc};
            6'd19:        dcr_o.rdata <= {16'd0, s_ovt};
            default:      dcr_o.rdata <= '0;
          endcase
        end
      end
    end
  end
endmodule
