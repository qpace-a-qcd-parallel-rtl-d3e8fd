// qpace_pkg -- types and constants shared by the network processor (NWP) RTL.
//
// The NWP connects one PowerXCell 8i processor to six torus-network links, Gigabit
// Ethernet and a handful of slow devices. This package fixes the formats those parts
// exchange:
//   * torus packets: a 4-byte header, a 128-byte payload and a 4-byte checksum, sent
//     as 32-bit words over a 10-Gigabit media independent interface (XGMII) at one word
//     per clock; acknowledgements are 4-byte command packets (sizes from the paper);
//   * the 128-bit write beats exchanged with the processor interface (width from the
//     paper); the address bit fields used to steer them are this design's choice;
//   * the Device Control Register (DCR) bus request/response (the paper only says the
//     bus is simple and shared; the format here is this design's choice).
// The header layout, the XGMII framing characters and the CRC-32 polynomial are choices
// of this design; the paper gives only the byte counts.
package qpace_pkg;

  // ---------------- sizes taken from the paper ----------------
  localparam int NUM_LINKS   = 6;     // six nearest neighbours in a 3-d torus
  localparam int NUM_VC      = 8;     // up to 8 sender/receiver pairs per link
  localparam int PKT_BYTES   = 128;   // payload of one packet
  localparam int XW          = 32;    // XGMII data bits per cycle
  localparam int BEAT_W      = 128;   // processor-interface data bits per beat
  localparam int PKT_WORDS   = PKT_BYTES / (XW / 8);      // 32 XGMII words
  localparam int PKT_BEATS   = PKT_BYTES / (BEAT_W / 8);  // 8 beats of 128 bit
  localparam int WORDS_PER_BEAT = BEAT_W / XW;            // 4
  localparam int TX_FIFO_BYTES  = 2048;                   // per link

  // ---------------- choices of this design ----------------
  localparam int ADDR_W   = 42;   // processor real address width
  localparam int SEQ_W    = 5;    // packet sequence number in the header
  localparam int ROFF_W   = 21;   // remote offset, in 128-byte units
  localparam int OB_ADDR_W = 36;  // address of a write into the NWP window

  typedef enum logic [1:0] {
    PT_DATA = 2'b00,
    PT_ACK  = 2'b01,
    PT_NACK = 2'b10,
    PT_RSVD = 2'b11
  } ptype_e;

  // 4-byte packet header (also the body of a command packet).
  typedef struct packed {
    ptype_e             ptype;
    logic [2:0]         vc;
    logic [SEQ_W-1:0]   seq;
    logic               rsvd;
    logic [ROFF_W-1:0]  roff;
  } hdr_t;

  // One XGMII transfer: 4 control bits (one per byte lane) and 32 data bits.
  typedef struct packed {
    logic [3:0]    ctl;
    logic [XW-1:0] d;
  } xgmii_t;

  localparam logic [7:0] XG_IDLE  = 8'h07;
  localparam logic [7:0] XG_START = 8'hFB;
  localparam logic [7:0] XG_TERM  = 8'hFD;
  localparam xgmii_t XGMII_IDLE  = '{ctl: 4'hF, d: {4{XG_IDLE}}};
  localparam xgmii_t XGMII_START = '{ctl: 4'h1, d: {24'h555555, XG_START}};
  localparam xgmii_t XGMII_TERM  = '{ctl: 4'hF, d: {{3{XG_IDLE}}, XG_TERM}};

  // Address of a write from the processor into the NWP (slave interface).
  //   [35:34] region: 0 = torus TX data, 1 = torus credit
  //   [33:31] link, [30:28] virtual channel
  //   [27:7]  remote offset in 128-byte units (data region)
  //   [6:4]   beat within the 128-byte packet
  localparam logic [1:0] OB_REGION_TXDATA = 2'd0;
  localparam logic [1:0] OB_REGION_CREDIT = 2'd1;

  // A credit, as carried in the low bits of a credit write's data beat.
  localparam int LOFF_W  = 32;   // local offset in bytes (128-byte aligned)
  localparam int NPKT_W  = 16;   // number of packets the credit covers
  typedef struct packed {
    logic [NPKT_W-1:0] npkts;
    logic [LOFF_W-1:0] loff;
  } credit_t;

  // DCR bus: the master holds a request until a slave acknowledges it for one cycle.
  localparam int DCR_AW = 10;
  typedef struct packed {
    logic              req;
    logic              we;
    logic [DCR_AW-1:0] addr;
    logic [31:0]       wdata;
  } dcr_req_t;
  typedef struct packed {
    logic        ack;
    logic [31:0] rdata;
  } dcr_rsp_t;
  // addr[9:6] selects the device, addr[5:0] the register inside it.
  localparam logic [3:0] DCR_DEV_CFG   = 4'd0;
  localparam logic [3:0] DCR_DEV_UART0 = 4'd1;
  localparam logic [3:0] DCR_DEV_UART1 = 4'd2;
  localparam logic [3:0] DCR_DEV_SPI   = 4'd3;
  localparam logic [3:0] DCR_DEV_GSIG  = 4'd4;
  localparam logic [3:0] DCR_DEV_MDIO_T = 4'd5;
  localparam logic [3:0] DCR_DEV_MDIO_E = 4'd6;
  localparam logic [3:0] DCR_DEV_LINK0 = 4'd8;   // links use 8..13

  // CRC-32, polynomial 0x04C11DB7, one 32-bit word per step, most significant bit first.
  function automatic logic [31:0] crc32_word(input logic [31:0] crc, input logic [31:0] d);
    logic [31:0] c;
    c = crc;
    for (int i = 31; i >= 0; i--) begin
      if (c[31] ^ d[i]) c = {c[30:0], 1'b0} ^ 32'h04C11DB7;
      else              c = {c[30:0], 1'b0};
    end
    return c;
  endfunction

  localparam logic [31:0] CRC_INIT = 32'hFFFF_FFFF;

endpackage
