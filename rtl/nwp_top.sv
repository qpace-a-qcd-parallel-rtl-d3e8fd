// nwp_top -- the QPACE network processor (NWP): the I/O fabric between one
// PowerXCell 8i processor and the machine's networks.
//
// Data path. The processor's DMA puts arrive through the slave interface as 128-bit
// write beats. The outbound-write controller decodes their address and fills the
// transmit FIFO of one of the six torus links, or queues a credit at a link's receiver.
// Each link sends its packets to the neighbouring node over a 32-bit XGMII port,
// keeps them until they are acknowledged and repeats them when they are refused. On
// the receiving side a packet waits in the link's receive buffer until its virtual
// channel has a credit; then the link asks the inbound-write controller, which grants
// one link at a time the master interface and moves the packet into the processor's
// memory (local store or main memory). The processor is notified (notify_*) when a
// credit's last packet has been written.
//
// Control path. The slow devices and all configuration/status registers hang on the
// shared DCR bus, driven by the DCR master on behalf of the processor (c_*) or the
// service processor (SPI). Devices: configuration/status/version, two UARTs (service
// processor, root card), the SPI master to the flash, the global signal tree port, two
// MDIO masters (torus PHYs, Ethernet PHY) and the six links.
//
// Outside this RTL, and brought out as ports: the processor's FlexIO link with the
// transceivers and the link-layer logic behind it (slave/master interface and the DCR
// request port stand for it), the Ethernet MAC hard core (its byte stream is the tx_*/
// rx_* port of the RGMII adapter), the Ethernet data path and the flash reader.
//
// One clock drives the whole design; the paper's NWP runs its core at 166 MHz (target
// 208 MHz) and the PHY ports at 250 MHz, with clock-domain crossings that are not
// described and not modelled here.
module nwp_top
  import qpace_pkg::*;
#(
  parameter int FIFO_BYTES = TX_FIFO_BYTES,
  parameter int RX_SLOTS   = 8,
  parameter int TIMEOUT    = 2048,
  parameter int UART_DIV   = 1441
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // slave interface: writes from the processor into the NWP
  input  logic                 s_valid,
  output logic                 s_ready,
  input  logic [OB_ADDR_W-1:0] s_addr,
  input  logic [BEAT_W-1:0]    s_data,
  // master interface: writes from the NWP into the processor
  output logic                 m_valid,
  input  logic                 m_ready,
  output logic [ADDR_W-1:0]    m_addr,
  output logic [BEAT_W-1:0]    m_data,
  output logic                 m_last,
  output logic [NUM_LINKS-1:0] notify_valid,
  output logic [2:0]           notify_vc [NUM_LINKS],
  // DCR requests from the processor
  input  logic                 c_valid,
  output logic                 c_ready,
  input  logic                 c_we,
  input  logic [DCR_AW-1:0]    c_addr,
  input  logic [31:0]          c_wdata,
  output logic                 c_done,
  output logic [31:0]          c_rdata,
  output logic                 c_err,
  // torus PHYs
  output xgmii_t               xg_tx [NUM_LINKS],
  input  xgmii_t               xg_rx [NUM_LINKS],
  output logic                 mdc_t,
  output logic                 mdio_t_o,
  output logic                 mdio_t_oe,
  input  logic                 mdio_t_i,
  // service processor SPI
  input  logic                 sp_sclk,
  input  logic                 sp_cs_n,
  input  logic                 sp_mosi,
  output logic                 sp_miso,
  // UARTs: 0 = service processor, 1 = root card
  output logic [1:0]           uart_txd,
  input  logic [1:0]           uart_rxd,
  output logic [1:0]           uart_irq,
  // flash
  output logic                 fl_sck,
  output logic                 fl_cs_n,
  output logic                 fl_mosi,
  input  logic                 fl_miso,
  // global signal tree
  output logic [1:0]           gs_up,
  input  logic [1:0]           gs_down,
  output logic                 irq_kill,
  // Ethernet: MAC byte stream and transceiver
  input  logic                 eth_tx_valid,
  input  logic [7:0]           eth_tx_data,
  output logic                 eth_tx_ready,
  output logic                 eth_rx_valid,
  output logic [7:0]           eth_rx_data,
  output logic                 eth_rx_end,
  output logic [3:0]           rgmii_txd,
  output logic                 rgmii_tx_ctl,
  input  logic [3:0]           rgmii_rxd,
  input  logic                 rgmii_rx_ctl,
  output logic                 mdc_e,
  output logic                 mdio_e_o,
  output logic                 mdio_e_oe,
  input  logic                 mdio_e_i,
  // configuration word
  output logic [31:0]          cfg_o
);
  // ---------------- outbound: processor -> links ----------------
  logic [NUM_LINKS-1:0] tx_valid, tx_ready, cr_valid, cr_ready;
  logic [BEAT_W-1:0]    tx_data;
  logic [2:0]           tx_beat, tx_vc, cr_vc;
  logic [ROFF_W-1:0]    tx_roff;
  credit_t              cr_credit;
  logic [15:0]          ob_err;

  outbound_write_ctrl u_obw (
    .clk, .rst_n, .s_valid, .s_ready, .s_addr, .s_data,
    .tx_valid, .tx_ready, .tx_data, .tx_beat, .tx_vc, .tx_roff,
    .cr_valid, .cr_ready, .cr_vc, .cr_credit, .err_count(ob_err)
  );

  // ---------------- DCR bus ----------------
  localparam int NSLV = NUM_LINKS + 7;
  dcr_req_t dcr;
  dcr_rsp_t rsp [NSLV];
  dcr_rsp_t rsp_or;
  always_comb begin
    rsp_or = '0;
    for (int i = 0; i < NSLV; i++) rsp_or = rsp_or | rsp[i];
  end

  dcr_master u_dcrm (
    .clk, .rst_n, .c_valid, .c_ready, .c_we, .c_addr, .c_wdata, .c_done, .c_rdata, .c_err,
    .sp_sclk, .sp_cs_n, .sp_mosi, .sp_miso, .dcr_o(dcr), .dcr_i(rsp_or)
  );

  // ---------------- torus links ----------------
  logic [NUM_LINKS-1:0] r_valid, r_ready, r_last, link_busy;
  logic [ADDR_W-1:0]    r_addr [NUM_LINKS];
  logic [BEAT_W-1:0]    r_data [NUM_LINKS];

  for (genvar l = 0; l < NUM_LINKS; l++) begin : g_link
    torus_link #(.DEV(4'(DCR_DEV_LINK0 + l)), .FIFO_BYTES(FIFO_BYTES), .RX_SLOTS(RX_SLOTS),
                 .TIMEOUT(TIMEOUT)) u_link (
      .clk, .rst_n,
      .wr_valid(tx_valid[l]), .wr_ready(tx_ready[l]), .wr_data(tx_data), .wr_beat(tx_beat),
      .wr_vc(tx_vc), .wr_roff(tx_roff),
      .cr_valid(cr_valid[l]), .cr_ready(cr_ready[l]), .cr_vc(cr_vc), .cr_credit(cr_credit),
      .o_valid(r_valid[l]), .o_ready(r_ready[l]), .o_addr(r_addr[l]), .o_data(r_data[l]),
      .o_last(r_last[l]), .notify_valid(notify_valid[l]), .notify_vc(notify_vc[l]),
      .xg_tx(xg_tx[l]), .xg_rx(xg_rx[l]),
      .dcr_i(dcr), .dcr_o(rsp[7 + l]), .busy(link_busy[l])
    );
  end

  // ---------------- inbound: links -> processor ----------------
  logic [15:0] ib_conflicts;
  inbound_write_ctrl #(.N(NUM_LINKS)) u_ibw (
    .clk, .rst_n, .r_valid, .r_ready, .r_addr, .r_data, .r_last,
    .m_valid, .m_ready, .m_addr, .m_data, .m_last, .stat_conflicts(ib_conflicts)
  );

  // ---------------- slow devices ----------------
  cfg_status #(.DEV(DCR_DEV_CFG)) u_cfg (
    .clk, .rst_n, .dcr_i(dcr), .dcr_o(rsp[0]), .cfg_o,
    .status_i({ob_err, ib_conflicts[9:0], link_busy})
  );
  uart #(.DEV(DCR_DEV_UART0), .DIV_RESET(UART_DIV)) u_uart0 (
    .clk, .rst_n, .dcr_i(dcr), .dcr_o(rsp[1]), .txd(uart_txd[0]), .rxd(uart_rxd[0]), .irq(uart_irq[0])
  );
  uart #(.DEV(DCR_DEV_UART1), .DIV_RESET(UART_DIV)) u_uart1 (
    .clk, .rst_n, .dcr_i(dcr), .dcr_o(rsp[2]), .txd(uart_txd[1]), .rxd(uart_rxd[1]), .irq(uart_irq[1])
  );
  spi_master #(.DEV(DCR_DEV_SPI)) u_spi (
    .clk, .rst_n, .dcr_i(dcr), .dcr_o(rsp[3]), .sck(fl_sck), .cs_n(fl_cs_n), .mosi(fl_mosi), .miso(fl_miso)
  );
  global_signals #(.DEV(DCR_DEV_GSIG)) u_gsig (
    .clk, .rst_n, .dcr_i(dcr), .dcr_o(rsp[4]), .gs_up, .gs_down, .irq_kill
  );
  mdio_master #(.DEV(DCR_DEV_MDIO_T)) u_mdio_t (
    .clk, .rst_n, .dcr_i(dcr), .dcr_o(rsp[5]), .mdc(mdc_t), .mdio_o(mdio_t_o), .mdio_oe(mdio_t_oe), .mdio_i(mdio_t_i)
  );
  mdio_master #(.DEV(DCR_DEV_MDIO_E)) u_mdio_e (
    .clk, .rst_n, .dcr_i(dcr), .dcr_o(rsp[6]), .mdc(mdc_e), .mdio_o(mdio_e_o), .mdio_oe(mdio_e_oe), .mdio_i(mdio_e_i)
  );
  rgmii_adapter u_rgmii (
    .clk, .rst_n,
    .tx_valid(eth_tx_valid), .tx_data(eth_tx_data), .tx_ready(eth_tx_ready),
    .rgmii_txd, .rgmii_tx_ctl, .rgmii_rxd, .rgmii_rx_ctl,
    .rx_valid(eth_rx_valid), .rx_data(eth_rx_data), .rx_end(eth_rx_end)
  );

  a_one_dcr_ack: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({rsp[0].ack, rsp[1].ack, rsp[2].ack, rsp[3].ack, rsp[4].ack, rsp[5].ack, rsp[6].ack,
              rsp[7].ack, rsp[8].ack, rsp[9].ack, rsp[10].ack, rsp[11].ack, rsp[12].ack}));
endmodule
