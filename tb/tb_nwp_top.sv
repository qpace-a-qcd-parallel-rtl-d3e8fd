// tb_nwp_top -- end-to-end testbench of the network processor, at its default sizes.
//
// Two NWPs (node A = 0, node B = 1) are joined by all six torus links, each direction
// through a behavioural PHY/cable model (40 cycles of latency, optional corruption or
// loss of a packet). Link l of one node faces link l^1 of the other, as the +/- links
// of a torus dimension do. A processor model on each node writes messages and credits
// through the slave interface, takes the packets written through the master interface
// into a memory, and uses the DCR request port. The test checks that every packet
// lands at base + 128*remote offset + local offset with the right data, and counts the
// mechanisms it exercises: back-pressure of a full transmit FIFO, retransmission after
// a checksum error, retransmission after a lost packet (timeout), refusal by a full
// receive buffer, a VC overtaking another that waits for credit, arbitration between
// links for the master interface, completion notifications, DCR accesses from the
// processor and from the service processor (SPI), UART, flash SPI, MDIO, Ethernet
// nibble interface, and the global signal tree (barrier and kill). Each must happen at
// least once. It also measures the one-packet latency from the transmit FIFO to the
// receiver's write and the streaming bandwidth of one link.
`timescale 1ns/1ps
module tb_nwp_top;
  import qpace_pkg::*;
  localparam int PHY_LAT = 40;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;     // 250 MHz

  // ---------------- per-node signals ----------------
  logic                 s_valid [2], s_ready [2];
  logic [OB_ADDR_W-1:0] s_addr [2];
  logic [BEAT_W-1:0]    s_data [2];
  logic                 m_valid [2], m_ready [2], m_last [2];
  logic [ADDR_W-1:0]    m_addr [2];
  logic [BEAT_W-1:0]    m_data [2];
  logic [NUM_LINKS-1:0] notify_valid [2];
  logic [2:0]           notify_vc [2][NUM_LINKS];
  logic                 c_valid [2], c_ready [2], c_we [2], c_done [2], c_err [2];
  logic [DCR_AW-1:0]    c_addr [2];
  logic [31:0]          c_wdata [2], c_rdata [2];
  xgmii_t               xg_tx [2][NUM_LINKS], xg_rx [2][NUM_LINKS];
  logic                 mdc_t [2], mdio_t_o [2], mdio_t_oe [2];
  logic                 sp_sclk [2], sp_cs_n [2], sp_mosi [2], sp_miso [2];
  logic [1:0]           uart_txd [2], uart_rxd [2], uart_irq [2];
  logic                 fl_sck [2], fl_cs_n [2], fl_mosi [2];
  logic [1:0]           gs_up [2], gs_down [2];
  logic                 irq_kill [2];
  logic                 eth_tx_valid [2], eth_tx_ready [2], eth_rx_valid [2], eth_rx_end [2];
  logic [7:0]           eth_tx_data [2], eth_rx_data [2];
  logic [3:0]           rgmii_txd [2];
  logic                 rgmii_tx_ctl [2];
  logic                 mdc_e [2], mdio_e_o [2], mdio_e_oe [2];
  logic [31:0]          cfg_o [2];

  for (genvar n = 0; n < 2; n++) begin : g_node
    nwp_top u_nwp (
      .clk, .rst_n,
      .s_valid(s_valid[n]), .s_ready(s_ready[n]), .s_addr(s_addr[n]), .s_data(s_data[n]),
      .m_valid(m_valid[n]), .m_ready(m_ready[n]), .m_addr(m_addr[n]), .m_data(m_data[n]), .m_last(m_last[n]),
      .notify_valid(notify_valid[n]), .notify_vc(notify_vc[n]),
      .c_valid(c_valid[n]), .c_ready(c_ready[n]), .c_we(c_we[n]), .c_addr(c_addr[n]), .c_wdata(c_wdata[n]),
      .c_done(c_done[n]), .c_rdata(c_rdata[n]), .c_err(c_err[n]),
      .xg_tx(xg_tx[n]), .xg_rx(xg_rx[n]),
      .mdc_t(mdc_t[n]), .mdio_t_o(mdio_t_o[n]), .mdio_t_oe(mdio_t_oe[n]), .mdio_t_i(1'b0),
      .sp_sclk(sp_sclk[n]), .sp_cs_n(sp_cs_n[n]), .sp_mosi(sp_mosi[n]), .sp_miso(sp_miso[n]),
      .uart_txd(uart_txd[n]), .uart_rxd(uart_rxd[n]), .uart_irq(uart_irq[n]),
      .fl_sck(fl_sck[n]), .fl_cs_n(fl_cs_n[n]), .fl_mosi(fl_mosi[n]), .fl_miso(fl_mosi[n]),
      .gs_up(gs_up[n]), .gs_down(gs_down[n]), .irq_kill(irq_kill[n]),
      .eth_tx_valid(eth_tx_valid[n]), .eth_tx_data(eth_tx_data[n]), .eth_tx_ready(eth_tx_ready[n]),
      .eth_rx_valid(eth_rx_valid[n]), .eth_rx_data(eth_rx_data[n]), .eth_rx_end(eth_rx_end[n]),
      .rgmii_txd(rgmii_txd[n]), .rgmii_tx_ctl(rgmii_tx_ctl[n]),
      .rgmii_rxd(rgmii_txd[1-n]), .rgmii_rx_ctl(rgmii_tx_ctl[1-n]),
      .mdc_e(mdc_e[n]), .mdio_e_o(mdio_e_o[n]), .mdio_e_oe(mdio_e_oe[n]), .mdio_e_i(1'b0),
      .cfg_o(cfg_o[n])
    );
  end

  // UARTs crossed between the nodes
  assign uart_rxd[0] = uart_txd[1];
  assign uart_rxd[1] = uart_txd[0];

  // global signal tree: one root node over the two node cards
  logic [1:0] tree_up [2];
  logic [1:0] tree_pu;
  assign tree_up[0] = gs_up[0];
  assign tree_up[1] = gs_up[1];
  logic [1:0] tree_down;
  gsig_tree_node #(.N_CHILD(2), .IS_ROOT(1'b1)) u_root (
    .clk, .rst_n, .mask(2'b11), .child_up(tree_up), .child_down(tree_down),
    .parent_up(tree_pu), .parent_down(2'b00)
  );
  assign gs_down[0] = tree_down;
  assign gs_down[1] = tree_down;

  // torus cabling through PHY models: node n link l -> node 1-n link l^1
  logic flip_req [2][NUM_LINKS], drop_req [2][NUM_LINKS];
  int   flips [2][NUM_LINKS], drops [2][NUM_LINKS];
  for (genvar n = 0; n < 2; n++) begin : g_cab
    for (genvar l = 0; l < NUM_LINKS; l++) begin : g_l
      torus_phy_model #(.LATENCY(PHY_LAT)) u_phy (
        .clk, .din(xg_tx[n][l]), .dout(xg_rx[1-n][l ^ 1]),
        .flip_req(flip_req[n][l]), .drop_req(drop_req[n][l]),
        .flips_done(flips[n][l]), .drops_done(drops[n][l])
      );
    end
  end

  // ---------------- bookkeeping ----------------
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  longint cyc = 0;
  always @(posedge clk) cyc++;

  // ---------------- processor model: slave writes ----------------
  typedef struct { logic [OB_ADDR_W-1:0] a; logic [BEAT_W-1:0] d; } wr_t;
  wr_t wq [2][$];
  int  backpressure_cycles = 0;
  longint first_fire [2];
  for (genvar n = 0; n < 2; n++) begin : g_drv
    always @(posedge clk) if (rst_n) begin
      if (s_valid[n] && s_ready[n]) void'(wq[n].pop_front());
      if (s_valid[n] && !s_ready[n]) backpressure_cycles++;
    end
    always @(negedge clk) begin
      if (wq[n].size() > 0) begin
        s_valid[n] = 1; s_addr[n] = wq[n][0].a; s_data[n] = wq[n][0].d;
      end else begin
        s_valid[n] = 0; s_addr[n] = '0; s_data[n] = '0;
      end
    end
  end

  function automatic logic [31:0] pw(input int src, input int link, input int vc, input int roff, input int w);
    return 32'(src * 32'h1000_0000 + link * 32'h0100_0000 + vc * 32'h0010_0000 + roff * 32'h100 + w) ^ 32'h3C3C_0000;
  endfunction
  function automatic logic [BEAT_W-1:0] pbeat(input int src, input int link, input int vc, input int roff, input int b);
    return {pw(src, link, vc, roff, 4*b+3), pw(src, link, vc, roff, 4*b+2), pw(src, link, vc, roff, 4*b+1), pw(src, link, vc, roff, 4*b)};
  endfunction

  // expected arrivals
  typedef struct { int dst; logic [ADDR_W-1:0] a; int src, link, vc, roff; } exp_t;
  exp_t expect_q[$];
  logic [ADDR_W-1:0] base_of [2][NUM_LINKS][NUM_VC];

  // send npk packets from node src on link l, VC vc, remote offsets roff0..
  task automatic send_msg(input int src, input int l, input int vc, input int roff0, input int npk);
    for (int p = 0; p < npk; p++)
      for (int b = 0; b < 8; b++) begin
        wr_t w;
        w.a = {OB_REGION_TXDATA, 3'(l), 3'(vc), ROFF_W'(roff0 + p), 3'(b), 4'b0};
        w.d = pbeat(src, l, vc, roff0 + p, b);
        wq[src].push_back(w);
      end
  endtask
  // credit at node dst, link l, for packets of a message sent by the other node on l^1
  task automatic give_credit(input int dst, input int l, input int vc, input int loff, input int npk, input int roff0);
    wr_t w;
    w.a = {OB_REGION_CREDIT, 3'(l), 3'(vc), ROFF_W'(0), 3'(0), 4'b0};
    w.d = '0;
    w.d[LOFF_W-1:0] = LOFF_W'(loff);
    w.d[LOFF_W +: NPKT_W] = NPKT_W'(npk);
    wq[dst].push_back(w);
    for (int p = 0; p < npk; p++) begin
      exp_t e;
      e.dst = dst; e.src = 1 - dst; e.link = l ^ 1; e.vc = vc; e.roff = roff0 + p;
      e.a = base_of[dst][l][vc] + ADDR_W'(128 * (roff0 + p)) + ADDR_W'(loff);
      expect_q.push_back(e);
    end
  endtask

  // ---------------- processor model: master interface ----------------
  logic [BEAT_W-1:0] mem [2][logic [ADDR_W-1:0]];
  bit     stall [2];
  int     arrivals [2];
  longint last_arrival [2];
  int     notes [2][NUM_LINKS][NUM_VC];
  for (genvar n = 0; n < 2; n++) begin : g_mem
    always @(posedge clk) if (rst_n) begin
      if (m_valid[n] && m_ready[n]) begin
        mem[n][m_addr[n]] = m_data[n];
        if (m_last[n]) begin arrivals[n]++; last_arrival[n] = cyc; end
      end
      for (int l = 0; l < NUM_LINKS; l++) if (notify_valid[n][l]) notes[n][l][notify_vc[n][l]]++;
    end
    always @(negedge clk) m_ready[n] = !stall[n] && ($urandom_range(0, 7) != 0);
  end

  // ---------------- DCR access from the processor ----------------
  task automatic dcr(input int n, input bit we, input logic [9:0] a, input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    c_valid[n] = 1; c_we[n] = we; c_addr[n] = a; c_wdata[n] = wd;
    do @(posedge clk); while (!c_ready[n]);
    @(negedge clk) c_valid[n] = 0;
    while (!c_done[n]) @(posedge clk);
    rd = c_rdata[n];
    @(negedge clk);
  endtask
  function automatic logic [9:0] dreg(input logic [3:0] dev, input int r);
    return {dev, 6'(r)};
  endfunction

  // ---------------- service processor SPI master model ----------------
  task automatic sp_xfer(input int n, input bit we, input logic [9:0] a, input logic [31:0] wd, output logic [31:0] rd);
    logic [55:0] tx, rx;
    int nb;
    nb = 56;
    tx = {we, 5'b0, a, we ? wd : 32'h0, 8'h0};
    if (we) tx = {we, 5'b0, a, wd, 8'h0};
    else    tx = {we, 5'b0, a, 8'h0, 32'h0};
    rx = '0;
    sp_cs_n[n] = 0;
    repeat (8) @(negedge clk);
    for (int i = 55; i >= 0; i--) begin
      sp_mosi[n] = tx[i];
      repeat (8) @(negedge clk);
      sp_sclk[n] = 1;
      rx[i] = sp_miso[n];
      repeat (8) @(negedge clk);
      sp_sclk[n] = 0;
    end
    repeat (40) @(negedge clk);
    sp_cs_n[n] = 1;
    repeat (8) @(negedge clk);
    rd = rx[31:0];
  endtask

  // ---------------- mechanism counters ----------------
  int m_backpressure, m_crc_retx, m_timeout_retx, m_nobuf, m_overtake, m_conflict, m_notify;
  int m_dcr_cell, m_dcr_spi, m_uart, m_flash, m_mdio, m_rgmii, m_barrier, m_kill;

  initial begin
    repeat (600000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned seed_dummy;
  initial begin
    logic [31:0] rd;
    longint t0, t1, lat;
    for (int n = 0; n < 2; n++) begin
      c_valid[n] = 0; c_we[n] = 0; c_addr[n] = 0; c_wdata[n] = 0;
      sp_sclk[n] = 0; sp_cs_n[n] = 1; sp_mosi[n] = 0; stall[n] = 0;
      eth_tx_valid[n] = 0; eth_tx_data[n] = 0; arrivals[n] = 0;
      for (int l = 0; l < NUM_LINKS; l++) begin flip_req[n][l] = 0; drop_req[n][l] = 0; end
    end
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    // ---- configuration over DCR: version, then all base addresses of both nodes ----
    dcr(0, 0, dreg(DCR_DEV_CFG, 0), 0, rd);
    check(rd == 32'h0001_0000, "version register over DCR");
    for (int n = 0; n < 2; n++)
      for (int l = 0; l < NUM_LINKS; l++)
        for (int v = 0; v < NUM_VC; v++) begin
          logic [ADDR_W-1:0] b;
          b = ADDR_W'((64'(n + 1) << 38) | (64'(l) << 34) | (64'(v) << 30));
          base_of[n][l][v] = b;
          dcr(n, 1, dreg(4'(DCR_DEV_LINK0 + l), v), b[31:0], rd);
          dcr(n, 1, dreg(4'(DCR_DEV_LINK0 + l), 8 + v), 32'(b[ADDR_W-1:32]), rd);
        end
    dcr(1, 0, dreg(4'(DCR_DEV_LINK0 + 3), 8 + 5), 0, rd);
    check(rd == 32'(base_of[1][3][5][ADDR_W-1:32]), "base address read back");
    m_dcr_cell = 2 * (1 + 2 * NUM_LINKS * NUM_VC);

    // ---- 1) one packet A link0 -> B link1: latency ----
    give_credit(1, 1, 0, 'h0, 1, 0);
    while (wq[1].size() > 0) @(posedge clk);
    repeat (5) @(posedge clk);
    t0 = cyc;
    send_msg(0, 0, 0, 0, 1);
    while (arrivals[1] < 1) @(posedge clk);
    lat = last_arrival[1] - t0;
    $display("one-packet latency, slave write to last master beat: %0d cycles", lat);
    // 0.5 us at 250 MHz = 125 cycles; 40 of these are the modelled PHY/cable delay
    check(lat <= 125, $sformatf("packet latency %0d cycles within 0.5 us", lat));

    // ---- 2) stream of 64 packets A link2 -> B link3, with traffic B -> A on link 4 ----
    give_credit(1, 3, 1, 'h10000, 64, 100);
    give_credit(0, 5, 2, 'h0, 16, 0);
    while (wq[1].size() > 0) @(posedge clk);
    t0 = cyc;
    send_msg(0, 2, 1, 100, 64);
    send_msg(1, 4, 2, 0, 16);
    while (arrivals[1] < 1 + 64) @(posedge clk);
    t1 = last_arrival[1];
    begin
      real gbs;
      gbs = 64.0 * 128.0 / real'(t1 - t0) * 0.25;   // bytes per cycle times 0.25 GHz
      $display("streaming bandwidth of one link: %0.3f GB/s (%0d cycles for 64 packets)", gbs, t1 - t0);
      check(gbs > 0.80 && gbs < 0.90, "link bandwidth close to the 0.9 GB/s limit");
    end
    check(backpressure_cycles > 0, "full transmit FIFO held back the processor");

    // ---- 2b) two links into B at the same time: A link0 -> B link1, A link4 -> B link5 ----
    give_credit(1, 1, 2, 'h4000, 8, 200);
    give_credit(1, 5, 2, 'h8000, 8, 300);
    while (wq[1].size() > 0) @(posedge clk);
    stall[1] = 1;     // hold B's master interface so that both links have packets waiting
    for (int p = 0; p < 8; p++) begin
      send_msg(0, 0, 2, 200 + p, 1);
      send_msg(0, 4, 2, 300 + p, 1);
    end
    repeat (300) @(posedge clk);
    stall[1] = 0;

    // ---- 3) checksum error on A link4 -> B link5 ----
    give_credit(1, 5, 3, 'h200, 4, 10);
    while (wq[1].size() > 0) @(posedge clk);
    flip_req[0][4] = 1; @(posedge clk); flip_req[0][4] = 0;
    send_msg(0, 4, 3, 10, 4);

    // ---- 4) lost packet on B link0 -> A link1 ----
    give_credit(0, 1, 4, 'h0, 3, 20);
    while (wq[0].size() > 0) @(posedge clk);
    drop_req[1][0] = 1; @(posedge clk); drop_req[1][0] = 0;
    send_msg(1, 0, 4, 20, 3);

    // ---- 5) VC without credit overtaken: A link2 -> B link3, VC6 first, VC7 has credit ----
    send_msg(0, 2, 6, 40, 1);
    repeat (200) @(posedge clk);
    give_credit(1, 3, 7, 'h80, 1, 41);
    send_msg(0, 2, 7, 41, 1);
    repeat (300) @(posedge clk);
    give_credit(1, 3, 6, 'h100, 1, 40);

    // ---- 6) receive buffer full: B stops taking writes, A sends 12 packets on link 0 ----
    repeat (400) @(posedge clk);
    stall[1] = 1;
    give_credit(1, 1, 5, 'h0, 12, 60);
    send_msg(0, 0, 5, 60, 12);
    repeat (1500) @(posedge clk);
    stall[1] = 0;

    // wait for everything
    begin
      int total;
      total = expect_q.size();
      while (arrivals[0] + arrivals[1] < total) @(posedge clk);
    end
    repeat (100) @(posedge clk);
    begin
      int bad;
      bad = 0;
      foreach (expect_q[i]) begin
        exp_t e;
        e = expect_q[i];
        for (int b = 0; b < 8; b++) begin
          logic [ADDR_W-1:0] a;
          a = e.a + ADDR_W'(16 * b);
          if (!mem[e.dst].exists(a) || mem[e.dst][a] != pbeat(e.src, e.link, e.vc, e.roff, b)) bad++;
        end
      end
      check(bad == 0, $sformatf("all %0d packets at their destination with correct data (%0d bad beats)", expect_q.size(), bad));
      check(arrivals[0] + arrivals[1] == expect_q.size(), "no extra packet written");
    end
    // notifications: one per credit
    check(notes[1][1][0] == 1 && notes[1][3][1] == 1 && notes[1][5][3] == 1 && notes[0][1][4] == 1 &&
          notes[1][3][7] == 1 && notes[1][3][6] == 1 && notes[1][1][5] == 1 && notes[0][5][2] == 1 && notes[1][1][2] == 1 && notes[1][5][2] == 1,
          "one completion notification per credit");
    for (int n = 0; n < 2; n++) for (int l = 0; l < NUM_LINKS; l++) for (int v = 0; v < NUM_VC; v++) m_notify += notes[n][l][v];

    // link statistics over DCR
    dcr(1, 0, dreg(4'(DCR_DEV_LINK0 + 5), 18), 0, rd);
    m_crc_retx = rd[15:0];
    dcr(1, 0, dreg(4'(DCR_DEV_LINK0 + 0), 17), 0, rd);
    m_timeout_retx = rd[15:0];
    dcr(1, 0, dreg(4'(DCR_DEV_LINK0 + 1), 18), 0, rd);
    m_nobuf = rd[31:16];
    dcr(1, 0, dreg(4'(DCR_DEV_LINK0 + 3), 19), 0, rd);
    m_overtake = rd[15:0];
    m_dcr_cell += 4;
    m_conflict = g_node[1].u_nwp.u_ibw.stat_conflicts + g_node[0].u_nwp.u_ibw.stat_conflicts;
    m_backpressure = backpressure_cycles;
    check(flips[0][4] == 1 && drops[1][0] == 1, "errors were injected");

    // ---- service processor reads and writes over SPI ----
    sp_xfer(1, 1, dreg(DCR_DEV_CFG, 3), 32'hCAFE_F00D, rd);
    sp_xfer(1, 0, dreg(DCR_DEV_CFG, 3), 0, rd);
    check(rd == 32'hCAFE_F00D, $sformatf("scratch register via service-processor SPI: %h", rd));
    m_dcr_spi += 2;

    // ---- UART A -> B ----
    dcr(0, 1, dreg(DCR_DEV_UART0, 0), 32'h5A, rd);
    repeat (16000) @(posedge clk);
    check(uart_irq[1][0], "byte arrived at B's UART");
    dcr(1, 0, dreg(DCR_DEV_UART0, 0), 0, rd);
    check(rd == 32'h15A, $sformatf("UART byte %h", rd));
    if (rd == 32'h15A) m_uart++;

    // ---- flash SPI (MOSI looped to MISO) ----
    dcr(0, 1, dreg(DCR_DEV_SPI, 2), 32'h0001_0002, rd);
    dcr(0, 1, dreg(DCR_DEV_SPI, 0), 32'h9F, rd);
    repeat (80) @(posedge clk);
    dcr(0, 0, dreg(DCR_DEV_SPI, 0), 0, rd);
    check(rd == 32'h9F, "flash SPI byte looped back");
    if (rd == 32'h9F) m_flash++;

    // ---- MDIO frame to the torus PHYs ----
    dcr(0, 1, dreg(DCR_DEV_MDIO_T, 2), 32'd2, rd);
    dcr(0, 1, dreg(DCR_DEV_MDIO_T, 0), {2'b00, 2'b01, 5'd3, 5'd1, 2'b00, 16'h0001}, rd);
    repeat (400) @(posedge clk);
    dcr(0, 0, dreg(DCR_DEV_MDIO_T, 1), 0, rd);
    check(!rd[16], "MDIO frame finished");
    if (!rd[16]) m_mdio++;

    // ---- Ethernet nibble interface A -> B ----
    fork
      begin
        for (int i = 0; i < 4; i++) begin
          @(negedge clk); eth_tx_valid[0] = 1; eth_tx_data[0] = 8'(8'hA0 + i);
          @(posedge clk); while (!eth_tx_ready[0]) @(posedge clk);
        end
        @(negedge clk); eth_tx_valid[0] = 0;
      end
      begin
        int got;
        got = 0;
        while (!eth_rx_end[1]) begin
          @(posedge clk);
          if (eth_rx_valid[1]) begin
            if (eth_rx_data[1] == 8'(8'hA0 + got)) got++;
            else got = 100;
          end
        end
        check(got == 4, "four Ethernet bytes crossed the nibble interface");
        if (got == 4) m_rgmii++;
      end
    join

    // ---- global signals: barrier on both nodes, then kill from A ----
    dcr(0, 1, dreg(DCR_DEV_GSIG, 2), 1, rd);
    repeat (50) @(posedge clk);
    dcr(0, 0, dreg(DCR_DEV_GSIG, 1), 0, rd);
    check(!rd[3], "barrier waits for the other node");
    dcr(1, 1, dreg(DCR_DEV_GSIG, 2), 1, rd);
    repeat (50) @(posedge clk);
    dcr(0, 0, dreg(DCR_DEV_GSIG, 1), 0, rd);
    check(rd[3], "barrier complete on A");
    if (rd[3]) m_barrier++;
    dcr(0, 1, dreg(DCR_DEV_GSIG, 0), 2, rd);
    repeat (20) @(posedge clk);
    check(irq_kill[0] && irq_kill[1], "kill signal reached both nodes");
    if (irq_kill[1]) m_kill++;

    // ---- every mechanism happened at least once ----
    $display("mechanisms: backpressure=%0d crc_retx=%0d timeout_retx=%0d nobuf_nack=%0d overtake=%0d arb_conflict=%0d notify=%0d",
             m_backpressure, m_crc_retx, m_timeout_retx, m_nobuf, m_overtake, m_conflict, m_notify);
    $display("mechanisms: dcr_cell=%0d dcr_spi=%0d uart=%0d flash=%0d mdio=%0d rgmii=%0d barrier=%0d kill=%0d",
             m_dcr_cell, m_dcr_spi, m_uart, m_flash, m_mdio, m_rgmii, m_barrier, m_kill);
    check(m_backpressure > 0, "mechanism: back-pressure");
    check(m_crc_retx > 0, "mechanism: NACK on checksum error");
    check(m_timeout_retx > 0, "mechanism: retransmission after timeout");
    check(m_nobuf > 0, "mechanism: NACK on full receive buffer");
    check(m_overtake > 0, "mechanism: VC overtaking a VC without credit");
    check(m_conflict > 0, "mechanism: arbitration between links");
    check(m_notify > 0, "mechanism: completion notification");
    check(m_dcr_cell > 0 && m_dcr_spi > 0, "mechanism: DCR from both masters");
    check(m_uart > 0 && m_flash > 0 && m_mdio > 0 && m_rgmii > 0, "mechanism: slow interfaces");
    check(m_barrier > 0 && m_kill > 0, "mechanism: global barrier and kill");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
