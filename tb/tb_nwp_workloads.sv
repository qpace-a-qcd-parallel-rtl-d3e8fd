// tb_nwp_workloads -- the two network benchmarks of the machine, run on two NWPs.
//
// The set-up is the one of tb_nwp_top: two network processors at their default sizes,
// joined by all six torus links through a PHY/cable model of 40 cycles of delay, with a
// processor model on each side that writes messages and credits and takes the packets
// written into its memory.
//   * Ping-pong: node A sends a 128-byte message (one packet) to node B; when B's
//     processor is notified that it has arrived it sends the same data back. The
//     latency is the round-trip time seen by A divided by two, averaged over 20 rounds.
//     Checked against 0.5 us at 250 MHz, the time the machine needs from the transmit
//     FIFO to the receiver's DMA, which is the part this RTL covers.
//   * Exchange: A and B send messages to each other at the same time over one link
//     pair, with four messages in flight per direction on four virtual channels, for
//     message sizes of 1, 4, 16 and 64 packets. The bandwidth per direction is printed
//     for each size. With traffic in both directions every 36-cycle data packet also
//     carries the ACK for the other direction (one more word), so the limit of this
//     design is 128/37 bytes per cycle = 0.865 GB/s; the largest size is checked to
//     reach 0.85 GB/s. The machine's theoretical limit is 0.9 GB/s.
// Every packet's data and destination address are checked. Watchdog 2,000,000 cycles.
`timescale 1ns/1ps
module tb_nwp_workloads;
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
  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // wait until node n has been notified k times on link l, VC v
  task automatic wait_note(input int n, input int l, input int v, input int k);
    while (notes[n][l][v] < k) @(posedge clk);
  endtask

  task automatic check_all();
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
    check(bad == 0, $sformatf("%0d packets at their destination with correct data (%0d bad beats)", expect_q.size(), bad));
  endtask

  initial begin
    logic [31:0] rd;
    longint t0, tsum;
    for (int n = 0; n < 2; n++) begin
      c_valid[n] = 0; c_we[n] = 0; c_addr[n] = 0; c_wdata[n] = 0;
      sp_sclk[n] = 0; sp_cs_n[n] = 1; sp_mosi[n] = 0; stall[n] = 0;
      eth_tx_valid[n] = 0; eth_tx_data[n] = 0; arrivals[n] = 0;
      for (int l = 0; l < NUM_LINKS; l++) begin
        flip_req[n][l] = 0; drop_req[n][l] = 0;
        for (int v = 0; v < NUM_VC; v++) notes[n][l][v] = 0;
      end
    end
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    for (int n = 0; n < 2; n++)
      for (int l = 0; l < NUM_LINKS; l++)
        for (int v = 0; v < NUM_VC; v++) begin
          logic [ADDR_W-1:0] b;
          b = ADDR_W'((64'(n + 1) << 38) | (64'(l) << 34) | (64'(v) << 30));
          base_of[n][l][v] = b;
          dcr(n, 1, dreg(4'(DCR_DEV_LINK0 + l), v), b[31:0], rd);
          dcr(n, 1, dreg(4'(DCR_DEV_LINK0 + l), 8 + v), 32'(b[ADDR_W-1:32]), rd);
        end

    // ---------------- ping-pong, 128 bytes ----------------
    // A link 0 faces B link 1. One credit per round on each side.
    tsum = 0;
    for (int r = 0; r < 20; r++) begin
      give_credit(1, 1, 0, 128 * r, 1, r);
      give_credit(0, 0, 0, 128 * r, 1, r);
      while (wq[0].size() > 0 || wq[1].size() > 0) @(posedge clk);
      repeat (20) @(posedge clk);
      t0 = cyc;
      send_msg(0, 0, 0, r, 1);
      wait_note(1, 1, 0, r + 1);
      send_msg(1, 1, 0, r, 1);          // B returns the packet
      wait_note(0, 0, 0, r + 1);
      tsum += cyc - t0;
    end
    begin
      real half;
      half = real'(tsum) / 20.0 / 2.0;
      $display("ping-pong 128 B: round trip / 2 = %0.1f cycles = %0.3f us at 250 MHz", half, half / 250.0);
      check(half <= 125.0, "one-way latency within 0.5 us");
    end
    check_all();

    // ---------------- exchange, 4 messages in flight per direction ----------------
    // A link 2 <-> B link 3, VCs 1..4, both directions at once
    begin
      int sizes [4] = '{1, 4, 16, 64};
      int round;
      round = 0;
      foreach (sizes[si]) begin
        int np;
        longint ta, tb_, tstart;
        real bw_ab, bw_ba;
        np = sizes[si];
        for (int v = 1; v <= 4; v++) begin
          give_credit(1, 3, v, 'h100000 * si, np, 1000 * si + 100 * v);
          give_credit(0, 2, v, 'h100000 * si, np, 1000 * si + 100 * v);
        end
        while (wq[0].size() > 0 || wq[1].size() > 0) @(posedge clk);
        repeat (20) @(posedge clk);
        tstart = cyc;
        // messages interleaved packet by packet, as four concurrent senders would write them
        for (int p = 0; p < np; p++)
          for (int v = 1; v <= 4; v++) begin
            send_msg(0, 2, v, 1000 * si + 100 * v + p, 1);
            send_msg(1, 3, v, 1000 * si + 100 * v + p, 1);
          end
        fork
          begin for (int v = 1; v <= 4; v++) wait_note(1, 3, v, si + 1); ta = cyc; end
          begin for (int v = 1; v <= 4; v++) wait_note(0, 2, v, si + 1); tb_ = cyc; end
        join
        bw_ab = 4.0 * np * 128.0 / real'(ta - tstart) * 0.25;
        bw_ba = 4.0 * np * 128.0 / real'(tb_ - tstart) * 0.25;
        $display("exchange, 4 x %0d packets per direction: A->B %0.3f GB/s, B->A %0.3f GB/s", np, bw_ab, bw_ba);
        if (np == 64) check(bw_ab > 0.85 && bw_ba > 0.85, "exchange bandwidth close to the 0.865 GB/s limit");
        if (np == 1)  check(bw_ab < bw_ba + 0.2 && bw_ba < bw_ab + 0.2, "both directions alike");
      end
    end
    check_all();
    check(arrivals[0] + arrivals[1] == expect_q.size(), "no extra packet written");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
