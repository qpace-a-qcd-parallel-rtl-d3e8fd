// tb_mdio_master -- self-checking testbench of the MDIO management master.
//
// A PHY model samples MDIO on rising MDC edges and, for read frames, drives the
// 16 data bits after the turnaround. Checks: reset half period, the 64-bit frame of a
// write (32 preamble ones, start, opcode, PHY and register address, turnaround, data),
// the output enable released during a read's turnaround and data, the read data, busy,
// the MDC period. Watchdog 100000 cycles.
`timescale 1ns/1ps
module tb_mdio_master;
  import qpace_pkg::*;
  localparam int WATCHDOG = 100000;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  dcr_req_t dreq;
  dcr_rsp_t drsp;
  // one DCR access: request held until the one-cycle acknowledge
  task automatic dcr(input bit we, input logic [9:0] a, input logic [31:0] wd, output logic [31:0] rd);
    int n;
    @(negedge clk);
    dreq.req = 1; dreq.we = we; dreq.addr = a; dreq.wdata = wd;
    n = 0;
    do begin @(posedge clk); #1; n++; end while (!drsp.ack && n < 100);
    rd = drsp.rdata;
    @(negedge clk);
    dreq = '0;
  endtask
  logic mdc, mdio_o, mdio_oe, mdio_i;
  mdio_master dut (.clk, .rst_n, .dcr_i(dreq), .dcr_o(drsp), .mdc, .mdio_o, .mdio_oe, .mdio_i);
  logic [63:0] frame;
  int nbits = 0, oe_low = 0;
  logic [15:0] phy_data;
  bit          rdop = 0;
  always @(posedge mdc) begin
    frame = {frame[62:0], mdio_oe ? mdio_o : mdio_i};
    if (!mdio_oe) oe_low++;
    nbits++;
  end
  // PHY drives read data after the falling edge of bits 47..62 (bit index = nbits)
  always @(negedge mdc) begin
    if (nbits == 48) rdop = (frame[13:12] == 2'b10);
    if (rdop && nbits >= 48 && nbits < 64) mdio_i = phy_data[63 - nbits];
    else if (nbits == 46) mdio_i = 0;
    else mdio_i = 1;
  end
  initial begin
    logic [31:0] rd, cmd;
    dreq = '0; mdio_i = 1; phy_data = 16'hBEEF;
    repeat (3) @(posedge clk); rst_n = 1;
    dcr(0, {DCR_DEV_MDIO_T, 6'd2}, 0, rd); check(rd == 40, "reset half period");
    dcr(1, {DCR_DEV_MDIO_T, 6'd2}, 4, rd);
    // write
    cmd = {2'b01, 2'b01, 5'd7, 5'd3, 2'b10, 16'h1234};
    nbits = 0;
    dcr(1, {DCR_DEV_MDIO_T, 6'd0}, cmd, rd);
    dcr(0, {DCR_DEV_MDIO_T, 6'd1}, 0, rd); check(rd[16], "busy");
    begin
      longint t0, t1;
      @(posedge mdc); t0 = $time; @(posedge mdc); t1 = $time;
      check(t1 - t0 == 8 * 4, "MDC period 2 half periods");
    end
    wait (nbits == 64);
    repeat (20) @(posedge clk);
    check(frame == {32'hFFFF_FFFF, cmd}, $sformatf("write frame %h", frame));
    dcr(0, {DCR_DEV_MDIO_T, 6'd1}, 0, rd); check(!rd[16], "idle after frame");
    // read
    cmd = {2'b01, 2'b10, 5'd7, 5'd2, 2'b10, 16'h0000};
    nbits = 0; oe_low = 0;
    dcr(1, {DCR_DEV_MDIO_T, 6'd0}, cmd, rd);
    wait (nbits == 64);
    repeat (20) @(posedge clk);
    check(oe_low >= 16 && oe_low <= 18, $sformatf("line released for turnaround and data (%0d bits)", oe_low));
    dcr(0, {DCR_DEV_MDIO_T, 6'd1}, 0, rd);
    check(rd[15:0] == 16'hBEEF, $sformatf("read data %h", rd[15:0]));
    check(frame[63:18] == {32'hFFFF_FFFF, cmd[31:18]} && frame[15:0] == 16'hBEEF, $sformatf("read frame header %h", frame));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
