// tb_cfg_status -- self-checking testbench of the configuration/status/version registers.
//
// Drives the DCR bus directly. Checks: the version register reads the fixed value,
// the configuration register is written, read back and appears on cfg_o, the status
// input is read through, the scratch register holds data, the cycle counter advances,
// an access for another device number gets no acknowledge, and an unmapped register
// reads zero. Timing: one DCR access every few cycles, watchdog 20000 cycles.
`timescale 1ns/1ps
module tb_cfg_status;
  import qpace_pkg::*;
  localparam int WATCHDOG = 20000;
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
  logic [31:0] cfg_o, status_i;
  cfg_status dut (.clk, .rst_n, .dcr_i(dreq), .dcr_o(drsp), .cfg_o, .status_i);
  initial begin
    logic [31:0] rd, c1;
    dreq = '0; status_i = 32'h1234_5678;
    repeat (3) @(posedge clk); rst_n = 1;
    dcr(0, {DCR_DEV_CFG, 6'd0}, 0, rd);  check(rd == 32'h0001_0000, "version");
    dcr(1, {DCR_DEV_CFG, 6'd1}, 32'hA5A5_0F0F, rd);
    dcr(0, {DCR_DEV_CFG, 6'd1}, 0, rd);  check(rd == 32'hA5A5_0F0F, "config read back");
    check(cfg_o == 32'hA5A5_0F0F, "config on output");
    dcr(0, {DCR_DEV_CFG, 6'd2}, 0, rd);  check(rd == 32'h1234_5678, "status input");
    for (int i = 0; i < 20; i++) begin
      logic [31:0] v;
      v = $urandom;
      dcr(1, {DCR_DEV_CFG, 6'd3}, v, rd);
      dcr(0, {DCR_DEV_CFG, 6'd3}, 0, rd);  check(rd == v, "scratch");
    end
    dcr(0, {DCR_DEV_CFG, 6'd4}, 0, c1);
    repeat (50) @(posedge clk);
    dcr(0, {DCR_DEV_CFG, 6'd4}, 0, rd);  check(rd - c1 >= 50 && rd - c1 < 70, "cycle counter");
    dcr(0, {DCR_DEV_CFG, 6'd9}, 0, rd);  check(rd == 0, "unmapped register");
    // another device: no acknowledge
    @(negedge clk); dreq.req = 1; dreq.addr = {DCR_DEV_UART0, 6'd0};
    begin
      bit acked;
      acked = 0;
      repeat (5) begin @(posedge clk); #1; if (drsp.ack) acked = 1; end
      check(!acked, "no acknowledge for another device");
    end
    @(negedge clk); dreq = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
