// tb_uart -- self-checking testbench of the UART.
//
// Two UART instances with crossed lines; a small divisor (8 cycles per bit) keeps the
// test short. Checks: the divisor register, bytes sent one way arrive in order with
// the valid flag, the interrupt follows the receive FIFO, the status bits, an overrun
// when more than 16 bytes arrive unread, and clearing of the overrun flag. The bit time
// on the line is measured against the divisor. Watchdog 200000 cycles.
`timescale 1ns/1ps
module tb_uart;
  import qpace_pkg::*;
  localparam int WATCHDOG = 200000;
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
  logic txd_a, txd_b, irq_a, irq_b;
  dcr_rsp_t rsp_a, rsp_b;
  assign drsp = rsp_a.ack ? rsp_a : rsp_b;
  uart #(.DEV(DCR_DEV_UART0)) ua (.clk, .rst_n, .dcr_i(dreq), .dcr_o(rsp_a), .txd(txd_a), .rxd(txd_b), .irq(irq_a));
  uart #(.DEV(DCR_DEV_UART1)) ub (.clk, .rst_n, .dcr_i(dreq), .dcr_o(rsp_b), .txd(txd_b), .rxd(txd_a), .irq(irq_b));
  initial begin
    logic [31:0] rd;
    logic [7:0] sent [$];
    longint t0, t1;
    dreq = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    dcr(0, {DCR_DEV_UART0, 6'd2}, 0, rd); check(rd == 1441, "reset divisor 1441");
    dcr(1, {DCR_DEV_UART0, 6'd2}, 8, rd);
    dcr(1, {DCR_DEV_UART1, 6'd2}, 8, rd);
    dcr(0, {DCR_DEV_UART1, 6'd1}, 0, rd); check(rd[3:0] == 4'b0010, "status idle: tx empty");
    check(!irq_b, "no interrupt when empty");
    for (int i = 0; i < 5; i++) begin
      logic [7:0] b;
      b = 8'($urandom);
      sent.push_back(b);
      dcr(1, {DCR_DEV_UART0, 6'd0}, 32'(b), rd);
    end
    // bit time: falling start edge to next edge of the first byte
    wait (txd_a == 0); t0 = $time;
    repeat (2000) @(posedge clk);
    check(irq_b, "interrupt with data");
    for (int i = 0; i < 5; i++) begin
      dcr(0, {DCR_DEV_UART1, 6'd0}, 0, rd);
      check(rd[8] && rd[7:0] == sent[i], $sformatf("byte %0d: %h", i, rd));
    end
    dcr(0, {DCR_DEV_UART1, 6'd0}, 0, rd); check(!rd[8], "empty after reading");
    check(!irq_b, "interrupt cleared");
    // bit time measurement: send 0x00 -> start + 8 zero bits = 9 bit times low
    dcr(1, {DCR_DEV_UART1, 6'd0}, 0, rd);
    wait (txd_b == 0); t0 = $time;
    wait (txd_b == 1); t1 = $time;
    check((t1 - t0) == 9 * 8 * 4, $sformatf("9 bit times of 8 cycles: %0d ns", t1 - t0));
    repeat (200) @(posedge clk);
    dcr(0, {DCR_DEV_UART0, 6'd0}, 0, rd); check(rd == 32'h100, "zero byte received");
    // overrun: 18 bytes unread
    for (int i = 0; i < 18; i++) begin
      dcr(1, {DCR_DEV_UART0, 6'd0}, 32'(i), rd);
      if (i == 14) repeat (2000) @(posedge clk);
    end
    repeat (3000) @(posedge clk);
    dcr(0, {DCR_DEV_UART1, 6'd1}, 0, rd); check(rd[3], "overrun flagged");
    dcr(1, {DCR_DEV_UART1, 6'd1}, 8, rd);
    dcr(0, {DCR_DEV_UART1, 6'd1}, 0, rd); check(!rd[3], "overrun cleared");
    for (int i = 0; i < 16; i++) begin
      dcr(0, {DCR_DEV_UART1, 6'd0}, 0, rd);
      check(rd == 32'h100 + i, $sformatf("FIFO byte %0d kept: %h", i, rd));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
