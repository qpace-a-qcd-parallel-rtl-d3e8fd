// tb_spi_master -- self-checking testbench of the SPI master to the configuration flash.
//
// A flash model (SPI mode 0 slave) shifts in what the master sends and returns
// previously chosen bytes. Checks: reset clock divisor, a byte exchange in both
// directions, busy during the transfer, chip select held across bytes when asked,
// released otherwise, the SCK half period. Watchdog 50000 cycles.
`timescale 1ns/1ps
module tb_spi_master;
  import qpace_pkg::*;
  localparam int WATCHDOG = 50000;
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
  logic sck, cs_n, mosi, miso;
  spi_master dut (.clk, .rst_n, .dcr_i(dreq), .dcr_o(drsp), .sck, .cs_n, .mosi, .miso);
  // flash model: mode 0, shift out on falling edge (first bit when selected)
  logic [7:0] f_in, f_out;
  int         f_bits = 0;
  always @(negedge cs_n) miso = f_out[7];
  always @(posedge sck) begin f_in = {f_in[6:0], mosi}; f_bits++; end
  always @(negedge sck) begin f_out = {f_out[6:0], 1'b0}; miso = f_out[7]; end
  initial begin
    logic [31:0] rd;
    dreq = '0; f_out = 8'hC3; miso = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    dcr(0, {DCR_DEV_SPI, 6'd2}, 0, rd); check(rd == 4, "reset half period");
    for (int i = 0; i < 6; i++) begin
      logic [7:0] b, r;
      longint t0, t1;
      b = 8'($urandom); r = 8'($urandom);
      f_out = r; f_bits = 0;
      dcr(1, {DCR_DEV_SPI, 6'd2}, (i % 2) ? 32'h0001_0003 : 32'h0000_0003, rd);
      dcr(1, {DCR_DEV_SPI, 6'd0}, 32'(b), rd);
      miso = f_out[7];
      dcr(0, {DCR_DEV_SPI, 6'd1}, 0, rd); check(rd[0], "busy during transfer");
      @(posedge sck); t0 = $time; @(posedge sck); t1 = $time;
      check(t1 - t0 == 2 * 3 * 4, "SCK period = 2 half periods");
      repeat (100) @(posedge clk);
      dcr(0, {DCR_DEV_SPI, 6'd1}, 0, rd); check(!rd[0], "idle after transfer");
      check(f_bits == 8 && f_in == b, $sformatf("flash got %h, expected %h", f_in, b));
      dcr(0, {DCR_DEV_SPI, 6'd0}, 0, rd); check(rd[7:0] == r, $sformatf("master got %h, expected %h", rd[7:0], r));
      check(cs_n == !(i % 2), "chip select held only when asked");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
