// tb_dcr_master -- self-checking testbench of the DCR bus master.
//
// A DCR slave model (64 registers of device 2, acknowledging after a random delay,
// and device 3 which never acknowledges) sits on the bus. The processor port and a
// service-processor SPI model issue random reads and writes, also at the same time.
// Checks: data written by either agent is read back by either, the bus request is held
// until acknowledged, the timeout gives c_err (processor) or 0xDEADBEEF (SPI), and
// both agents are served when they compete. Watchdog 2000000 cycles.
`timescale 1ns/1ps
module tb_dcr_master;
  import qpace_pkg::*;
  localparam int WATCHDOG = 2000000;
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
  logic c_valid, c_ready, c_we, c_done, c_err;
  logic [DCR_AW-1:0] c_addr;
  logic [31:0] c_wdata, c_rdata;
  logic sp_sclk, sp_cs_n, sp_mosi, sp_miso;
  dcr_req_t dcr_o;
  dcr_rsp_t dcr_i;
  dcr_master dut (.*);
  logic [31:0] regs [64];
  int delay = 0, both = 0;
  bit sp_active = 0, c_active = 0;
  // slave model
  always @(posedge clk) begin
    dcr_i <= '0;
    if (rst_n && dcr_o.req && !dcr_i.ack && dcr_o.addr[9:6] == 4'd2) begin
      if (delay == 0) delay = $urandom_range(1, 6);
      else if (--delay == 0) begin
        dcr_i.ack <= 1;
        if (dcr_o.we) regs[dcr_o.addr[5:0]] = dcr_o.wdata;
        else dcr_i.rdata <= regs[dcr_o.addr[5:0]];
      end
    end
    if (sp_active && c_active) both++;
  end
  task automatic cpu(input bit we, input logic [9:0] a, input logic [31:0] wd, output logic [31:0] rd, output bit err);
    c_active = 1;
    @(negedge clk);
    c_valid = 1; c_we = we; c_addr = a; c_wdata = wd;
    do @(posedge clk); while (!c_ready);
    @(negedge clk) c_valid = 0;
    while (!c_done) @(posedge clk);
    rd = c_rdata; err = c_err;
    c_active = 0;
  endtask
  task automatic sp(input bit we, input logic [9:0] a, input logic [31:0] wd, output logic [31:0] rd);
    logic [55:0] tx, rx;
    sp_active = 1;
    if (we) tx = {we, 5'b0, a, wd, 8'h0};
    else    tx = {we, 5'b0, a, 8'h0, 32'h0};
    rx = '0;
    sp_cs_n = 0;
    repeat (8) @(negedge clk);
    for (int i = 55; i >= 0; i--) begin
      sp_mosi = tx[i];
      repeat (8) @(negedge clk);
      sp_sclk = 1; rx[i] = sp_miso;
      repeat (8) @(negedge clk);
      sp_sclk = 0;
    end
    repeat (100) @(negedge clk);
    sp_cs_n = 1;
    repeat (8) @(negedge clk);
    rd = rx[31:0];
    sp_active = 0;
  endtask
  a_req_held: assert property (@(posedge clk) disable iff (!rst_n)
    dcr_o.req && !dcr_i.ack && dcr_o.addr[9:6] == 4'd2 |=> dcr_o.req && $stable(dcr_o.addr) && $stable(dcr_o.we));
  initial begin
    logic [31:0] rd, model [64];
    bit err;
    c_valid = 0; c_we = 0; c_addr = 0; c_wdata = 0;
    sp_sclk = 0; sp_cs_n = 1; sp_mosi = 0;
    for (int i = 0; i < 64; i++) begin regs[i] = 0; model[i] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    // processor alone
    for (int i = 0; i < 40; i++) begin
      int r;
      r = $urandom_range(0, 63);
      if ($urandom_range(0, 1)) begin
        model[r] = $urandom; cpu(1, {4'd2, 6'(r)}, model[r], rd, err);
        check(!err, "processor write completes");
      end else begin
        cpu(0, {4'd2, 6'(r)}, 0, rd, err);
        check(!err && rd == model[r], $sformatf("processor read reg %0d", r));
      end
    end
    // service processor alone
    for (int i = 0; i < 8; i++) begin
      int r;
      r = $urandom_range(0, 63);
      if (i % 2 == 0) begin model[r] = $urandom; sp(1, {4'd2, 6'(r)}, model[r], rd); end
      cpu(0, {4'd2, 6'(r)}, 0, rd, err);
      check(rd == model[r], "write by either agent seen by the processor");
      sp(0, {4'd2, 6'(r)}, 0, rd);
      check(rd == model[r], $sformatf("SPI read reg %0d: %h vs %h", r, rd, model[r]));
    end
    // both at once
    fork
      begin
        logic [31:0] r2;
        model[5] = 32'h5555_AAAA;
        sp(1, {4'd2, 6'd5}, model[5], r2);
        sp(0, {4'd2, 6'd5}, 0, r2);
        check(r2 == model[5], "SPI read while the processor is busy");
      end
      begin
        logic [31:0] r1;
        bit e1;
        for (int i = 0; i < 150; i++) begin
          model[6] = 32'(i) * 32'h0101_0101;
          cpu(1, {4'd2, 6'd6}, model[6], r1, e1);
          cpu(0, {4'd2, 6'd7}, 0, r1, e1);
          check(r1 == model[7] && !e1, "processor read while SPI busy");
          if (i > 100 && !sp_active) break;
        end
      end
    join
    check(both > 0, "both agents active together");
    // timeouts
    cpu(0, {4'd3, 6'd0}, 0, rd, err);
    check(err, "processor access to a silent device ends with an error");
    sp(0, {4'd3, 6'd0}, 0, rd);
    check(rd == 32'hDEAD_BEEF, $sformatf("SPI access to a silent device returns DEADBEEF: %h", rd));
    cpu(0, {4'd2, 6'd5}, 0, rd, err);
    check(!err && rd == model[5], "bus works after timeouts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
