// tb_rgmii_adapter -- self-checking testbench of the Ethernet 4-bit interface adapter.
//
// The adapter's transmit port is looped back to its receive port. Random frames of 1
// to 40 bytes are sent with random gaps; checks that the nibbles on the wire are low
// nibble first with the control line high, that every byte comes back in order and that
// rx_end marks the end of each frame. Watchdog 200000 cycles.
`timescale 1ns/1ps
module tb_rgmii_adapter;
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
  logic       tx_valid, tx_ready, rx_valid, rx_end, ctl;
  logic [7:0] tx_data, rx_data;
  logic [3:0] txd;
  rgmii_adapter dut (.clk, .rst_n, .tx_valid, .tx_data, .tx_ready, .rgmii_txd(txd), .rgmii_tx_ctl(ctl),
    .rgmii_rxd(txd), .rgmii_rx_ctl(ctl), .rx_valid, .rx_data, .rx_end);
  logic [7:0] rxq [$];
  int ends = 0;
  always @(posedge clk) if (rst_n) begin
    if (rx_valid) rxq.push_back(rx_data);
    if (rx_end) ends++;
  end
  // wire monitor: pairs of nibbles while ctl is high
  logic [3:0] nib [$];
  always @(posedge clk) if (rst_n && ctl) nib.push_back(txd);
  initial begin
    tx_valid = 0; tx_data = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 20; f++) begin
      logic [7:0] fr [$];
      int len;
      len = $urandom_range(1, 40);
      rxq.delete(); nib.delete(); fr.delete();
      for (int i = 0; i < len; i++) fr.push_back(8'($urandom));
      foreach (fr[i]) begin
        @(negedge clk); tx_valid = 1; tx_data = fr[i];
        #1;
        while (!tx_ready) begin @(negedge clk); #1; end
        @(posedge clk);
      end
      @(negedge clk); tx_valid = 0;
      repeat ($urandom_range(6, 20)) @(posedge clk);
      check(ends == f + 1, $sformatf("frame %0d end marked", f));
      check(rxq.size() == len, $sformatf("frame %0d: %0d of %0d bytes", f, rxq.size(), len));
      check(nib.size() == 2 * len, "two nibbles per byte on the wire");
      for (int i = 0; i < len && i < rxq.size(); i++) begin
        check(rxq[i] == fr[i], $sformatf("frame %0d byte %0d", f, i));
        if (2 * i + 1 < nib.size()) check({nib[2*i+1], nib[2*i]} == fr[i], "low nibble first");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
