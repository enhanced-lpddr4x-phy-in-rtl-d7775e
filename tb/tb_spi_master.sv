// tb_spi_master: an SPI mode-0 slave model shifts a known byte back while
// the master sends another; checks MOSI bits, the byte received, the SCLK
// period set by DIV, the busy flag and the chip-select register.
`timescale 1ns/1ps
module tb_spi_master;
  import phy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  pbus_req_t preq; pbus_rsp_t prsp;
  logic sclk, mosi, miso; logic [1:0] cs_n;
  spi_master #(.NCS(2), .DIV_RESET(4)) dut (.*);
  `include "pbus_tasks.svh"
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  // slave model: MISO changes on falling SCLK (first bit valid before the
  // first rising edge), MOSI sampled on rising SCLK
  logic [7:0] slv_tx, slv_rx; int rises; int last_rise, period;
  always @(posedge sclk) begin
    slv_rx = {slv_rx[6:0], mosi}; rises++;
    if (last_rise >= 0) period = cyc - last_rise;
    last_rise = cyc;
  end
  always @(negedge sclk) begin slv_tx = {slv_tx[6:0], 1'b0}; end
  assign miso = slv_tx[7];
  initial begin #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [31:0] d;
    preq = '0; slv_tx = 8'hC5; slv_rx = 0; rises = 0; last_rise = -1; period = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    check(cs_n == 2'b11 && sclk == 0, "idle state");
    pb_write(16'h000C, 32'h2); check(cs_n == 2'b10, "chip select 0 active");
    pb_write(16'h0008, 3);
    pb_write(16'h0000, 32'h5A);
    pb_read(16'h0004, d); check(d[0] == 1, "busy");
    do pb_read(16'h0004, d); while (d[0]);
    check(rises == 8, "eight SCLK pulses");
    check(slv_rx == 8'h5A, "slave received 0x5A");
    check(period == 6, $sformatf("SCLK period 2*DIV (%0d)", period));
    pb_read(16'h0000, d); check(d[7:0] == 8'hC5, "master received 0xC5");
    check(sclk == 0, "SCLK back to idle low");
    // second byte at another speed
    slv_tx = 8'h0F; rises = 0; last_rise = -1;
    pb_write(16'h0008, 1);
    pb_write(16'h0000, 32'hF0);
    do pb_read(16'h0004, d); while (d[0]);
    pb_read(16'h0000, d); check(d[7:0] == 8'h0F && slv_rx == 8'hF0, "second exchange");
    check(period == 2, "SCLK period at DIV 1");
    // random bytes at random speeds
    for (int k = 0; k < 16; k++) begin
      logic [7:0] mo, mi; int dv;
      mo = 8'($urandom); mi = 8'($urandom); dv = 1 + $urandom_range(4);
      slv_tx = mi; rises = 0; last_rise = -1;
      pb_write(16'h0008, 32'(dv));
      pb_write(16'h0000, 32'(mo));
      do pb_read(16'h0004, d); while (d[0]);
      pb_read(16'h0000, d);
      check(d[7:0] == mi && slv_rx == mo, $sformatf("random exchange %0d", k));
      check(rises == 8 && period == 2 * dv, $sformatf("random exchange %0d: 8 pulses of 2*DIV cycles", k));
    end
    pb_write(16'h000C, 32'h3); check(cs_n == 2'b11, "chip select released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
