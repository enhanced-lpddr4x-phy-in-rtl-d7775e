// tb_uart: checks the transmitter bit by bit against the 8N1 frame at the
// programmed divider, feeds frames into the receiver from an independent
// serial model (including a byte that overruns an unread one and a frame
// with a bad stop bit), and checks the register contents.
`timescale 1ns/1ps
module tb_uart;
  import phy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  pbus_req_t preq; pbus_rsp_t prsp;
  logic tx, rx;
  uart #(.DIV_RESET(16)) dut (.*);
  `include "pbus_tasks.svh"
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  localparam int DIV = 12;
  task automatic send_rx(input logic [7:0] b, input bit stop);
    rx = 0; repeat (DIV) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (DIV) @(posedge clk); end
    rx = stop; repeat (DIV) @(posedge clk);
    rx = 1; repeat (DIV) @(posedge clk);
  endtask
  initial begin #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [31:0] d; int t_start;
    preq = '0; rx = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    pb_read(16'h000C, d); check(d == 16, "DIV reset value");
    pb_write(16'h000C, DIV);
    // transmit 0xA6 and sample each bit in its middle
    pb_write(16'h0000, 32'hA6);
    while (tx) @(posedge clk);
    t_start = 0;
    repeat (DIV / 2) @(posedge clk);
    check(tx == 0, "start bit");
    for (int i = 0; i < 8; i++) begin
      repeat (DIV) @(posedge clk);
      check(tx == 1'(8'hA6 >> i), $sformatf("tx data bit %0d", i));
    end
    repeat (DIV) @(posedge clk); check(tx == 1, "stop bit");
    pb_read(16'h0008, d); check(d[0] == 1, "tx busy during stop bit");
    repeat (DIV) @(posedge clk);
    pb_read(16'h0008, d); check(d[0] == 0, "tx idle after frame");
    // receive
    send_rx(8'h3C, 1);
    pb_read(16'h0008, d); check(d[1] == 1 && d[3] == 0, "rx valid, no framing error");
    pb_read(16'h0004, d); check(d[8:0] == {1'b1, 8'h3C}, "rx byte 0x3C");
    pb_read(16'h0008, d); check(d[1] == 0, "rx valid cleared by read");
    send_rx(8'h81, 1);
    send_rx(8'h7E, 1);
    pb_read(16'h0008, d); check(d[2] == 1, "overrun flagged");
    pb_read(16'h0004, d); check(d[7:0] == 8'h7E, "newest byte kept");
    send_rx(8'h55, 0);
    pb_read(16'h0008, d); check(d[3] == 1, "framing error on bad stop bit");
    pb_read(16'h0004, d);
    // random bytes both ways: the sent frame is decoded by sampling mid-bit
    for (int k = 0; k < 12; k++) begin
      logic [7:0] tb_byte, rx_byte, got;
      tb_byte = 8'($urandom); rx_byte = 8'($urandom);
      pb_write(16'h0000, 32'(tb_byte));
      while (tx) @(posedge clk);
      repeat (DIV / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin repeat (DIV) @(posedge clk); got[i] = tx; end
      repeat (DIV) @(posedge clk);
      check(got == tb_byte && tx == 1, $sformatf("random tx frame %0d", k));
      repeat (DIV) @(posedge clk);
      send_rx(rx_byte, 1);
      pb_read(16'h0004, d);
      check(d[8:0] == {1'b1, rx_byte}, $sformatf("random rx frame %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
