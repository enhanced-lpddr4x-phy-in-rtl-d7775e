// tb_axil2periph: two AXI4-Lite threads issue writes and reads at the same
// time through the Bus Bridge to a register-file peripheral model that
// answers after a random delay.  Checks the data, the SLVERR mapping, that
// the peripheral bus never carries two accesses at once, that competing
// reads and writes alternate, and byte-strobe handling.
`timescale 1ns/1ps
module tb_axil2periph;
  import phy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  logic [31:0] awaddr, araddr; logic awvalid, awready, wvalid, wready, bvalid, bready;
  logic [31:0] wdata, rdata; logic [3:0] wstrb; logic [1:0] bresp, rresp;
  logic arvalid, arready, rvalid, rready;
  pbus_req_t preq; pbus_rsp_t prsp;
  axil2periph dut (.*);
  `include "axil_master_tasks.svh"
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  // peripheral model: 64 registers, error above 0x100, random wait
  logic [31:0] regs [64];
  int wait_left = 0; int accesses = 0; int switches = 0; logic last_we = 0;
  always_comb begin
    prsp.ready = preq.req && wait_left == 0;
    prsp.err = preq.addr >= 16'h100;
    prsp.rdata = regs[preq.addr[7:2]];
  end
  always @(posedge clk) begin
    if (preq.req && wait_left == 0) begin
      if (preq.we && preq.addr < 16'h100) regs[preq.addr[7:2]] <= preq.wdata;
      accesses++;
      if (accesses > 1 && preq.we != last_we) switches++;
      last_we <= preq.we;
      wait_left <= $urandom % 4;
    end else if (wait_left > 0 && preq.req) wait_left <= wait_left - 1;
  end
  initial begin #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [63:0] d; logic [1:0] r;
    awvalid = 0; wvalid = 0; arvalid = 0; bready = 0; rready = 0;
    for (int i = 0; i < 64; i++) regs[i] = 32'(i * 32'h0101_0101);
    repeat (2) @(posedge clk); rst_n = 1;
    fork
      for (int i = 32; i < 64; i++) begin
        logic [1:0] rr;
        axil_write(32'(i * 4), 64'(32'hCAFE_0000 + i), 8'hF, rr);
        check(rr == 2'b00, "write OKAY");
      end
      for (int i = 0; i < 32; i++) begin
        logic [63:0] dd; logic [1:0] rr;
        axil_read(32'(i * 4), dd, rr);
        check(dd[31:0] == 32'(i * 32'h0101_0101) && rr == 2'b00, $sformatf("read reg %0d", i));
      end
    join
    check(switches >= 20, $sformatf("reads and writes alternate (%0d switches)", switches));
    for (int i = 32; i < 64; i += 5) begin
      axil_read(32'(i * 4), d, r);
      check(d[31:0] == 32'hCAFE_0000 + i, "written value read back");
    end
    axil_write(32'h0000_0200, 64'h1, 8'hF, r); check(r == 2'b10, "write error -> SLVERR");
    axil_read(32'h0000_0204, d, r); check(r == 2'b10, "read error -> SLVERR");
    axil_write(32'h0000_0010, 64'h1122_3344, 8'h3, r);
    axil_read(32'h0000_0010, d, r); check(d[31:0] == 32'h0000_3344, "unstrobed bytes zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
