// tb_cmd_fifo: pushes 64-bit commands (whole and as two 32-bit halves),
// fills the FIFO to back-pressure, checks the level register and that the
// commands come out in order with no loss while the consumer stalls.
`timescale 1ns/1ps
module tb_cmd_fifo;
  import phy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  logic [31:0] awaddr, araddr; logic awvalid, awready, wvalid, wready, bvalid, bready;
  logic [63:0] wdata, rdata; logic [7:0] wstrb; logic [1:0] bresp, rresp;
  logic arvalid, arready, rvalid, rready;
  dfi_cmd_t cmd; logic cmd_valid, cmd_ready; logic [4:0] level;
  cmd_fifo #(.DEPTH(16)) dut (.*);
  `include "axil_master_tasks.svh"
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic [63:0] exp_q [$];
  int popped = 0;
  always @(posedge clk) if (rst_n && cmd_valid && cmd_ready) begin
    checks++;
    if (exp_q.size() == 0 || 64'(cmd) != exp_q[0]) begin failures++; $display("FAIL: pop order"); end
    if (exp_q.size() != 0) void'(exp_q.pop_front());
    popped++;
  end
  initial begin #400000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [1:0] r; logic [63:0] d, v; int stalls;
    awvalid = 0; wvalid = 0; arvalid = 0; bready = 0; rready = 0; cmd_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      v = {$urandom, $urandom}; exp_q.push_back(v);
      if (i % 3 == 0) begin
        axil_write(0, {32'h0, v[31:0]}, 8'h0F, r);
        axil_write(4, {v[63:32], 32'h0}, 8'hF0, r);
      end else axil_write(0, v, 8'hFF, r);
    end
    axil_read(0, d, r);
    check(d == 16 && level == 16, "level 16 when full");
    // a 17th push must wait until the consumer pops
    v = 64'h1234_5678_9ABC_DEF0; exp_q.push_back(v);
    fork
      axil_write(0, v, 8'hFF, r);
      begin stalls = 0; wait (awvalid); repeat (10) begin @(posedge clk); if (awvalid && !awready) stalls++; end
            check(stalls == 10, "write stalled while full");
            @(negedge clk); cmd_ready = 1; end
    join
    while (exp_q.size() != 0) @(posedge clk);
    repeat (2) @(posedge clk);
    check(popped == 17, "all commands popped");
    check(!cmd_valid && level == 0, "empty at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
