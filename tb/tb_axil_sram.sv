// tb_axil_sram: writes pseudo-random words with random byte strobes to the
// 64-bit SRAM, keeps a reference model, and reads every word back.  Also
// checks the one-cycle response latency of reads.
`timescale 1ns/1ps
module tb_axil_sram;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  logic [31:0] awaddr, araddr; logic awvalid, awready, wvalid, wready, bvalid, bready;
  logic [63:0] wdata, rdata; logic [7:0] wstrb; logic [1:0] bresp, rresp;
  logic arvalid, arready, rvalid, rready;
  axil_sram #(.DW(64), .SIZE_BYTES(16384)) dut (.*);
  `include "axil_master_tasks.svh"
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic [63:0] ref_mem [2048];
  initial begin #400000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [1:0] r; logic [63:0] d; int t0;
    awvalid = 0; wvalid = 0; arvalid = 0; bready = 0; rready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 2048; i += 37) begin
      ref_mem[i] = {$urandom, $urandom};
      axil_write(32'(i * 8), ref_mem[i], 8'hFF, r);
      check(r == 2'b00, "write OKAY");
    end
    // partial writes
    for (int i = 0; i < 2048; i += 74) begin
      logic [63:0] nd; logic [7:0] st;
      nd = {$urandom, $urandom}; st = 8'($urandom);
      for (int b = 0; b < 8; b++) if (st[b]) ref_mem[i][b*8 +: 8] = nd[b*8 +: 8];
      axil_write(32'(32'h1000_0000 + i * 8), nd, st, r);  // upper bits ignored
    end
    for (int i = 0; i < 2048; i += 37) begin
      axil_read(32'(i * 8), d, r);
      check(d == ref_mem[i] && r == 2'b00, $sformatf("read word %0d", i));
    end
    // latency: R valid one cycle after the address handshake
    @(negedge clk); araddr = 0; arvalid = 1; rready = 1;
    @(posedge clk); check(arready, "arready at once");
    @(negedge clk); arvalid = 0; check(rvalid && rdata == ref_mem[0], "one-cycle read latency");
    @(negedge clk); rready = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
