// tb_axil_dma: a 64-bit DMA on a 1x2 crossbar with an SRAM and a Command
// FIFO.  Checks a memory-to-memory copy with incrementing addresses, a copy
// into the FIFO at a fixed address while the FIFO consumer is stalled (the
// DMA must wait, not drop words), the busy/done flags, the error flag on an
// unmapped source, and the time per word (one read plus one write).
`timescale 1ns/1ps
module tb_axil_dma;
  import phy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [31:0] m_awaddr [1]; logic m_awvalid [1]; logic m_awready [1];
  logic [63:0] m_wdata [1];  logic [7:0] m_wstrb [1]; logic m_wvalid [1]; logic m_wready [1];
  logic [1:0]  m_bresp [1];  logic m_bvalid [1]; logic m_bready [1];
  logic [31:0] m_araddr [1]; logic m_arvalid [1]; logic m_arready [1];
  logic [63:0] m_rdata [1];  logic [1:0] m_rresp [1]; logic m_rvalid [1]; logic m_rready [1];
  logic [31:0] s_awaddr [2]; logic s_awvalid [2]; logic s_awready [2];
  logic [63:0] s_wdata [2];  logic [7:0] s_wstrb [2]; logic s_wvalid [2]; logic s_wready [2];
  logic [1:0]  s_bresp [2];  logic s_bvalid [2]; logic s_bready [2];
  logic [31:0] s_araddr [2]; logic s_arvalid [2]; logic s_arready [2];
  logic [63:0] s_rdata [2];  logic [1:0] s_rresp [2]; logic s_rvalid [2]; logic s_rready [2];

  dma_cfg_t cfg; dma_status_t status;
  axil_dma #(.DW(64)) dut (.clk, .rst_n, .cfg, .status,
    .awaddr(m_awaddr[0]), .awvalid(m_awvalid[0]), .awready(m_awready[0]),
    .wdata(m_wdata[0]), .wstrb(m_wstrb[0]), .wvalid(m_wvalid[0]), .wready(m_wready[0]),
    .bresp(m_bresp[0]), .bvalid(m_bvalid[0]), .bready(m_bready[0]),
    .araddr(m_araddr[0]), .arvalid(m_arvalid[0]), .arready(m_arready[0]),
    .rdata(m_rdata[0]), .rresp(m_rresp[0]), .rvalid(m_rvalid[0]), .rready(m_rready[0]));

  axil_xbar #(.NM(1), .NS(2), .AW(32), .DW(64),
    .SLV_BASE({32'h0000_8000, 32'h0000_0000}), .SLV_SIZE({32'h1000, 32'h4000})) u_xbar (.*);

  axil_sram #(.DW(64), .SIZE_BYTES(16384)) u_sram (.clk, .rst_n,
    .awaddr(s_awaddr[0]), .awvalid(s_awvalid[0]), .awready(s_awready[0]),
    .wdata(s_wdata[0]), .wstrb(s_wstrb[0]), .wvalid(s_wvalid[0]), .wready(s_wready[0]),
    .bresp(s_bresp[0]), .bvalid(s_bvalid[0]), .bready(s_bready[0]),
    .araddr(s_araddr[0]), .arvalid(s_arvalid[0]), .arready(s_arready[0]),
    .rdata(s_rdata[0]), .rresp(s_rresp[0]), .rvalid(s_rvalid[0]), .rready(s_rready[0]));

  dfi_cmd_t cmd; logic cmd_valid, cmd_ready; logic [3:0] level;
  cmd_fifo #(.DEPTH(8)) u_fifo (.clk, .rst_n,
    .awaddr(s_awaddr[1]), .awvalid(s_awvalid[1]), .awready(s_awready[1]),
    .wdata(s_wdata[1]), .wstrb(s_wstrb[1]), .wvalid(s_wvalid[1]), .wready(s_wready[1]),
    .bresp(s_bresp[1]), .bvalid(s_bvalid[1]), .bready(s_bready[1]),
    .araddr(s_araddr[1]), .arvalid(s_arvalid[1]), .arready(s_arready[1]),
    .rdata(s_rdata[1]), .rresp(s_rresp[1]), .rvalid(s_rvalid[1]), .rready(s_rready[1]),
    .cmd, .cmd_valid, .cmd_ready, .level);

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input logic [31:0] src, input logic [31:0] dst, input int len,
                     input bit si, input bit di, output int cycles);
    int t0;
    @(negedge clk);
    cfg.src = src; cfg.dst = dst; cfg.len = 16'(len); cfg.src_inc = si; cfg.dst_inc = di;
    cfg.start = 1; t0 = cyc;
    @(negedge clk); cfg.start = 0;
    check(status.busy || len == 0, "busy after start");
    while (status.busy) @(negedge clk);
    cycles = cyc - t0;
    check(status.done, "done after transfer");
  endtask

  logic [63:0] popped [$];
  always @(posedge clk) if (rst_n && cmd_valid && cmd_ready) popped.push_back(64'(cmd));

  initial begin #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int cycles;
    logic [63:0] src_vals [32];
    cfg = '0; cmd_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      src_vals[i] = {$urandom, $urandom};
      u_sram.mem[i] = src_vals[i];
    end
    // copy 32 words 0x0000 -> 0x1000
    run(32'h0, 32'h1000, 32, 1, 1, cycles);
    for (int i = 0; i < 32; i++) check(u_sram.mem[512 + i] == src_vals[i], $sformatf("copied word %0d", i));
    $display("32 words in %0d cycles", cycles);
    check(cycles <= 32 * 4 + 8, $sformatf("read and write overlap (%0d cycles for 32 words)", cycles));
    check(!status.error, "no error");
    // 12 words into an 8-deep FIFO at a fixed address; consumer starts late
    fork
      run(32'h0, 32'h8000, 12, 1, 0, cycles);
      begin
        repeat (150) @(posedge clk);
        check(level == 8 && status.busy, "DMA stalled on a full FIFO");
        @(negedge clk); cmd_ready = 1;
      end
    join
    repeat (4) @(posedge clk);
    check(popped.size() == 12, $sformatf("12 commands through the FIFO (%0d)", popped.size()));
    for (int i = 0; i < 12 && i < popped.size(); i++) check(popped[i] == src_vals[i], "FIFO order");
    // unmapped source
    run(32'h0004_0000, 32'h1000, 2, 1, 1, cycles);
    check(status.error, "error flag on DECERR");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
