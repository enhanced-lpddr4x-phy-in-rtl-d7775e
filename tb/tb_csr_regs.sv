// tb_csr_regs: writes and reads every register of the configuration block:
// ID, CTRL, STATUS fields, the DMA channel registers with their one-cycle
// start pulse, and the PHY control and status words.
`timescale 1ns/1ps
module tb_csr_regs;
  import phy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  pbus_req_t preq; pbus_rsp_t prsp;
  logic dfi_sel, bcu_en, dfi_sel_active, bcu_busy, bcu_late; logic [7:0] fifo_level;
  logic [31:0] bcu_n_cmds; dma_cfg_t dma_cfg [3]; dma_status_t dma_status [3];
  logic [31:0] phy_ctrl [8], phy_status [8];
  csr_regs dut (.*);
  `include "pbus_tasks.svh"
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  int starts [3];
  always @(negedge clk) for (int k = 0; k < 3; k++) if (dma_cfg[k].start) starts[k]++;
  initial begin #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [31:0] d;
    preq = '0; dfi_sel_active = 1; bcu_busy = 1; bcu_late = 0; fifo_level = 8'd9;
    bcu_n_cmds = 32'd77;
    for (int k = 0; k < 3; k++) begin dma_status[k] = 3'(k + 1); starts[k] = 0; end
    for (int i = 0; i < 8; i++) phy_status[i] = 32'hF000_0000 + i;
    repeat (2) @(posedge clk); rst_n = 1;
    pb_read(16'h2000, d); check(d == 32'h4C50_3458, "ID");
    check(dfi_sel == 0 && bcu_en == 0, "reset control");
    pb_write(16'h2004, 32'h3); check(dfi_sel && bcu_en, "CTRL bits");
    pb_read(16'h2004, d); check(d == 3, "CTRL read back");
    pb_read(16'h2008, d); check(d == {16'd0, 8'd9, 5'd0, 1'b1, 1'b0, 1'b1}, "STATUS");
    pb_read(16'h200C, d); check(d == 77, "NCMDS");
    for (int k = 0; k < 3; k++) begin
      logic [15:0] b; b = 16'(16'h2040 + 32 * k);
      pb_write(b + 0, 32'h1000 * (k + 1));
      pb_write(b + 4, 32'h2000 * (k + 1));
      pb_write(b + 8, 32'(10 + k));
      pb_write(b + 12, 32'b111);
      check(dma_cfg[k].src == 32'h1000 * (k + 1) && dma_cfg[k].dst == 32'h2000 * (k + 1) &&
            dma_cfg[k].len == 16'(10 + k) && dma_cfg[k].src_inc && dma_cfg[k].dst_inc, "DMA cfg fields");
      pb_read(b + 12, d); check(d == 32'b110, "DMA CTRL read back without start");
      check(starts[k] == 1 && !dma_cfg[k].start, "start is a single pulse");
      pb_read(b + 16, d); check(d == {29'd0, dma_status[k].error, dma_status[k].done, dma_status[k].busy}, "DMA status");
    end
    for (int i = 0; i < 8; i++) pb_write(16'(16'h2100 + 4 * i), 32'hABC0_0000 + i);
    for (int i = 0; i < 8; i++) begin
      check(phy_ctrl[i] == 32'hABC0_0000 + i, "PHY control output");
      pb_read(16'(16'h2180 + 4 * i), d); check(d == 32'hF000_0000 + i, "PHY status input");
    end
    pb_read(16'h2FF0, d); check(d == 0, "unmapped reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
