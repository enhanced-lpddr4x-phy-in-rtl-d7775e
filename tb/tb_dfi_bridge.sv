// tb_dfi_bridge: the DFI Bridge as software uses it.  Through the 32-bit
// port, a command list goes into SRAM 0 and write data into SRAM 1.  DMA 1
// copies the data into the Data Buffer, then DMA 0 streams the commands into
// the Command FIFO while the Bridge Control Unit runs.  A DFI model checks
// every write burst against the data written to SRAM 1 and answers reads
// with known data, which is then read back from the Data Buffer.  Also
// checks that writes from the 32-bit port reach the FIFO directly, that the
// command stream kept the data bus busy without gaps at delay 4, and that
// the DMA kept ahead of the unit (FIFO underflow count).
`timescale 1ns/1ps
module tb_dfi_bridge;
  import phy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic [31:0] awaddr, araddr; logic awvalid, awready, wvalid, wready, bvalid, bready;
  logic [31:0] wdata, rdata; logic [3:0] wstrb; logic [1:0] bresp, rresp;
  logic arvalid, arready, rvalid, rready;
  logic bcu_en; dma_cfg_t dma_cfg [2]; dma_status_t dma_status [2];
  logic bcu_busy, bcu_late; logic [31:0] bcu_n_cmds; logic [4:0] fifo_level;
  dfi_out_t dfi_o; dfi_in_t dfi_i;
  dfi_bridge #(.BASE(32'h1000_0000)) dut (.*);
  `include "axil_master_tasks.svh"
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  localparam logic [31:0] B = 32'h1000_0000;
  localparam int NW = 16;        // write commands (slots 0..15)
  localparam int NR = 4;         // read commands (slots 100..103)
  logic [63:0] sdata [NW*8];

  task automatic w64(input logic [31:0] a, input logic [63:0] v);
    logic [1:0] r;
    axil_write(a, 64'(v[31:0]), 8'hF, r);
    axil_write(a + 4, 64'(v[63:32]), 8'hF, r);
  endtask

  function automatic logic [63:0] mkcmd(input dfi_op_e op, input int idx, input int delay, input int lat);
    dfi_cmd_t c;
    c = '0; c.op = op; c.chan = 2'b11; c.idx = 8'(idx); c.delay = 16'(delay); c.lat = 8'(lat);
    c.ca_a = 12'h0A5; c.ca_b = 12'h05A;
    return 64'(c);
  endfunction

  // DFI model: check write bursts, answer reads after 6 cycles
  int wbeat = 0, wbad = 0, wgap = 0, wlast = -1;
  logic [5:0] en_pipe; int rbeat = 0;
  always @(posedge clk) begin
    if (!rst_n) begin en_pipe <= '0; dfi_i <= '0; end
    else begin
      if (dfi_o.wrdata_en) begin
        int s, q;
        s = wbeat / 4; q = wbeat % 4;
        if (s < NW && dfi_o.wrdata !== {sdata[s*8 + 2*q + 1], sdata[s*8 + 2*q]}) wbad++;
        if (wlast >= 0 && cyc != wlast + 1) wgap++;
        wlast = cyc; wbeat++;
      end
      en_pipe <= {en_pipe[4:0], dfi_o.rddata_en};
      dfi_i.rddata_valid <= en_pipe[5];
      if (en_pipe[5]) begin
        dfi_i.rddata <= {4{32'h5EED_0000 + 32'(rbeat)}};
        rbeat <= rbeat + 1;
      end
    end
  end
  // FIFO underflow while commands remain: the unit waited for the DMA
  int underflow = 0;
  always @(posedge clk) if (bcu_en && dma_status[0].busy && fifo_level == 0 && !dut.u_bcu.cmd_valid) underflow++;

  initial begin #2000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [63:0] d; logic [1:0] r; int t0;
    awvalid = 0; wvalid = 0; arvalid = 0; bready = 0; rready = 0;
    bcu_en = 0; dma_cfg[0] = '0; dma_cfg[1] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // write data for slots 0..NW-1 into SRAM 1
    for (int i = 0; i < NW * 8; i++) begin
      sdata[i] = {$urandom, $urandom};
      w64(B + 32'h4000 + 32'(i * 8), sdata[i]);
    end
    // command list in SRAM 0: NW writes at delay 4, then NR reads
    for (int i = 0; i < NW; i++) w64(B + 32'(i * 8), mkcmd(OP_WRITE, i, 4, 5));
    for (int i = 0; i < NR; i++) w64(B + 32'((NW + i) * 8), mkcmd(OP_READ, 100 + i, 4, 8));
    // DMA 1: SRAM 1 -> Data Buffer
    @(negedge clk);
    dma_cfg[1].src = B + 32'h4000; dma_cfg[1].dst = B + 32'h1_0000; dma_cfg[1].len = 16'(NW * 8);
    dma_cfg[1].src_inc = 1; dma_cfg[1].dst_inc = 1; dma_cfg[1].start = 1;
    @(negedge clk); dma_cfg[1].start = 0;
    while (!dma_status[1].done) @(negedge clk);
    check(!dma_status[1].error, "data DMA without error");
    // prefill 4 commands, then stream the rest while the unit runs
    @(negedge clk);
    dma_cfg[0].src = B; dma_cfg[0].dst = B + 32'h8000; dma_cfg[0].len = 16'(NW + NR);
    dma_cfg[0].src_inc = 1; dma_cfg[0].dst_inc = 0; dma_cfg[0].start = 1;
    @(negedge clk); dma_cfg[0].start = 0;
    while (fifo_level < 4) @(negedge clk);
    bcu_en = 1; t0 = cyc;
    while (!dma_status[0].done || bcu_busy) @(negedge clk);
    repeat (20) @(negedge clk);
    $display("%0d commands in %0d cycles, underflow cycles %0d", NW + NR, cyc - t0, underflow);
    check(bcu_n_cmds == NW + NR, "all commands issued");
    check(wbeat == NW * 4 && wbad == 0, $sformatf("write bursts carry SRAM 1 data (%0d beats, %0d bad)", wbeat, wbad));
    check(wgap == 0, $sformatf("write data without gaps (%0d)", wgap));
    check(!bcu_late, "no late transfer");
    check(underflow == 0, "DMA kept the FIFO from running dry");
    // read data landed in slots 100..103
    for (int s = 0; s < NR; s++) for (int l = 0; l < 16; l++) begin
      axil_read(B + 32'h1_0000 + 32'((100 + s) * 64 + l * 4), d, r);
      check(d[31:0] == 32'h5EED_0000 + 32'(s * 4 + l / 4), $sformatf("read data slot %0d word %0d", 100 + s, l));
    end
    // the core can also push a command directly, as two 32-bit halves
    w64(B + 32'h8000, mkcmd(OP_CA, 0, 2, 0));
    repeat (6) @(negedge clk);
    check(bcu_n_cmds == NW + NR + 1, "command written by the core issued");
    axil_read(B + 32'h8000, d, r); check(d[31:0] == 0, "FIFO level read");
    axil_read(B + 32'h2_0000, d, r); check(r == 2'b11, "unmapped bridge address DECERR");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
