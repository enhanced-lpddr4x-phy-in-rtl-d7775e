// tb_phy_digital_top: end-to-end test of the PHY's digital part at its
// default sizes.  A task-level stand-in for the RISC-V core drives the core's
// AXI4-Lite port the way calibration software would; a second master uses
// the external AXI4-Lite port; a third scans through JTAG.  A DFI model on
// the PHY side checks write bursts and answers reads.
//
// Sequence: memory test of the 64 kB SRAM; DMA 0 copy inside it; command
// list and write data into the DFI Bridge SRAMs; DFI MUX switched from the
// memory controller to the bridge; data DMA into the Data Buffer; command
// DMA into a Command FIFO that fills and stalls the DMA before the unit is
// enabled; read-back of DFI read data; a deliberately too-tight command pair
// that trips the late flag; switch back to the memory controller; UART and
// SPI exchanges with off-chip models; a JTAG bus read while the core and the
// external port use the bus; decode errors.  Every mechanism is counted and
// a mechanism that never happened is a failure.
`timescale 1ns/1ps
module tb_phy_digital_top;
  import phy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // core port (named for the shared AXI4-Lite tasks)
  logic [31:0] awaddr, araddr; logic awvalid, awready, wvalid, wready, bvalid, bready;
  logic [31:0] wdata, rdata; logic [3:0] wstrb; logic [1:0] bresp, rresp;
  logic arvalid, arready, rvalid, rready;
  // external port
  logic [31:0] ext_awaddr, ext_araddr; logic ext_awvalid, ext_awready, ext_wvalid, ext_wready;
  logic ext_bvalid, ext_bready; logic [31:0] ext_wdata, ext_rdata; logic [3:0] ext_wstrb;
  logic [1:0] ext_bresp, ext_rresp; logic ext_arvalid, ext_arready, ext_rvalid, ext_rready;
  dfi_out_t mc_dfi_o, phy_dfi_o; dfi_in_t mc_dfi_i, phy_dfi_i;
  logic tck, tms, tdi, tdo, trst_n, core_reset, core_halt;
  logic uart_tx, uart_rx, spi_sclk, spi_mosi, spi_miso; logic [0:0] spi_cs_n;
  logic [31:0] phy_ctrl [8], phy_status [8];

  phy_digital_top dut (
    .clk, .rst_n,
    .core_awaddr(awaddr), .core_awvalid(awvalid), .core_awready(awready),
    .core_wdata(wdata), .core_wstrb(wstrb), .core_wvalid(wvalid), .core_wready(wready),
    .core_bresp(bresp), .core_bvalid(bvalid), .core_bready(bready),
    .core_araddr(araddr), .core_arvalid(arvalid), .core_arready(arready),
    .core_rdata(rdata), .core_rresp(rresp), .core_rvalid(rvalid), .core_rready(rready),
    .core_reset, .core_halt,
    .ext_awaddr, .ext_awvalid, .ext_awready, .ext_wdata, .ext_wstrb, .ext_wvalid, .ext_wready,
    .ext_bresp, .ext_bvalid, .ext_bready, .ext_araddr, .ext_arvalid, .ext_arready,
    .ext_rdata, .ext_rresp, .ext_rvalid, .ext_rready,
    .mc_dfi_o, .mc_dfi_i, .phy_dfi_o, .phy_dfi_i,
    .tck, .tms, .tdi, .tdo, .trst_n, .uart_tx, .uart_rx,
    .spi_sclk, .spi_mosi, .spi_miso, .spi_cs_n, .phy_ctrl, .phy_status);

  `include "axil_master_tasks.svh"
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic ext_read(input logic [31:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk); ext_araddr = a; ext_arvalid = 1; ext_rready = 1;
    #0.2; while (!ext_arready) begin @(negedge clk); #0.2; end @(posedge clk);
    @(negedge clk); ext_arvalid = 0;
    while (!ext_rvalid) @(negedge clk);
    d = ext_rdata; resp = ext_rresp;
    @(posedge clk); @(negedge clk); ext_rready = 0;
  endtask
  task automatic ext_write(input logic [31:0] a, input logic [31:0] d, output logic [1:0] resp);
    @(negedge clk); ext_awaddr = a; ext_wdata = d; ext_wstrb = 4'hF;
    ext_awvalid = 1; ext_wvalid = 1; ext_bready = 1;
    #0.2; while (!(ext_awready && ext_wready)) begin @(negedge clk); #0.2; end @(posedge clk);
    @(negedge clk); ext_awvalid = 0; ext_wvalid = 0;
    while (!ext_bvalid) @(negedge clk);
    resp = ext_bresp;
    @(posedge clk); @(negedge clk); ext_bready = 0;
  endtask

  // shorthand for the core
  task automatic wr32(input logic [31:0] a, input logic [31:0] v);
    logic [1:0] r; axil_write(a, 64'(v), 8'hF, r);
    check(r == 2'b00, $sformatf("core write %h OKAY", a));
  endtask
  task automatic rd32(input logic [31:0] a, output logic [31:0] v);
    logic [1:0] r; logic [63:0] d; axil_read(a, d, r); v = d[31:0];
    check(r == 2'b00, $sformatf("core read %h OKAY", a));
  endtask
  task automatic wr64(input logic [31:0] a, input logic [63:0] v);
    wr32(a, v[31:0]); wr32(a + 4, v[63:32]);
  endtask

  localparam logic [31:0] BR = 32'h1000_0000, PER = 32'h2000_0000, CSR = 32'h2000_2000;
  localparam int NW = 20, NR = 4;

  function automatic logic [63:0] mkcmd(input dfi_op_e op, input int idx, input int delay, input int lat);
    dfi_cmd_t c;
    c = '0; c.op = op; c.chan = 2'b11; c.idx = 8'(idx); c.delay = 16'(delay); c.lat = 8'(lat);
    c.ca_a = 12'(idx * 3); c.ca_b = 12'(idx * 5 + 1);
    return 64'(c);
  endfunction

  // ---------------- PHY-side DFI model ----------------
  logic [63:0] sdata [NW*8];
  int wbeat = 0, wbad = 0, mc_seen = 0, br_ca = 0;
  logic [5:0] en_pipe; int rbeat = 0;
  int n_mc_rd_valid = 0, n_br_rd_valid = 0;
  always @(posedge clk) begin
    if (!rst_n) begin en_pipe <= '0; phy_dfi_i <= '0; end
    else begin
      if (phy_dfi_o.wrdata_en && dut.dfi_active) begin
        int s, q;
        s = wbeat / 4; q = wbeat % 4;
        if (s < NW && phy_dfi_o.wrdata !== {sdata[s*8 + 2*q + 1], sdata[s*8 + 2*q]}) wbad++;
        wbeat++;
      end
      if (!dut.dfi_active && phy_dfi_o.address[0] == 6'h2B && phy_dfi_o.cs[0] == 2'b01) mc_seen++;
      if (dut.dfi_active && phy_dfi_o.cs[0] != 0) br_ca++;
      en_pipe <= {en_pipe[4:0], phy_dfi_o.rddata_en};
      phy_dfi_i.rddata_valid <= en_pipe[5];
      if (en_pipe[5]) begin
        phy_dfi_i.rddata <= {4{32'hC0DE_0000 + 32'(rbeat)}};
        rbeat <= rbeat + 1;
      end
      if (mc_dfi_i.rddata_valid) n_mc_rd_valid++;
    end
  end

  // ---------------- mechanism counters ----------------
  int n_fifo_stall = 0, n_mux_to_br = 0, n_mux_to_mc = 0, n_contention = 0, n_bus_parallel = 0;
  logic last_active = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_bridge.s_awvalid[2] && !dut.u_bridge.s_awready[2]) n_fifo_stall++;
    if (dut.dfi_active && !last_active) n_mux_to_br++;
    if (!dut.dfi_active && last_active) n_mux_to_mc++;
    last_active <= dut.dfi_active;
    if ((awvalid && !awready && ext_awvalid && !ext_awready) ||
        (arvalid && !arready && ext_arvalid && !ext_arready)) n_contention++;
    if (dut.u_xbar.r_busy[0] && dut.u_xbar.w_busy[2]) n_bus_parallel++;
  end

  // ---------------- UART and SPI off-chip models ----------------
  localparam int UDIV = 16;
  task automatic uart_send(input logic [7:0] b);
    uart_rx = 0; repeat (UDIV) @(posedge clk);
    for (int i = 0; i < 8; i++) begin uart_rx = b[i]; repeat (UDIV) @(posedge clk); end
    uart_rx = 1; repeat (2 * UDIV) @(posedge clk);
  endtask
  logic [7:0] uart_got; int uart_frames = 0;
  initial begin
    forever begin
      @(negedge uart_tx);
      repeat (UDIV + UDIV / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin uart_got[i] = uart_tx; repeat (UDIV) @(posedge clk); end
      uart_frames++;
    end
  end
  logic [7:0] spi_slv_tx, spi_slv_rx;
  always @(posedge spi_sclk) if (!spi_cs_n[0]) spi_slv_rx = {spi_slv_rx[6:0], spi_mosi};
  always @(negedge spi_sclk) if (!spi_cs_n[0]) spi_slv_tx = {spi_slv_tx[6:0], 1'b0};
  assign spi_miso = spi_slv_tx[7];

  // ---------------- JTAG driver ----------------
  task automatic tclk(input bit m, input bit d, output bit o);
    tms = m; tdi = d; tck = 0; repeat (4) @(posedge clk); o = tdo; tck = 1; repeat (4) @(posedge clk);
  endtask
  task automatic scan(input bit ir, input int n, input logic [127:0] din, output logic [127:0] dout);
    bit o;
    tclk(1, 0, o); if (ir) tclk(1, 0, o); tclk(0, 0, o); tclk(0, 0, o);
    dout = '0;
    for (int i = 0; i < n; i++) begin tclk(i == n - 1, din[i], o); dout[i] = o; end
    tclk(1, 0, o); tclk(0, 0, o);
  endtask

  initial begin #4000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    logic [31:0] v; logic [63:0] d; logic [1:0] r; logic [127:0] q; bit o;
    int t0;
    awvalid = 0; wvalid = 0; arvalid = 0; bready = 0; rready = 0; awaddr = 0; araddr = 0;
    wdata = 0; wstrb = 0;
    ext_awvalid = 0; ext_wvalid = 0; ext_arvalid = 0; ext_bready = 0; ext_rready = 0;
    ext_awaddr = 0; ext_araddr = 0; ext_wdata = 0; ext_wstrb = 0;
    mc_dfi_o = '0; tck = 0; tms = 1; tdi = 0; trst_n = 1; uart_rx = 1;
    spi_slv_tx = 8'h96; spi_slv_rx = 0;
    for (int i = 0; i < 8; i++) phy_status[i] = 32'h5000 + i;
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- 64 kB SRAM: first, last and scattered words ----
    for (int a = 0; a < 65536; a += 4096 + 4) wr32(32'(a), 32'(a) ^ 32'h5A5A_0000);
    wr32(32'h0000_FFFC, 32'hFEED_FACE);
    for (int a = 0; a < 65536; a += 4096 + 4) begin
      rd32(32'(a), v); check(v == (32'(a) ^ 32'h5A5A_0000), "SRAM word");
    end
    rd32(32'h0000_FFFC, v); check(v == 32'hFEED_FACE, "last SRAM word");
    rd32(CSR, v); check(v == 32'h4C50_3458, "CSR ID through the Bus Bridge");

    // ---- DMA 0 inside the SRAM ----
    for (int i = 0; i < 16; i++) wr32(32'h100 + 32'(i * 4), 32'hD0A0_0000 + 32'(i));
    wr32(CSR + 32'h40, 32'h100); wr32(CSR + 32'h44, 32'h8000); wr32(CSR + 32'h48, 16);
    wr32(CSR + 32'h4C, 32'b111);
    do rd32(CSR + 32'h50, v); while (v[0]);
    check(v[1] && !v[2], "DMA 0 done without error");
    for (int i = 0; i < 16; i += 5) begin rd32(32'h8000 + 32'(i * 4), v); check(v == 32'hD0A0_0000 + 32'(i), "DMA 0 copy"); end

    // ---- memory controller owns the DFI ----
    @(negedge clk); mc_dfi_o.cs[0] = 2'b01; mc_dfi_o.address[0] = 6'h2B;
    @(negedge clk); mc_dfi_o = '0;
    @(negedge clk);
    check(mc_seen == 1, "memory controller command reached the PHY");

    // ---- command list and data into the bridge SRAMs ----
    for (int i = 0; i < NW * 8; i++) begin
      sdata[i] = {$urandom, $urandom};
      wr64(BR + 32'h4000 + 32'(i * 8), sdata[i]);
    end
    for (int i = 0; i < NW; i++) wr64(BR + 32'(i * 8), mkcmd(OP_WRITE, i, 4, 6));
    for (int i = 0; i < NR; i++) wr64(BR + 32'((NW + i) * 8), mkcmd(OP_READ, 200 + i, 4, 9));

    // ---- hand the DFI to the bridge ----
    wr32(CSR + 32'h04, 32'b01);
    rd32(CSR + 32'h08, v); check(v[2], "DFI MUX switched to the bridge");

    // ---- data DMA (channel 2) into the Data Buffer ----
    wr32(CSR + 32'h80, BR + 32'h4000); wr32(CSR + 32'h84, BR + 32'h1_0000);
    wr32(CSR + 32'h88, NW * 8); wr32(CSR + 32'h8C, 32'b111);
    do rd32(CSR + 32'h90, v); while (v[0]);
    check(v[1] && !v[2], "data DMA done");

    // ---- command DMA (channel 1) into the FIFO, unit still disabled ----
    wr32(CSR + 32'h60, BR); wr32(CSR + 32'h64, BR + 32'h8000);
    wr32(CSR + 32'h68, NW + NR); wr32(CSR + 32'h6C, 32'b011);
    repeat (200) @(posedge clk);
    rd32(CSR + 32'h08, v); check(v[15:8] == 16, "Command FIFO full while the unit is off");
    rd32(CSR + 32'h70, v); check(v[0], "command DMA stalled on the full FIFO");
    t0 = cyc;
    wr32(CSR + 32'h04, 32'b11);                    // enable the Bridge Control Unit
    do rd32(CSR + 32'h08, v); while (v[0] || v[15:8] != 0);
    rd32(CSR + 32'h0C, v); check(v == NW + NR, $sformatf("commands issued (%0d)", v));
    $display("%0d commands issued within %0d cycles of the enable", NW + NR, cyc - t0);
    check(wbeat == NW * 4 && wbad == 0, $sformatf("write bursts (%0d beats, %0d bad)", wbeat, wbad));
    rd32(CSR + 32'h08, v); check(!v[1], "no late transfer at delay 4");
    for (int s = 0; s < NR; s++) begin
      rd32(BR + 32'h1_0000 + 32'((200 + s) * 64), v);
      check(v == 32'hC0DE_0000 + 32'(s * 4), "DFI read data in the Data Buffer");
      rd32(BR + 32'h1_0000 + 32'((200 + s) * 64 + 60), v);
      check(v == 32'hC0DE_0000 + 32'(s * 4 + 3), "last quarter of the read");
    end
    check(n_mc_rd_valid == 0, "read valid kept from the memory controller");
    check(br_ca == 2 * (NW + NR), $sformatf("CA cycles from the bridge (%0d)", br_ca));

    // ---- a too-tight pair trips the late flag ----
    wr32(CSR + 32'h04, 32'b01);                    // unit off while the pair is queued
    wr64(BR + 32'h8000, mkcmd(OP_WRITE, 0, 2, 3));
    wr64(BR + 32'h8000, mkcmd(OP_WRITE, 1, 2, 3));
    wr32(CSR + 32'h04, 32'b11);
    repeat (20) @(posedge clk);
    rd32(CSR + 32'h08, v); check(v[1], "late flag after colliding bursts");

    // ---- back to the memory controller ----
    wr32(CSR + 32'h04, 32'b00);
    rd32(CSR + 32'h08, v); check(!v[2], "DFI MUX back to the memory controller");

    // ---- UART, SPI, PHY control words ----
    wr32(PER + 32'h0C, UDIV);
    wr32(PER + 32'h00, 32'h4B);
    fork uart_send(8'hB4); join
    rd32(PER + 32'h04, v); check(v[8:0] == {1'b1, 8'hB4}, "UART received from the sensor");
    while (uart_frames == 0) @(posedge clk);
    check(uart_got == 8'h4B, "UART sent to the sensor");
    wr32(PER + 32'h100C, 32'h0);
    wr32(PER + 32'h1000, 32'h3C);
    do rd32(PER + 32'h1004, v); while (v[0]);
    rd32(PER + 32'h1000, v); check(v[7:0] == 8'h96 && spi_slv_rx == 8'h3C, "SPI exchange");
    wr32(CSR + 32'h104, 32'h1234_5678); check(phy_ctrl[1] == 32'h1234_5678, "PHY control word");
    rd32(CSR + 32'h18C, v); check(v == 32'h5003, "PHY status word");

    // ---- JTAG read while core and external port share the bus ----
    repeat (6) tclk(1, 0, o); tclk(0, 0, o);
    scan(0, 32, '0, q); check(q[31:0] == 32'h1A5D_D001, "JTAG IDCODE");
    scan(1, 5, 128'h10, q);
    scan(0, 66, 128'({2'b10, 32'h0000_FFFC, 32'h0}), q);
    fork
      for (int i = 0; i < 30; i++) begin ext_write(32'h0000_C000 + 32'(i * 4), 32'(i), r); check(r == 0, "ext write"); end
      for (int i = 0; i < 30; i++) wr32(CSR + 32'h108, 32'(i));
    join
    fork
      for (int i = 0; i < 30; i++) begin ext_read(32'h0000_C000 + 32'(i * 4), v, r); check(v == 32'(i), "ext read"); end
      for (int i = 0; i < 30; i++) wr32(CSR + 32'h108, 32'(i));
    join
    fork
      for (int i = 0; i < 30; i += 3) begin logic [31:0] e; ext_read(32'h0000_C000 + 32'(i * 4), e, r); check(e == 32'(i), "ext read"); end
      for (int i = 0; i < 30; i += 3) begin rd32(32'h0000_C000 + 32'(i * 4), v); check(v == 32'(i), "core read"); end
    join
    scan(0, 66, '0, q); check(q[31:0] == 32'hFEED_FACE && q[65:64] == 0, "JTAG bus read");
    scan(1, 5, 128'h11, q); scan(0, 2, 128'b10, q); check(core_halt, "JTAG halts the core");

    // ---- decode errors ----
    axil_read(32'h3000_0000, d, r); check(r == 2'b11, "unmapped address DECERR");
    axil_read(PER + 32'h5000, d, r); check(r == 2'b10, "unused peripheral SLVERR");

    // ---- every mechanism happened ----
    check(n_fifo_stall > 0, $sformatf("FIFO back-pressure (%0d cycles)", n_fifo_stall));
    check(n_mux_to_br > 0 && n_mux_to_mc > 0, "DFI MUX switched both ways");
    check(n_contention > 0, $sformatf("two masters competed (%0d)", n_contention));
    check(n_bus_parallel > 0, $sformatf("SRAM read alongside peripheral write (%0d)", n_bus_parallel));
    $display("mechanisms: fifo_stall=%0d mux=%0d/%0d contention=%0d parallel=%0d",
             n_fifo_stall, n_mux_to_br, n_mux_to_mc, n_contention, n_bus_parallel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
