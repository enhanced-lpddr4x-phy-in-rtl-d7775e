// phy_digital_top: the digital part of the LPDDR4X PHY: the RISC-V Subsystem
// with its DFI Bridge, and the DFI MUX of the Command/Address Slice.
//
// The 32-bit AXI4-Lite Memory Interconnect joins four masters (the RISC-V
// core, a DMA controller, the external AXI4-Lite slave port and the JTAG
// TAP) to three slaves (the 64 kB SRAM, the DFI Bridge and the Bus Bridge).
// The Bus Bridge leads to the Peripheral Interconnect with the UART, the SPI
// master and the Configuration and Status Registers.  The DFI MUX hands the
// PHY's DFI either to the external memory controller or to the DFI Bridge.
// All of it runs on one clock, the DFI clock (half the DRAM clock).
//
// The core itself and the analog slices are outside this module: the core's
// AXI4-Lite master port, its reset/halt lines, the DFI towards the slices and
// the PHY control/status words are ports.
//
// Memory map (this design's choice):
//   0x0000_0000  64 kB SRAM
//   0x1000_0000  DFI Bridge (SRAM 0, SRAM 1, Command FIFO, Data Buffer)
//   0x2000_0000  UART, 0x2000_1000 SPI, 0x2000_2000 configuration registers
module phy_digital_top #(
  parameter int unsigned SRAM_BYTES = 65536,
  parameter int unsigned BRIDGE_SRAM_BYTES = 16384,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned BUF_SLOTS = phy_pkg::BUF_SLOTS,
  parameter int unsigned NPHY = 8,
  parameter int unsigned UART_DIV = 16,
  parameter int unsigned SPI_DIV = 4
) (
  input  logic clk,
  input  logic rst_n,
  // AXI4-Lite master port of the RISC-V core
  input  logic [31:0] core_awaddr,
  input  logic        core_awvalid,
  output logic        core_awready,
  input  logic [31:0] core_wdata,
  input  logic [3:0]  core_wstrb,
  input  logic        core_wvalid,
  output logic        core_wready,
  output logic [1:0]  core_bresp,
  output logic        core_bvalid,
  input  logic        core_bready,
  input  logic [31:0] core_araddr,
  input  logic        core_arvalid,
  output logic        core_arready,
  output logic [31:0] core_rdata,
  output logic [1:0]  core_rresp,
  output logic        core_rvalid,
  input  logic        core_rready,
  output logic        core_reset,
  output logic        core_halt,
  // external AXI4-Lite slave port
  input  logic [31:0] ext_awaddr,
  input  logic        ext_awvalid,
  output logic        ext_awready,
  input  logic [31:0] ext_wdata,
  input  logic [3:0]  ext_wstrb,
  input  logic        ext_wvalid,
  output logic        ext_wready,
  output logic [1:0]  ext_bresp,
  output logic        ext_bvalid,
  input  logic        ext_bready,
  input  logic [31:0] ext_araddr,
  input  logic        ext_arvalid,
  output logic        ext_arready,
  output logic [31:0] ext_rdata,
  output logic [1:0]  ext_rresp,
  output logic        ext_rvalid,
  input  logic        ext_rready,
  // DFI of the memory controller and of the PHY slices
  input  phy_pkg::dfi_out_t mc_dfi_o,
  output phy_pkg::dfi_in_t  mc_dfi_i,
  output phy_pkg::dfi_out_t phy_dfi_o,
  input  phy_pkg::dfi_in_t  phy_dfi_i,
  // off-chip interfaces
  input  logic tck,
  input  logic tms,
  input  logic tdi,
  output logic tdo,
  input  logic trst_n,
  output logic uart_tx,
  input  logic uart_rx,
  output logic spi_sclk,
  output logic spi_mosi,
  input  logic spi_miso,
  output logic [0:0] spi_cs_n,
  // PHY slice control and status
  output logic [31:0] phy_ctrl   [NPHY],
  input  logic [31:0] phy_status [NPHY]
);
  import phy_pkg::*;
  localparam int unsigned NM = 4;  // core, DMA, external port, JTAG
  localparam int unsigned NS = 3;  // SRAM, DFI Bridge, Bus Bridge
  localparam logic [NS*32-1:0] SBASE = {32'h2000_0000, 32'h1000_0000, 32'h0000_0000};
  localparam logic [NS*32-1:0] SSIZE = {32'h0001_0000, 32'h0002_0000, 32'(SRAM_BYTES)};

  logic [31:0] m_awaddr [NM]; logic m_awvalid [NM]; logic m_awready [NM];
  logic [31:0] m_wdata [NM];  logic [3:0] m_wstrb [NM]; logic m_wvalid [NM]; logic m_wready [NM];
  logic [1:0]  m_bresp [NM];  logic m_bvalid [NM]; logic m_bready [NM];
  logic [31:0] m_araddr [NM]; logic m_arvalid [NM]; logic m_arready [NM];
  logic [31:0] m_rdata [NM];  logic [1:0] m_rresp [NM]; logic m_rvalid [NM]; logic m_rready [NM];

  logic [31:0] s_awaddr [NS]; logic s_awvalid [NS]; logic s_awready [NS];
  logic [31:0] s_wdata [NS];  logic [3:0] s_wstrb [NS]; logic s_wvalid [NS]; logic s_wready [NS];
  logic [1:0]  s_bresp [NS];  logic s_bvalid [NS]; logic s_bready [NS];
  logic [31:0] s_araddr [NS]; logic s_arvalid [NS]; logic s_arready [NS];
  logic [31:0] s_rdata [NS];  logic [1:0] s_rresp [NS]; logic s_rvalid [NS]; logic s_rready [NS];

  // ---------------- master 0: RISC-V core ----------------
  assign m_awaddr[0] = core_awaddr;  assign m_awvalid[0] = core_awvalid; assign core_awready = m_awready[0];
  assign m_wdata[0]  = core_wdata;   assign m_wstrb[0] = core_wstrb;     assign m_wvalid[0] = core_wvalid;
  assign core_wready = m_wready[0];  assign core_bresp = m_bresp[0];     assign core_bvalid = m_bvalid[0];
  assign m_bready[0] = core_bready;  assign m_araddr[0] = core_araddr;   assign m_arvalid[0] = core_arvalid;
  assign core_arready = m_arready[0]; assign core_rdata = m_rdata[0];    assign core_rresp = m_rresp[0];
  assign core_rvalid = m_rvalid[0];  assign m_rready[0] = core_rready;

  // ---------------- master 2: external slave port ----------------
  assign m_awaddr[2] = ext_awaddr;   assign m_awvalid[2] = ext_awvalid;  assign ext_awready = m_awready[2];
  assign m_wdata[2]  = ext_wdata;    assign m_wstrb[2] = ext_wstrb;      assign m_wvalid[2] = ext_wvalid;
  assign ext_wready = m_wready[2];   assign ext_bresp = m_bresp[2];      assign ext_bvalid = m_bvalid[2];
  assign m_bready[2] = ext_bready;   assign m_araddr[2] = ext_araddr;    assign m_arvalid[2] = ext_arvalid;
  assign ext_arready = m_arready[2]; assign ext_rdata = m_rdata[2];      assign ext_rresp = m_rresp[2];
  assign ext_rvalid = m_rvalid[2];   assign m_rready[2] = ext_rready;

  // ---------------- configuration wiring ----------------
  dma_cfg_t    dma_cfg    [3];
  dma_status_t dma_status [3];
  dma_cfg_t    br_dma_cfg [2];
  dma_status_t br_dma_status [2];
  logic dfi_sel, dfi_active, bcu_en, bcu_busy, bcu_late;
  logic [31:0] bcu_n_cmds;
  logic [$clog2(FIFO_DEPTH):0] fifo_level;
  assign br_dma_cfg[0] = dma_cfg[1];
  assign br_dma_cfg[1] = dma_cfg[2];
  assign dma_status[1] = br_dma_status[0];
  assign dma_status[2] = br_dma_status[1];

  // ---------------- master 1: DMA ----------------
  axil_dma #(.DW(32)) u_dma (
    .clk, .rst_n, .cfg(dma_cfg[0]), .status(dma_status[0]),
    .awaddr(m_awaddr[1]), .awvalid(m_awvalid[1]), .awready(m_awready[1]),
    .wdata(m_wdata[1]), .wstrb(m_wstrb[1]), .wvalid(m_wvalid[1]), .wready(m_wready[1]),
    .bresp(m_bresp[1]), .bvalid(m_bvalid[1]), .bready(m_bready[1]),
    .araddr(m_araddr[1]), .arvalid(m_arvalid[1]), .arready(m_arready[1]),
    .rdata(m_rdata[1]), .rresp(m_rresp[1]), .rvalid(m_rvalid[1]), .rready(m_rready[1]));

  // ---------------- master 3: JTAG ----------------
  jtag_dbg u_jtag (
    .clk, .rst_n, .tck, .tms, .tdi, .tdo, .trst_n, .core_reset, .core_halt,
    .awaddr(m_awaddr[3]), .awvalid(m_awvalid[3]), .awready(m_awready[3]),
    .wdata(m_wdata[3]), .wstrb(m_wstrb[3]), .wvalid(m_wvalid[3]), .wready(m_wready[3]),
    .bresp(m_bresp[3]), .bvalid(m_bvalid[3]), .bready(m_bready[3]),
    .araddr(m_araddr[3]), .arvalid(m_arvalid[3]), .arready(m_arready[3]),
    .rdata(m_rdata[3]), .rresp(m_rresp[3]), .rvalid(m_rvalid[3]), .rready(m_rready[3]));

  // ---------------- Memory Interconnect ----------------
  axil_xbar #(.NM(NM), .NS(NS), .AW(32), .DW(32), .SLV_BASE(SBASE), .SLV_SIZE(SSIZE)) u_xbar (
    .clk, .rst_n,
    .m_awaddr, .m_awvalid, .m_awready, .m_wdata, .m_wstrb, .m_wvalid, .m_wready,
    .m_bresp, .m_bvalid, .m_bready, .m_araddr, .m_arvalid, .m_arready,
    .m_rdata, .m_rresp, .m_rvalid, .m_rready,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready);

  // ---------------- slave 0: 64 kB SRAM ----------------
  axil_sram #(.DW(32), .SIZE_BYTES(SRAM_BYTES)) u_sram (
    .clk, .rst_n,
    .awaddr(s_awaddr[0]), .awvalid(s_awvalid[0]), .awready(s_awready[0]),
    .wdata(s_wdata[0]), .wstrb(s_wstrb[0]), .wvalid(s_wvalid[0]), .wready(s_wready[0]),
    .bresp(s_bresp[0]), .bvalid(s_bvalid[0]), .bready(s_bready[0]),
    .araddr(s_araddr[0]), .arvalid(s_arvalid[0]), .arready(s_arready[0]),
    .rdata(s_rdata[0]), .rresp(s_rresp[0]), .rvalid(s_rvalid[0]), .rready(s_rready[0]));

  // ---------------- slave 1: DFI Bridge ----------------
  dfi_out_t br_dfi_o;
  dfi_in_t  br_dfi_i;
  dfi_bridge #(.BASE(32'h1000_0000), .SRAM_BYTES(BRIDGE_SRAM_BYTES), .FIFO_DEPTH(FIFO_DEPTH),
               .BUF_SLOTS(BUF_SLOTS)) u_bridge (
    .clk, .rst_n,
    .awaddr(s_awaddr[1]), .awvalid(s_awvalid[1]), .awready(s_awready[1]),
    .wdata(s_wdata[1]), .wstrb(s_wstrb[1]), .wvalid(s_wvalid[1]), .wready(s_wready[1]),
    .bresp(s_bresp[1]), .bvalid(s_bvalid[1]), .bready(s_bready[1]),
    .araddr(s_araddr[1]), .arvalid(s_arvalid[1]), .arready(s_arready[1]),
    .rdata(s_rdata[1]), .rresp(s_rresp[1]), .rvalid(s_rvalid[1]), .rready(s_rready[1]),
    .bcu_en, .dma_cfg(br_dma_cfg), .dma_status(br_dma_status),
    .bcu_busy, .bcu_late, .bcu_n_cmds, .fifo_level,
    .dfi_o(br_dfi_o), .dfi_i(br_dfi_i));

  // ---------------- slave 2: Bus Bridge and peripherals ----------------
  pbus_req_t preq;
  pbus_rsp_t prsp;
  pbus_req_t sreq [3];
  pbus_rsp_t srsp [3];
  axil2periph u_bbridge (
    .clk, .rst_n,
    .awaddr(s_awaddr[2]), .awvalid(s_awvalid[2]), .awready(s_awready[2]),
    .wdata(s_wdata[2]), .wstrb(s_wstrb[2]), .wvalid(s_wvalid[2]), .wready(s_wready[2]),
    .bresp(s_bresp[2]), .bvalid(s_bvalid[2]), .bready(s_bready[2]),
    .araddr(s_araddr[2]), .arvalid(s_arvalid[2]), .arready(s_arready[2]),
    .rdata(s_rdata[2]), .rresp(s_rresp[2]), .rvalid(s_rvalid[2]), .rready(s_rready[2]),
    .preq, .prsp);

  periph_xbar #(.NP(3)) u_pxbar (.preq, .prsp, .sreq, .srsp);

  uart #(.DIV_RESET(UART_DIV)) u_uart (
    .clk, .rst_n, .preq(sreq[0]), .prsp(srsp[0]), .tx(uart_tx), .rx(uart_rx));

  spi_master #(.NCS(1), .DIV_RESET(SPI_DIV)) u_spi (
    .clk, .rst_n, .preq(sreq[1]), .prsp(srsp[1]),
    .sclk(spi_sclk), .mosi(spi_mosi), .miso(spi_miso), .cs_n(spi_cs_n));

  csr_regs #(.NDMA(3), .NPHY(NPHY)) u_csr (
    .clk, .rst_n, .preq(sreq[2]), .prsp(srsp[2]),
    .dfi_sel, .bcu_en, .dfi_sel_active(dfi_active), .bcu_busy, .bcu_late,
    .fifo_level(8'(fifo_level)), .bcu_n_cmds,
    .dma_cfg, .dma_status, .phy_ctrl, .phy_status);

  // ---------------- DFI MUX ----------------
  dfi_mux u_dfi_mux (
    .clk, .rst_n, .sel_req(dfi_sel), .active(dfi_active),
    .mc_o(mc_dfi_o), .mc_i(mc_dfi_i), .br_o(br_dfi_o), .br_i(br_dfi_i),
    .phy_o(phy_dfi_o), .phy_i(phy_dfi_i));
endmodule
