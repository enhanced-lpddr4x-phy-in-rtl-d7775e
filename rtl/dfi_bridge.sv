// dfi_bridge: software-controlled access to the DFI.
//
// Structure as in the paper: a 64-bit AXI4-Lite Bridge Interconnect joins
// three masters (two DMA controllers and the port from the 32-bit Memory
// Interconnect, through which the RISC-V core reaches the bridge) with four
// slaves (two 16 kB SRAMs, the Command FIFO and the Bridge Control Unit with
// its Data Buffer).  Software stores a command sequence and its write data
// in the SRAMs; the DMAs stream commands into the Command FIFO and data into
// the Data Buffer while the Bridge Control Unit drains the FIFO onto the DFI.
//
// Address map (byte addresses as seen on the Memory Interconnect; this
// design's choice):
//   BASE + 0x0_0000  SRAM 0, 16 kB
//   BASE + 0x0_4000  SRAM 1, 16 kB
//   BASE + 0x0_8000  Command FIFO (write: push, read: fill level)
//   BASE + 0x1_0000  Data Buffer, 16 kB (slot = addr[13:6], lane = addr[5:3])
//
// The 32-bit port is widened to 64 bits: write data is copied to both halves
// with the strobes of the addressed half, read data is taken from the half
// selected by address bit 2.  The DMAs are programmed through dma_cfg (from
// the configuration registers) and report through dma_status.
module dfi_bridge #(
  parameter logic [31:0] BASE = 32'h1000_0000,
  parameter int unsigned SRAM_BYTES = 16384,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned BUF_SLOTS = phy_pkg::BUF_SLOTS
) (
  input  logic clk,
  input  logic rst_n,
  // 32-bit AXI4-Lite slave port from the Memory Interconnect
  input  logic [31:0] awaddr,
  input  logic        awvalid,
  output logic        awready,
  input  logic [31:0] wdata,
  input  logic [3:0]  wstrb,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready,
  input  logic [31:0] araddr,
  input  logic        arvalid,
  output logic        arready,
  output logic [31:0] rdata,
  output logic [1:0]  rresp,
  output logic        rvalid,
  input  logic        rready,
  // control and status
  input  logic                 bcu_en,
  input  phy_pkg::dma_cfg_t    dma_cfg    [2],
  output phy_pkg::dma_status_t dma_status [2],
  output logic                 bcu_busy,
  output logic                 bcu_late,
  output logic [31:0]          bcu_n_cmds,
  output logic [$clog2(FIFO_DEPTH):0] fifo_level,
  // DFI
  output phy_pkg::dfi_out_t dfi_o,
  input  phy_pkg::dfi_in_t  dfi_i
);
  import phy_pkg::*;
  localparam int unsigned NM = 3;  // DMA 0, DMA 1, Memory Interconnect
  localparam int unsigned NS = 4;  // SRAM 0, SRAM 1, Command FIFO, Bridge Control Unit
  localparam logic [NS*32-1:0] SBASE = {BASE + 32'h1_0000, BASE + 32'h8000,
                                        BASE + 32'h4000, BASE};
  localparam logic [NS*32-1:0] SSIZE = {32'h4000, 32'h1000, 32'h4000, 32'h4000};

  logic [31:0] m_awaddr [NM]; logic m_awvalid [NM]; logic m_awready [NM];
  logic [63:0] m_wdata [NM];  logic [7:0] m_wstrb [NM]; logic m_wvalid [NM]; logic m_wready [NM];
  logic [1:0]  m_bresp [NM];  logic m_bvalid [NM]; logic m_bready [NM];
  logic [31:0] m_araddr [NM]; logic m_arvalid [NM]; logic m_arready [NM];
  logic [63:0] m_rdata [NM];  logic [1:0] m_rresp [NM]; logic m_rvalid [NM]; logic m_rready [NM];

  logic [31:0] s_awaddr [NS]; logic s_awvalid [NS]; logic s_awready [NS];
  logic [63:0] s_wdata [NS];  logic [7:0] s_wstrb [NS]; logic s_wvalid [NS]; logic s_wready [NS];
  logic [1:0]  s_bresp [NS];  logic s_bvalid [NS]; logic s_bready [NS];
  logic [31:0] s_araddr [NS]; logic s_arvalid [NS]; logic s_arready [NS];
  logic [63:0] s_rdata [NS];  logic [1:0] s_rresp [NS]; logic s_rvalid [NS]; logic s_rready [NS];

  // ---------------- 32 -> 64 bit port ----------------
  logic rd_hi;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_hi <= 1'b0;
    else if (arvalid && arready) rd_hi <= araddr[2];
  end
  assign m_awaddr[2]  = awaddr;
  assign m_awvalid[2] = awvalid;
  assign awready      = m_awready[2];
  assign m_wdata[2]   = {wdata, wdata};
  assign m_wstrb[2]   = awaddr[2] ? {wstrb, 4'h0} : {4'h0, wstrb};
  assign m_wvalid[2]  = wvalid;
  assign wready       = m_wready[2];
  assign bresp        = m_bresp[2];
  assign bvalid       = m_bvalid[2];
  assign m_bready[2]  = bready;
  assign m_araddr[2]  = araddr;
  assign m_arvalid[2] = arvalid;
  assign arready      = m_arready[2];
  assign rdata        = rd_hi ? m_rdata[2][63:32] : m_rdata[2][31:0];
  assign rresp        = m_rresp[2];
  assign rvalid       = m_rvalid[2];
  assign m_rready[2]  = rready;

  // ---------------- DMA controllers ----------------
  for (genvar d = 0; d < 2; d++) begin : g_dma
    axil_dma #(.DW(64)) u_dma (
      .clk, .rst_n, .cfg(dma_cfg[d]), .status(dma_status[d]),
      .awaddr(m_awaddr[d]), .awvalid(m_awvalid[d]), .awready(m_awready[d]),
      .wdata(m_wdata[d]), .wstrb(m_wstrb[d]), .wvalid(m_wvalid[d]), .wready(m_wready[d]),
      .bresp(m_bresp[d]), .bvalid(m_bvalid[d]), .bready(m_bready[d]),
      .araddr(m_araddr[d]), .arvalid(m_arvalid[d]), .arready(m_arready[d]),
      .rdata(m_rdata[d]), .rresp(m_rresp[d]), .rvalid(m_rvalid[d]), .rready(m_rready[d]));
  end

  // ---------------- Bridge Interconnect ----------------
  axil_xbar #(.NM(NM), .NS(NS), .AW(32), .DW(64), .SLV_BASE(SBASE), .SLV_SIZE(SSIZE)) u_xbar (
    .clk, .rst_n,
    .m_awaddr, .m_awvalid, .m_awready, .m_wdata, .m_wstrb, .m_wvalid, .m_wready,
    .m_bresp, .m_bvalid, .m_bready, .m_araddr, .m_arvalid, .m_arready,
    .m_rdata, .m_rresp, .m_rvalid, .m_rready,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready);

  // ---------------- SRAMs ----------------
  for (genvar m = 0; m < 2; m++) begin : g_sram
    axil_sram #(.DW(64), .SIZE_BYTES(SRAM_BYTES)) u_sram (
      .clk, .rst_n,
      .awaddr(s_awaddr[m]), .awvalid(s_awvalid[m]), .awready(s_awready[m]),
      .wdata(s_wdata[m]), .wstrb(s_wstrb[m]), .wvalid(s_wvalid[m]), .wready(s_wready[m]),
      .bresp(s_bresp[m]), .bvalid(s_bvalid[m]), .bready(s_bready[m]),
      .araddr(s_araddr[m]), .arvalid(s_arvalid[m]), .arready(s_arready[m]),
      .rdata(s_rdata[m]), .rresp(s_rresp[m]), .rvalid(s_rvalid[m]), .rready(s_rready[m]));
  end

  // ---------------- Command FIFO ----------------
  dfi_cmd_t cmd;
  logic cmd_valid, cmd_ready;
  cmd_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .awaddr(s_awaddr[2]), .awvalid(s_awvalid[2]), .awready(s_awready[2]),
    .wdata(s_wdata[2]), .wstrb(s_wstrb[2]), .wvalid(s_wvalid[2]), .wready(s_wready[2]),
    .bresp(s_bresp[2]), .bvalid(s_bvalid[2]), .bready(s_bready[2]),
    .araddr(s_araddr[2]), .arvalid(s_arvalid[2]), .arready(s_arready[2]),
    .rdata(s_rdata[2]), .rresp(s_rresp[2]), .rvalid(s_rvalid[2]), .rready(s_rready[2]),
    .cmd, .cmd_valid, .cmd_ready, .level(fifo_level));

  // ---------------- Bridge Control Unit with Data Buffer ----------------
  bridge_ctrl #(.SLOTS(BUF_SLOTS)) u_bcu (
    .clk, .rst_n, .en(bcu_en),
    .cmd, .cmd_valid, .cmd_ready,
    .dfi_o, .dfi_i,
    .busy(bcu_busy), .late(bcu_late), .n_cmds(bcu_n_cmds),
    .awaddr(s_awaddr[3]), .awvalid(s_awvalid[3]), .awready(s_awready[3]),
    .wdata(s_wdata[3]), .wstrb(s_wstrb[3]), .wvalid(s_wvalid[3]), .wready(s_wready[3]),
    .bresp(s_bresp[3]), .bvalid(s_bvalid[3]), .bready(s_bready[3]),
    .araddr(s_araddr[3]), .arvalid(s_arvalid[3]), .arready(s_arready[3]),
    .rdata(s_rdata[3]), .rresp(s_rresp[3]), .rvalid(s_rvalid[3]), .rready(s_rready[3]));
endmodule
