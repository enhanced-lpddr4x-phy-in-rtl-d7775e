// csr_regs: Configuration and Status Registers.
//
// The paper says these registers control and monitor all internal modules of
// the PHY; which fields exist is this design's choice.  They hold the DFI
// MUX select, the Bridge Control Unit enable, the programming of the three
// DMA channels (channel 0 on the Memory Interconnect, channels 1 and 2 inside
// the DFI Bridge), and NPHY general-purpose control and status words for the
// PHY slices, whose contents the paper does not describe.
//
// Map (peripheral bus, byte offsets):
//   0x000 ID        read-only, ID_VALUE
//   0x004 CTRL      bit 0 dfi_sel (1: DFI Bridge drives the PHY), bit 1 bcu_en
//   0x008 STATUS    bit 0 bcu_busy, bit 1 bcu_late, bit 2 dfi_sel in force,
//                   bits [15:8] command FIFO level
//   0x00C NCMDS     commands issued by the Bridge Control Unit
//   0x040 + 0x20*k  DMA k: +0x0 SRC, +0x4 DST, +0x8 LEN, +0xC CTRL
//                   (bit 0 start, write-only pulse; bit 1 src_inc;
//                   bit 2 dst_inc), +0x10 STATUS (bit 0 busy, 1 done, 2 error)
//   0x100 + 4*i     PHY control word i (read/write)
//   0x180 + 4*i     PHY status word i (read-only)
// Unmapped offsets read zero and ignore writes.  Accesses are answered in the
// cycle they are made.
module csr_regs #(
  parameter int unsigned NDMA = 3,
  parameter int unsigned NPHY = 8,
  parameter logic [31:0] ID_VALUE = 32'h4C50_3458   // "LP4X"
) (
  input  logic clk,
  input  logic rst_n,
  input  phy_pkg::pbus_req_t preq,
  output phy_pkg::pbus_rsp_t prsp,
  output logic                 dfi_sel,
  output logic                 bcu_en,
  input  logic                 dfi_sel_active,
  input  logic                 bcu_busy,
  input  logic                 bcu_late,
  input  logic [7:0]           fifo_level,
  input  logic [31:0]          bcu_n_cmds,
  output phy_pkg::dma_cfg_t    dma_cfg    [NDMA],
  input  phy_pkg::dma_status_t dma_status [NDMA],
  output logic [31:0]          phy_ctrl   [NPHY],
  input  logic [31:0]          phy_status [NPHY]
);
  logic [11:0] a;
  logic wr;
  assign a = {preq.addr[11:2], 2'b00};
  assign wr = preq.req && preq.we;

  always_comb begin
    prsp.ready = preq.req;
    prsp.err = 1'b0;
    prsp.rdata = '0;
    if (a == 12'h000) prsp.rdata = ID_VALUE;
    if (a == 12'h004) prsp.rdata = {30'd0, bcu_en, dfi_sel};
    if (a == 12'h008) prsp.rdata = {16'd0, fifo_level, 5'd0, dfi_sel_active, bcu_late, bcu_busy};
    if (a == 12'h00C) prsp.rdata = bcu_n_cmds;
    for (int k = 0; k < NDMA; k++) begin
      if (a == 12'(12'h040 + 32*k)) prsp.rdata = dma_cfg[k].src;
      if (a == 12'(12'h044 + 32*k)) prsp.rdata = dma_cfg[k].dst;
      if (a == 12'(12'h048 + 32*k)) prsp.rdata = {16'd0, dma_cfg[k].len};
      if (a == 12'(12'h04C + 32*k)) prsp.rdata = {29'd0, dma_cfg[k].dst_inc, dma_cfg[k].src_inc, 1'b0};
      if (a == 12'(12'h050 + 32*k))
        prsp.rdata = {29'd0, dma_status[k].error, dma_status[k].done, dma_status[k].busy};
    end
    for (int i = 0; i < NPHY; i++) begin
      if (a == 12'(12'h100 + 4*i)) prsp.rdata = phy_ctrl[i];
      if (a == 12'(12'h180 + 4*i)) prsp.rdata = phy_status[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dfi_sel <= 1'b0;
      bcu_en <= 1'b0;
      for (int k = 0; k < NDMA; k++) dma_cfg[k] <= '0;
      for (int i = 0; i < NPHY; i++) phy_ctrl[i] <= '0;
    end else begin
      for (int k = 0; k < NDMA; k++) dma_cfg[k].start <= 1'b0;
      if (wr) begin
        if (a == 12'h004) begin
          dfi_sel <= preq.wdata[0];
          bcu_en <= preq.wdata[1];
        end
        for (int k = 0; k < NDMA; k++) begin
          if (a == 12'(12'h040 + 32*k)) dma_cfg[k].src <= preq.wdata;
          if (a == 12'(12'h044 + 32*k)) dma_cfg[k].dst <= preq.wdata;
          if (a == 12'(12'h048 + 32*k)) dma_cfg[k].len <= preq.wdata[15:0];
          if (a == 12'(12'h04C + 32*k)) begin
            dma_cfg[k].start   <= preq.wdata[0];
            dma_cfg[k].src_inc <= preq.wdata[1];
            dma_cfg[k].dst_inc <= preq.wdata[2];
          end
        end
        for (int i = 0; i < NPHY; i++)
          if (a == 12'(12'h100 + 4*i)) phy_ctrl[i] <= preq.wdata;
      end
    end
  end
endmodule
