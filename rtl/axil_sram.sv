// axil_sram: SRAM with an AXI4-Lite slave port.
//
// Models the compiled SRAM macros of the subsystem: the 64 kB main memory on
// the 32-bit Memory Interconnect (DW = 32) and the two 16 kB memories on the
// 64-bit Bridge Interconnect (DW = 64).  The sizes are the paper's; the
// port behaviour is this design's.  The array is written as a plain
// memory with byte enables so that synthesis can map it to a macro.
//
// A write is taken when AW and W are both valid and no B response is
// pending; B follows one cycle later.  A read is taken when no R response is
// pending; R follows one cycle later.  Addresses are taken modulo the size.
module axil_sram #(
  parameter int unsigned DW = 32,
  parameter int unsigned SIZE_BYTES = 65536,
  parameter int unsigned AW = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [AW-1:0]   awaddr,
  input  logic            awvalid,
  output logic            awready,
  input  logic [DW-1:0]   wdata,
  input  logic [DW/8-1:0] wstrb,
  input  logic            wvalid,
  output logic            wready,
  output logic [1:0]      bresp,
  output logic            bvalid,
  input  logic            bready,
  input  logic [AW-1:0]   araddr,
  input  logic            arvalid,
  output logic            arready,
  output logic [DW-1:0]   rdata,
  output logic [1:0]      rresp,
  output logic            rvalid,
  input  logic            rready
);
  localparam int unsigned NB = DW / 8;
  localparam int unsigned WORDS = SIZE_BYTES / NB;
  localparam int unsigned IW = $clog2(WORDS);
  localparam int unsigned OW = $clog2(NB);

  logic [DW-1:0] mem [WORDS];

  logic do_wr, do_rd;
  logic [IW-1:0] widx, ridx;
  assign widx = awaddr[OW +: IW];
  assign ridx = araddr[OW +: IW];
  assign do_wr = awvalid && wvalid && (!bvalid || bready);
  assign awready = do_wr;
  assign wready  = do_wr;
  assign do_rd = arvalid && (!rvalid || rready);
  assign arready = do_rd;
  assign bresp = phy_pkg::RESP_OKAY;
  assign rresp = phy_pkg::RESP_OKAY;

  always_ff @(posedge clk) begin
    if (do_wr)
      for (int b = 0; b < NB; b++)
        if (wstrb[b]) mem[widx][b*8 +: 8] <= wdata[b*8 +: 8];
    if (do_rd) rdata <= mem[ridx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid <= 1'b0;
      rvalid <= 1'b0;
    end else begin
      if (do_wr) bvalid <= 1'b1;
      else if (bready) bvalid <= 1'b0;
      if (do_rd) rvalid <= 1'b1;
      else if (rready) rvalid <= 1'b0;
    end
  end

  // AXI rule: a response stays valid, and read data stable, until accepted.
  assert property (@(posedge clk) disable iff (!rst_n) bvalid && !bready |=> bvalid);
  assert property (@(posedge clk) disable iff (!rst_n) rvalid && !rready |=> rvalid && $stable(rdata));
endmodule
