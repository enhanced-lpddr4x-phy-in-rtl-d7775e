// axil_dma: single-channel DMA controller with an AXI4-Lite master port.
//
// The paper places one DMA on the Memory Interconnect and two inside the DFI
// Bridge, where they move DFI commands from the bridge SRAMs into the Command
// FIFO and data between the SRAMs and the Data Buffer while the Bridge
// Control Unit runs.  It gives their role, not their insides.  This engine
// keeps a read and a write in flight at the same time: a read side fetches
// words into a two-entry buffer while a write side stores the oldest one, so
// on the crossbar a word costs about one read or one write time (3 cycles),
// not their sum.
//
// A transfer is programmed through the cfg struct (source, destination, word
// count, address increment flags) and started by cfg.start.  With dst_inc
// cleared every word goes to the same address, which is how the Command FIFO
// is fed; a full FIFO holds off the write and so stalls the DMA without
// losing words.  status.busy is high until the last write response;
// status.done then rises and stays until the next start.  An error response
// sets status.error; the transfer still runs to its end.  A start while busy
// is ignored.
module axil_dma #(
  parameter int unsigned DW = 64,
  parameter int unsigned AW = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  phy_pkg::dma_cfg_t    cfg,
  output phy_pkg::dma_status_t status,
  // AXI4-Lite master
  output logic [AW-1:0]   awaddr,
  output logic            awvalid,
  input  logic            awready,
  output logic [DW-1:0]   wdata,
  output logic [DW/8-1:0] wstrb,
  output logic            wvalid,
  input  logic            wready,
  input  logic [1:0]      bresp,
  input  logic            bvalid,
  output logic            bready,
  output logic [AW-1:0]   araddr,
  output logic            arvalid,
  input  logic            arready,
  input  logic [DW-1:0]   rdata,
  input  logic [1:0]      rresp,
  input  logic            rvalid,
  output logic            rready
);
  localparam logic [AW-1:0] STEP = AW'(DW / 8);

  logic [AW-1:0] src, dst;
  logic [15:0]   rd_left, wr_left;
  logic          src_inc, dst_inc;
  logic          rd_busy, ar_done, aw_done, w_done;
  logic          buf_full, buf_empty, buf_push, buf_pop;
  logic [DW-1:0] buf_head;

  sync_fifo #(.W(DW), .DEPTH(2)) u_buf (
    .clk, .rst_n, .push(buf_push), .din(rdata), .pop(buf_pop),
    .dout(buf_head), .empty(buf_empty), .full(buf_full));

  // read side: one read at a time, only when the buffer has room for it
  assign araddr  = src;
  assign arvalid = rd_busy && !ar_done;
  assign rready  = rd_busy && ar_done;
  assign buf_push = rvalid && rready;

  // write side: store the oldest buffered word
  assign awaddr  = dst;
  assign wdata   = buf_head;
  assign wstrb   = '1;
  assign awvalid = !buf_empty && (wr_left != 0) && !aw_done;
  assign wvalid  = !buf_empty && (wr_left != 0) && !w_done;
  assign bready  = 1'b1;
  assign buf_pop = bvalid;

  assign status.busy = (wr_left != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src <= '0; dst <= '0; rd_left <= '0; wr_left <= '0;
      src_inc <= 1'b0; dst_inc <= 1'b0;
      rd_busy <= 1'b0; ar_done <= 1'b0; aw_done <= 1'b0; w_done <= 1'b0;
      status.done <= 1'b0;
      status.error <= 1'b0;
    end else begin
      if (cfg.start && wr_left == 0) begin
        src <= AW'(cfg.src); dst <= AW'(cfg.dst);
        rd_left <= cfg.len; wr_left <= cfg.len;
        src_inc <= cfg.src_inc; dst_inc <= cfg.dst_inc;
        status.done <= (cfg.len == 0);
        status.error <= 1'b0;
      end else begin
        // read side
        if (!rd_busy) begin
          if (rd_left != 0 && !buf_full) begin
            rd_busy <= 1'b1;
            ar_done <= 1'b0;
          end
        end else begin
          if (arvalid && arready) ar_done <= 1'b1;
          if (rvalid && rready) begin
            rd_busy <= 1'b0;
            rd_left <= rd_left - 1'b1;
            if (src_inc) src <= src + STEP;
            if (rresp != phy_pkg::RESP_OKAY) status.error <= 1'b1;
          end
        end
        // write side
        if (awvalid && awready) aw_done <= 1'b1;
        if (wvalid && wready) w_done <= 1'b1;
        if (bvalid) begin
          aw_done <= 1'b0;
          w_done <= 1'b0;
          wr_left <= wr_left - 1'b1;
          if (dst_inc) dst <= dst + STEP;
          if (bresp != phy_pkg::RESP_OKAY) status.error <= 1'b1;
          if (wr_left == 16'd1) status.done <= 1'b1;
        end
      end
    end
  end

  // the buffer never overflows: a read is only started with room for it
  assert property (@(posedge clk) disable iff (!rst_n) buf_push |-> !buf_full);
endmodule
