// cmd_fifo: the Command FIFO of the DFI Bridge.
//
// Software or a DMA writes 64-bit DFI commands into it over the Bridge
// Interconnect; the Bridge Control Unit pops them in order.  The paper names
// the FIFO and its 64-bit entries; the depth and the bus behaviour are this
// design's.
//
// A write with all eight byte strobes set pushes the word.  A write of only
// the low four bytes (a 32-bit master) is held in a staging register and a
// following write of only the high four bytes pushes {high, staged low}.
// While the FIFO is full the write is not accepted (AWREADY/WREADY low), so
// a DMA feeding it stalls instead of losing commands.  A read returns the
// fill level in the low bits.  The pop side is a valid/ready stream whose
// head is visible without delay.
module cmd_fifo #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned AW = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [AW-1:0] awaddr,
  input  logic        awvalid,
  output logic        awready,
  input  logic [63:0] wdata,
  input  logic [7:0]  wstrb,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready,
  input  logic [AW-1:0] araddr,
  input  logic        arvalid,
  output logic        arready,
  output logic [63:0] rdata,
  output logic [1:0]  rresp,
  output logic        rvalid,
  input  logic        rready,
  // command stream to the Bridge Control Unit
  output phy_pkg::dfi_cmd_t cmd,
  output logic        cmd_valid,
  input  logic        cmd_ready,
  output logic [$clog2(DEPTH):0] level
);
  localparam int unsigned PW = $clog2(DEPTH);

  logic [63:0] q [DEPTH];
  logic [PW-1:0] wp, rp;
  logic [PW:0]   cnt;
  logic [31:0]   staged;
  logic full, push, pop, take;
  logic [63:0] push_data;

  assign full = (cnt == (PW+1)'(DEPTH));
  assign level = cnt;
  // a write whose strobes are low-half only never pushes, so it never waits
  assign take = awvalid && wvalid && (!bvalid || bready) && (!full || wstrb == 8'h0F);
  assign awready = take;
  assign wready  = take;
  assign push = take && wstrb[7:4] != 4'h0;
  assign push_data = (wstrb == 8'hF0) ? {wdata[63:32], staged} : wdata;
  assign pop = cmd_valid && cmd_ready;
  assign cmd_valid = (cnt != 0);
  assign cmd = phy_pkg::dfi_cmd_t'(q[rp]);
  assign bresp = phy_pkg::RESP_OKAY;
  assign rresp = phy_pkg::RESP_OKAY;
  assign arready = arvalid && (!rvalid || rready);

  always_ff @(posedge clk) begin
    if (push) q[wp] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0; staged <= '0;
      bvalid <= 1'b0; rvalid <= 1'b0; rdata <= '0;
    end else begin
      if (take && wstrb == 8'h0F) staged <= wdata[31:0];
      if (push) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (PW+1)'(push) - (PW+1)'(pop);
      if (take) bvalid <= 1'b1;
      else if (bready) bvalid <= 1'b0;
      if (arready) begin
        rvalid <= 1'b1;
        rdata <= 64'(cnt);
      end else if (rready) rvalid <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
endmodule
