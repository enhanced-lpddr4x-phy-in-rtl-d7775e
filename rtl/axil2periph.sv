// axil2periph: the Bus Bridge from the 32-bit AXI4-Lite Memory Interconnect
// to the lightweight peripheral bus.
//
// The paper states that the peripheral bus does not support concurrent read
// and write accesses; the bridge therefore serialises them.  When both a read
// and a write are waiting, the one that did not go last is taken
// (alternating priority, this design's choice).  The access is put on the
// peripheral bus (req held until ready) and the peripheral's answer becomes
// the B or R response; err maps to SLVERR.  Only address bits [15:0] are
// passed on.
module axil2periph (
  input  logic clk,
  input  logic rst_n,
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
  output phy_pkg::pbus_req_t preq,
  input  phy_pkg::pbus_rsp_t prsp
);
  import phy_pkg::*;
  typedef enum logic [2:0] {S_IDLE, S_WR, S_RD, S_B, S_R} state_e;
  state_e state;
  logic last_wr;
  logic [15:0] addr_q;
  logic [31:0] wdata_q;

  logic wr_ok, rd_ok, pick_wr, pick_rd;
  assign wr_ok = awvalid && wvalid;
  assign rd_ok = arvalid;
  assign pick_wr = (state == S_IDLE) && wr_ok && (!rd_ok || !last_wr);
  assign pick_rd = (state == S_IDLE) && rd_ok && !pick_wr;
  assign awready = pick_wr;
  assign wready  = pick_wr;
  assign arready = pick_rd;

  assign preq.req   = (state == S_WR) || (state == S_RD);
  assign preq.we    = (state == S_WR);
  assign preq.addr  = addr_q;
  assign preq.wdata = wdata_q;
  assign bvalid = (state == S_B);
  assign rvalid = (state == S_R);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; last_wr <= 1'b0; addr_q <= '0; wdata_q <= '0;
      bresp <= RESP_OKAY; rresp <= RESP_OKAY; rdata <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          if (pick_wr) begin
            state <= S_WR; last_wr <= 1'b1; addr_q <= awaddr[15:0];
            // sub-word writes keep the bytes that are not strobed at zero
            for (int b = 0; b < 4; b++) wdata_q[b*8 +: 8] <= wstrb[b] ? wdata[b*8 +: 8] : 8'h00;
          end else if (pick_rd) begin
            state <= S_RD; last_wr <= 1'b0; addr_q <= araddr[15:0];
          end
        end
        S_WR: if (prsp.ready) begin
          state <= S_B; bresp <= prsp.err ? RESP_SLVERR : RESP_OKAY;
        end
        S_RD: if (prsp.ready) begin
          state <= S_R; rresp <= prsp.err ? RESP_SLVERR : RESP_OKAY; rdata <= prsp.rdata;
        end
        S_B: if (bready) state <= S_IDLE;
        S_R: if (rready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(bvalid && rvalid));
endmodule
