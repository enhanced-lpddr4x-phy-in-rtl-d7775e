// spi_master: SPI master for off-chip sensors (mode 0, 8-bit frames, MSB
// first).
//
// The paper names an SPI unit for off-chip sensors; its insides are this
// design's.  SCLK idles low; MOSI changes on the falling edge and MISO is
// sampled on the rising edge.  Each SCLK half period lasts DIV clock cycles.
//
// Registers (peripheral bus, byte offsets):
//   0x0 DATA    write: start a transfer of the low byte (ignored while busy);
//               read: the byte received by the last transfer
//   0x4 STATUS  read: bit 0 busy
//   0x8 DIV     clock cycles per SCLK half period (reset value DIV_RESET)
//   0xC CS      chip-select lines, bit i drives cs_n[i] (reset: all high)
// Every access is answered in the cycle it is made.
module spi_master #(
  parameter int unsigned NCS = 1,
  parameter int unsigned DIV_RESET = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  phy_pkg::pbus_req_t preq,
  output phy_pkg::pbus_rsp_t prsp,
  output logic sclk,
  output logic mosi,
  input  logic miso,
  output logic [NCS-1:0] cs_n
);
  logic [15:0] div, cnt;
  logic [7:0]  tx_sh, rx_sh, rx_data;
  logic [3:0]  edges;   // SCLK edges left in the frame (16 per byte)
  logic        busy;

  logic wr;
  assign wr = preq.req && preq.we;
  assign mosi = tx_sh[7];

  always_comb begin
    prsp.ready = preq.req;
    prsp.err = 1'b0;
    case (preq.addr[3:2])
      2'd0: prsp.rdata = {24'd0, rx_data};
      2'd1: prsp.rdata = {31'd0, busy};
      2'd2: prsp.rdata = {16'd0, div};
      default: prsp.rdata = 32'(cs_n);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div <= 16'(DIV_RESET); cnt <= '0; tx_sh <= '0; rx_sh <= '0; rx_data <= '0;
      edges <= '0; busy <= 1'b0; sclk <= 1'b0; cs_n <= '1;
    end else begin
      if (wr && preq.addr[3:2] == 2'd2) div <= (preq.wdata[15:0] == 0) ? 16'd1 : preq.wdata[15:0];
      if (wr && preq.addr[3:2] == 2'd3) cs_n <= preq.wdata[NCS-1:0];
      if (!busy) begin
        if (wr && preq.addr[3:2] == 2'd0) begin
          tx_sh <= preq.wdata[7:0];
          busy <= 1'b1; edges <= 4'd15; cnt <= div - 1'b1;
        end
      end else if (cnt != 0) begin
        cnt <= cnt - 1'b1;
      end else begin
        cnt <= div - 1'b1;
        sclk <= !sclk;
        if (!sclk) begin
          rx_sh <= {rx_sh[6:0], miso};          // rising edge: sample
        end else begin
          tx_sh <= {tx_sh[6:0], 1'b0};          // falling edge: shift out
        end
        if (edges == 0) begin
          busy <= 1'b0;
          rx_data <= rx_sh;
        end else edges <= edges - 1'b1;
      end
    end
  end
endmodule
