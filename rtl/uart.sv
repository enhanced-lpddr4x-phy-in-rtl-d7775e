// uart: serial port for off-chip communication (8 data bits, no parity,
// 1 stop bit).
//
// The paper names a UART for talking to off-chip sensors; its insides are
// this design's.  One byte is held in each direction.
//
// Registers (peripheral bus, byte offsets):
//   0x0 TXDATA  write: send the low byte (ignored while busy)
//   0x4 RXDATA  read: {valid, byte} in bits [8:0]; reading clears valid
//   0x8 STATUS  read: bit 0 tx busy, bit 1 rx valid, bit 2 rx overrun (a
//               byte arrived while the previous one was unread; cleared by
//               reading RXDATA), bit 3 framing error of the last byte
//   0xC DIV     clock cycles per bit (reset value DIV_RESET)
// The receiver samples each bit in its middle, DIV/2 cycles after the start
// edge plus whole bit times; rx passes through a two-flop synchroniser.
// Every access is answered in the cycle it is made.
module uart #(
  parameter int unsigned DIV_RESET = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  phy_pkg::pbus_req_t preq,
  output phy_pkg::pbus_rsp_t prsp,
  output logic tx,
  input  logic rx
);
  logic [15:0] div;
  // ---- transmitter ----
  logic [9:0]  tx_sh;
  logic [3:0]  tx_bits;
  logic [15:0] tx_cnt;
  logic        tx_busy;
  // ---- receiver ----
  logic [2:0]  rx_sync;
  logic        rx_s;
  logic        rx_act;
  logic [3:0]  rx_bits;
  logic [15:0] rx_cnt;
  logic [8:0]  rx_sh;
  logic [7:0]  rx_data;
  logic        rx_valid, rx_ovr, rx_ferr;

  logic wr, rd;
  assign wr = preq.req && preq.we;
  assign rd = preq.req && !preq.we;
  assign rx_s = rx_sync[1];

  always_comb begin
    prsp.ready = preq.req;
    prsp.err = 1'b0;
    case (preq.addr[3:2])
      2'd0: prsp.rdata = {31'd0, tx_busy};
      2'd1: prsp.rdata = {23'd0, rx_valid, rx_data};
      2'd2: prsp.rdata = {28'd0, rx_ferr, rx_ovr, rx_valid, tx_busy};
      default: prsp.rdata = {16'd0, div};
    endcase
  end

  assign tx = tx_sh[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div <= 16'(DIV_RESET);
      tx_sh <= '1; tx_bits <= '0; tx_cnt <= '0; tx_busy <= 1'b0;
      rx_sync <= '1; rx_act <= 1'b0; rx_bits <= '0; rx_cnt <= '0; rx_sh <= '0;
      rx_data <= '0; rx_valid <= 1'b0; rx_ovr <= 1'b0; rx_ferr <= 1'b0;
    end else begin
      if (wr && preq.addr[3:2] == 2'd3) div <= (preq.wdata[15:0] < 16'd2) ? 16'd2 : preq.wdata[15:0];
      // transmit
      if (!tx_busy) begin
        if (wr && preq.addr[3:2] == 2'd0) begin
          tx_sh <= {1'b1, preq.wdata[7:0], 1'b0};
          tx_bits <= 4'd10; tx_cnt <= div - 1'b1; tx_busy <= 1'b1;
        end
      end else if (tx_cnt != 0) begin
        tx_cnt <= tx_cnt - 1'b1;
      end else begin
        tx_sh <= {1'b1, tx_sh[9:1]};
        tx_cnt <= div - 1'b1;
        tx_bits <= tx_bits - 1'b1;
        if (tx_bits == 4'd1) tx_busy <= 1'b0;
      end
      // receive
      rx_sync <= {rx_sync[1:0], rx};
      if (rd && preq.addr[3:2] == 2'd1) begin
        rx_valid <= 1'b0;
        rx_ovr <= 1'b0;
      end
      if (!rx_act) begin
        if (rx_sync[2] && !rx_s) begin   // falling edge: start bit
          rx_act <= 1'b1; rx_bits <= 4'd9; rx_cnt <= (div >> 1) - 1'b1;
        end
      end else if (rx_cnt != 0) begin
        rx_cnt <= rx_cnt - 1'b1;
      end else begin
        rx_cnt <= div - 1'b1;
        if (rx_bits == 4'd9 && rx_s) begin
          rx_act <= 1'b0;                // start bit gone: glitch
        end else if (rx_bits == 4'd0) begin
          rx_act <= 1'b0;
          rx_data <= rx_sh[8:1];
          rx_ferr <= !rx_s;
          if (rx_valid && !(rd && preq.addr[3:2] == 2'd1)) rx_ovr <= 1'b1;
          rx_valid <= 1'b1;
        end else begin
          rx_sh <= {rx_s, rx_sh[8:1]};
          rx_bits <= rx_bits - 1'b1;
        end
      end
    end
  end
endmodule
