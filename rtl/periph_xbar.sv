// periph_xbar: the Peripheral Interconnect.
//
// Routes one peripheral-bus access to one of NP peripherals by address bits
// [15:12] (4 kB per peripheral: 0 UART, 1 SPI, 2 configuration and status
// registers in this design).  An access to an index with no peripheral is
// answered at once with err.  The paper only names this block and shows its
// three peripherals; the decoding is this design's.
module periph_xbar #(
  parameter int unsigned NP = 3
) (
  input  phy_pkg::pbus_req_t preq,
  output phy_pkg::pbus_rsp_t prsp,
  output phy_pkg::pbus_req_t sreq [NP],
  input  phy_pkg::pbus_rsp_t srsp [NP]
);
  logic [3:0] sel;
  assign sel = preq.addr[15:12];
  always_comb begin
    prsp = '0;
    for (int i = 0; i < NP; i++) begin
      sreq[i] = preq;
      sreq[i].req = preq.req && (sel == 4'(i));
      if (sel == 4'(i)) prsp = srsp[i];
    end
    if (int'(sel) >= NP) begin
      prsp.ready = preq.req;
      prsp.err   = 1'b1;
    end
  end
endmodule
