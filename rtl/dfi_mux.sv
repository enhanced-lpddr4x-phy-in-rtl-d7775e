// dfi_mux: selects which source drives the DFI of the PHY slices: the
// external memory controller (DFI 4.0 port of the PHY) or the DFI Bridge.
//
// The paper names the DFI MUX in the Command/Address Slice; the switching
// rule is this design's.  The requested select (from the configuration
// registers) takes effect only in a cycle in which the source currently
// selected drives no chip select and no write or read data enable, so that
// a command or burst is never cut in two.  Read data from the PHY goes to
// both sources, with rddata_valid only to the selected one.  `active` tells
// which source is in force (1: DFI Bridge).  Purely combinational apart from
// the select register.
module dfi_mux (
  input  logic clk,
  input  logic rst_n,
  input  logic sel_req,
  output logic active,
  input  phy_pkg::dfi_out_t mc_o,
  output phy_pkg::dfi_in_t  mc_i,
  input  phy_pkg::dfi_out_t br_o,
  output phy_pkg::dfi_in_t  br_i,
  output phy_pkg::dfi_out_t phy_o,
  input  phy_pkg::dfi_in_t  phy_i
);
  logic cur_idle;
  assign cur_idle = active ? (br_o.cs == '0 && !br_o.wrdata_en && !br_o.rddata_en)
                           : (mc_o.cs == '0 && !mc_o.wrdata_en && !mc_o.rddata_en);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) active <= 1'b0;
    else if (sel_req != active && cur_idle) active <= sel_req;
  end

  always_comb begin
    phy_o = active ? br_o : mc_o;
    mc_i = phy_i;
    br_i = phy_i;
    mc_i.rddata_valid = phy_i.rddata_valid && !active;
    br_i.rddata_valid = phy_i.rddata_valid && active;
  end

  // The selected source never changes while it is in the middle of traffic.
  assert property (@(posedge clk) disable iff (!rst_n) !cur_idle |=> active == $past(active));
endmodule
