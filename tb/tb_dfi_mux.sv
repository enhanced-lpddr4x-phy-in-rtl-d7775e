// tb_dfi_mux: two DFI sources with distinct traffic; checks that the
// selected one reaches the PHY, that a requested switch waits while the
// current source has a chip select or data enable active, and that read
// data valid goes only to the selected source.
`timescale 1ns/1ps
module tb_dfi_mux;
  import phy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  logic sel_req, active;
  dfi_out_t mc_o, br_o, phy_o; dfi_in_t mc_i, br_i, phy_i;
  dfi_mux dut (.*);
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int waited;
    sel_req = 0; mc_o = '0; br_o = '0; phy_i = '0;
    mc_o.wrdata = 128'h1111; br_o.wrdata = 128'h2222;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    check(!active && phy_o.wrdata == 128'h1111, "controller selected after reset");
    phy_i.rddata_valid = 1; phy_i.rddata = 128'h77; #0.1;
    check(mc_i.rddata_valid && !br_i.rddata_valid && br_i.rddata == 128'h77, "read valid to controller only");
    phy_i.rddata_valid = 0;
    // controller busy with a burst: the switch must wait
    mc_o.wrdata_en = 1; sel_req = 1; waited = 0;
    repeat (5) begin @(negedge clk); if (!active) waited++; end
    check(waited == 5, "switch held during controller burst");
    mc_o.wrdata_en = 0; mc_o.cs[0] = 2'b01;
    @(negedge clk); check(!active, "switch held during chip select");
    mc_o.cs = '0;
    @(negedge clk); check(active, "switch when controller idle");
    check(phy_o.wrdata == 128'h2222, "bridge drives the PHY");
    phy_i.rddata_valid = 1; #0.1;
    check(br_i.rddata_valid && !mc_i.rddata_valid, "read valid to bridge only");
    phy_i.rddata_valid = 0;
    br_o.rddata_en = 1; sel_req = 0;
    @(negedge clk); check(active, "switch back held during bridge read enable");
    br_o.rddata_en = 0;
    @(negedge clk); check(!active, "switch back when bridge idle");
    // random traffic and random select requests against a reference model
    begin
      logic ref_act; int switches;
      ref_act = active; switches = 0;
      repeat (400) begin
        logic idle;
        mc_o.cs[0] = ($urandom_range(3) == 0) ? 2'b01 : 2'b00; mc_o.wrdata_en = ($urandom_range(3) == 0);
        mc_o.rddata_en = ($urandom_range(5) == 0); mc_o.wrdata = {$urandom, $urandom, $urandom, $urandom};
        br_o.cs[1] = ($urandom_range(3) == 0) ? 2'b01 : 2'b00; br_o.wrdata_en = ($urandom_range(3) == 0);
        br_o.rddata_en = ($urandom_range(5) == 0); br_o.wrdata = {$urandom, $urandom, $urandom, $urandom};
        if ($urandom_range(7) == 0) sel_req = !sel_req;
        phy_i.rddata_valid = 1'($urandom_range(1)); phy_i.rddata = {$urandom, $urandom, $urandom, $urandom};
        #0.1;
        check(phy_o == (ref_act ? br_o : mc_o), "PHY driven by the selected source");
        check(mc_i.rddata_valid == (phy_i.rddata_valid && !ref_act) && br_i.rddata_valid == (phy_i.rddata_valid && ref_act)
              && mc_i.rddata == phy_i.rddata && br_i.rddata == phy_i.rddata, "read data routing");
        idle = ref_act ? (br_o.cs == '0 && !br_o.wrdata_en && !br_o.rddata_en)
                       : (mc_o.cs == '0 && !mc_o.wrdata_en && !mc_o.rddata_en);
        @(negedge clk);
        if (sel_req != ref_act && idle) begin ref_act = sel_req; switches++; end
        check(active == ref_act, "select follows the idle rule");
      end
      check(switches >= 5, "random phase switched several times");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
