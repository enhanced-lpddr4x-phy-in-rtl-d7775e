// tb_periph_xbar: three peripheral models answer with their own index in
// the read data; checks that each access reaches exactly the peripheral its
// address selects, that the others see no request, and that an unused index
// is answered with err.
`timescale 1ns/1ps
module tb_periph_xbar;
  import phy_pkg::*;
  int checks = 0, failures = 0;
  pbus_req_t preq, sreq [3]; pbus_rsp_t prsp, srsp [3];
  periph_xbar #(.NP(3)) dut (.*);
  always_comb for (int i = 0; i < 3; i++) begin
    srsp[i].ready = sreq[i].req; srsp[i].err = 1'b0;
    srsp[i].rdata = {8'(i), 8'h00, sreq[i].addr};
  end
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    preq = '0;
    for (int k = 0; k < 40; k++) begin
      int sel; logic [15:0] a;
      sel = $urandom % 5;
      a = {4'(sel), 12'($urandom)};
      preq.req = 1; preq.we = k[0]; preq.addr = a; preq.wdata = $urandom;
      #1;
      if (sel < 3) begin
        check(prsp.ready && !prsp.err && prsp.rdata == {8'(sel), 8'h00, a}, $sformatf("routed to %0d", sel));
        for (int i = 0; i < 3; i++)
          check(sreq[i].req == (i == sel) && (i != sel || sreq[i].wdata == preq.wdata), "request only to target");
      end else begin
        check(prsp.ready && prsp.err, "unused index -> err");
        for (int i = 0; i < 3; i++) check(!sreq[i].req, "no request on unused index");
      end
      preq.req = 0; #1;
      check(!prsp.ready, "no answer without request");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
