// Peripheral-bus master tasks shared by the testbenches.  Included inside a
// testbench module that declares clk, preq and prsp.  The request is held
// until the peripheral answers with ready.
task automatic pb_write(input logic [15:0] a, input logic [31:0] d);
  @(negedge clk); preq.req = 1; preq.we = 1; preq.addr = a; preq.wdata = d;
  #0.2; while (!prsp.ready) begin @(negedge clk); #0.2; end
  @(posedge clk); @(negedge clk); preq.req = 0; preq.we = 0;
endtask

task automatic pb_read(input logic [15:0] a, output logic [31:0] d);
  @(negedge clk); preq.req = 1; preq.we = 0; preq.addr = a;
  #0.2; while (!prsp.ready) begin @(negedge clk); #0.2; end
  d = prsp.rdata;
  @(posedge clk); @(negedge clk); preq.req = 0;
endtask
