// AXI4-Lite master tasks shared by the testbenches.  Included inside a
// testbench module that declares clk, awaddr, awvalid, awready, wdata, wstrb,
// wvalid, wready, bresp, bvalid, bready, araddr, arvalid, arready, rdata,
// rresp, rvalid and rready.  AW and W are presented together; the tasks
// return the response code.  Data arguments are 64 bits wide and are
// truncated to the bus width.
task automatic axil_write(input logic [31:0] a, input logic [63:0] d, input logic [7:0] strb,
                          output logic [1:0] resp);
  @(negedge clk);
  awaddr = a; wdata = $bits(wdata)'(d); wstrb = $bits(wstrb)'(strb);
  awvalid = 1; wvalid = 1; bready = 1;
  fork
    begin #0.2; while (!awready) begin @(negedge clk); #0.2; end @(posedge clk); @(negedge clk); awvalid = 0; end
    begin #0.2; while (!wready) begin @(negedge clk); #0.2; end @(posedge clk);  @(negedge clk); wvalid = 0; end
  join
  while (!bvalid) @(negedge clk);
  resp = bresp;
  @(posedge clk);
  @(negedge clk); bready = 0;
endtask

task automatic axil_read(input logic [31:0] a, output logic [63:0] d, output logic [1:0] resp);
  @(negedge clk);
  araddr = a; arvalid = 1; rready = 1;
  #0.2; while (!arready) begin @(negedge clk); #0.2; end @(posedge clk);
  @(negedge clk); arvalid = 0;
  while (!rvalid) @(negedge clk);
  d = 64'(rdata); resp = rresp;
  @(posedge clk);
  @(negedge clk); rready = 0;
endtask
