// tb_jtag_dbg: drives the JTAG pins (TCK at 1/8 of the system clock) and
// checks the TAP: IDCODE after reset, the captured IR pattern, the one-bit
// BYPASS delay, bus writes and reads through the BUSACC register into an
// SRAM (compared with the SRAM's contents), and the CORECTL outputs.
`timescale 1ns/1ps
module tb_jtag_dbg;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  logic tck, tms, tdi, tdo, trst_n, core_reset, core_halt;
  logic [31:0] awaddr, araddr; logic awvalid, awready, wvalid, wready, bvalid, bready;
  logic [31:0] wdata, rdata; logic [3:0] wstrb; logic [1:0] bresp, rresp;
  logic arvalid, arready, rvalid, rready;
  jtag_dbg #(.IDCODE(32'h1A5D_D001)) dut (.*);
  axil_sram #(.DW(32), .SIZE_BYTES(4096)) u_mem (.clk, .rst_n, .awaddr, .awvalid, .awready,
    .wdata, .wstrb, .wvalid, .wready, .bresp, .bvalid, .bready, .araddr, .arvalid, .arready,
    .rdata, .rresp, .rvalid, .rready);
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one TCK period; returns TDO as seen before the rising edge
  task automatic tclk(input bit m, input bit d, output bit o);
    tms = m; tdi = d; tck = 0;
    repeat (4) @(posedge clk);
    o = tdo;
    tck = 1;
    repeat (4) @(posedge clk);
  endtask
  task automatic tap_reset();
    bit o;
    repeat (6) tclk(1, 0, o);
    tclk(0, 0, o);                  // Run-Test/Idle
  endtask
  // from Run-Test/Idle: shift n bits through IR (ir = 1) or DR, back to idle
  task automatic scan(input bit ir, input int n, input logic [127:0] din, output logic [127:0] dout);
    bit o;
    tclk(1, 0, o);                  // Select-DR
    if (ir) tclk(1, 0, o);          // Select-IR
    tclk(0, 0, o);                  // Capture
    tclk(0, 0, o);                  // Shift
    dout = '0;
    for (int i = 0; i < n; i++) begin
      tclk(i == n - 1, din[i], o);  // last bit leaves to Exit1
      dout[i] = o;
    end
    tclk(1, 0, o);                  // Update
    tclk(0, 0, o);                  // Run-Test/Idle
  endtask

  initial begin #400000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [127:0] q;
    tck = 0; tms = 1; tdi = 0; trst_n = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    tap_reset();
    scan(0, 32, '0, q); check(q[31:0] == 32'h1A5D_D001, $sformatf("IDCODE %h", q[31:0]));
    scan(1, 5, 128'h1F, q); check(q[4:0] == 5'b00001, "IR capture pattern");
    scan(0, 8, 128'hA5, q); check(q[7:0] == 8'h4A, "BYPASS delays by one bit");
    // bus write via BUSACC
    scan(1, 5, 128'h10, q);
    scan(0, 66, 128'({2'b01, 32'h0000_0040, 32'hDEAD_BEEF}), q);
    repeat (20) @(posedge clk);
    check(u_mem.mem[16] == 32'hDEAD_BEEF, "JTAG write reached memory");
    u_mem.mem[20] = 32'h0BAD_F00D;
    scan(0, 66, 128'({2'b10, 32'h0000_0050, 32'h0}), q);
    repeat (20) @(posedge clk);
    scan(0, 66, '0, q);
    check(q[31:0] == 32'h0BAD_F00D && q[63:32] == 32'h50 && q[65:64] == 2'b00, "JTAG read data");
    scan(0, 66, 128'({2'b10, 32'h0000_8000, 32'h0}), q);   // outside the 4 kB memory -> wraps, OKAY
    repeat (20) @(posedge clk);
    scan(0, 66, '0, q);
    check(q[31:0] == u_mem.mem[0], "second read");
    // random write / read-back pairs, the read data shifted out while the
    // next command is shifted in
    for (int k = 0; k < 12; k++) begin
      logic [31:0] a, d;
      a = 32'($urandom_range(1023)) << 2; d = $urandom;
      scan(0, 66, 128'({2'b01, a, d}), q);
      repeat (20) @(posedge clk);
      check(u_mem.mem[a[11:2]] == d, $sformatf("random JTAG write %h", a));
      scan(0, 66, 128'({2'b10, a, 32'h0}), q);
      repeat (20) @(posedge clk);
      scan(0, 66, '0, q);
      check(q[31:0] == d && q[63:32] == a && q[65:64] == 2'b00, $sformatf("random JTAG read %h", a));
    end
    // core control
    scan(1, 5, 128'h11, q);
    scan(0, 2, 128'b10, q);
    check(core_halt && !core_reset, "core halted");
    scan(0, 2, 128'b01, q);
    check(q[1:0] == 2'b10 && !core_halt && core_reset, "core reset, old value captured");
    // TRST returns to IDCODE
    trst_n = 0; repeat (4) @(posedge clk); trst_n = 1; repeat (4) @(posedge clk);
    tap_reset();
    scan(0, 32, '0, q); check(q[31:0] == 32'h1A5D_D001, "IDCODE after TRST");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
