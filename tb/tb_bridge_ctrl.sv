// tb_bridge_ctrl: self-checking test of the Bridge Control Unit.
//
// Fills Data Buffer slots over the bus, feeds commands directly into the
// command stream and watches the DFI cycle by cycle.  Checks: the two CA
// commands appear one and two cycles after the pop with chip select only on
// phase 0; a CA-only stream with delay 2 occupies every DFI cycle; write
// data leaves exactly lat cycles after the second CA command, four quarters
// in order; read data returned by a DFI model lands in the right slot;
// back-to-back writes with delay 4 give gap-free data; delay 2 writes trip
// the late flag.
`timescale 1ns/1ps
module tb_bridge_ctrl;
  import phy_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic en;
  dfi_cmd_t cmd; logic cmd_valid, cmd_ready;
  dfi_out_t dfi_o; dfi_in_t dfi_i;
  logic busy, late; logic [31:0] n_cmds;
  logic [31:0] awaddr, araddr; logic awvalid, awready, wvalid, wready, bvalid, bready;
  logic [63:0] wdata, rdata; logic [7:0] wstrb; logic [1:0] bresp, rresp;
  logic arvalid, arready, rvalid, rready;

  bridge_ctrl dut (.clk, .rst_n, .en, .cmd, .cmd_valid, .cmd_ready, .dfi_o, .dfi_i,
    .busy, .late, .n_cmds, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready,
    .bresp, .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (cycle %0d)", what, cyc); end
  endtask

  task automatic bus_write(input logic [31:0] a, input logic [63:0] d);
    @(negedge clk); awaddr = a; wdata = d; wstrb = 8'hFF; awvalid = 1; wvalid = 1; bready = 1;
    #0.2; while (!awready) begin @(negedge clk); #0.2; end @(posedge clk);
    @(negedge clk); awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    @(negedge clk); bready = 0;
  endtask

  task automatic bus_read(input logic [31:0] a, output logic [63:0] d);
    @(negedge clk); araddr = a; arvalid = 1; rready = 1;
    #0.2; while (!arready) begin @(negedge clk); #0.2; end @(posedge clk);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk); rready = 0;
  endtask

  function automatic logic [63:0] pat(input int slot, input int lane);
    return {8'(slot), 8'(lane), 16'hA5C3, 32'(slot * 1000 + lane * 7 + 12345)};
  endfunction

  // quarter q of a slot's 512-bit word, built from the lanes
  function automatic logic [127:0] qtr(input int slot, input int q);
    return {pat(slot, 2*q+1), pat(slot, 2*q)};
  endfunction

  // push one command; returns the cycle of the pop
  task automatic push(input dfi_cmd_t c, output int popped);
    @(negedge clk); cmd = c; cmd_valid = 1;
    #0.2; while (!cmd_ready) begin @(negedge clk); #0.2; end @(posedge clk);
    popped = cyc;
    @(negedge clk); cmd_valid = 0;
  endtask

  function automatic dfi_cmd_t mk(input dfi_op_e op, input int idx, input int delay, input int lat,
                                  input logic [11:0] a, input logic [11:0] b);
    dfi_cmd_t c;
    c = '0; c.op = op; c.chan = 2'b11; c.idx = 8'(idx); c.delay = 16'(delay); c.lat = 8'(lat);
    c.ca_a = a; c.ca_b = b;
    return c;
  endfunction

  // ---- DFI monitor: record CA and write data per cycle ----
  int ca_cycles = 0;
  int wr_first = -1; int wr_beats = 0; int wr_bad = 0; int wr_slot_expect = 0;
  int wr_gap = 0; int wr_last = -10;
  always @(posedge clk) begin
    if (rst_n) begin
      if (dfi_o.cs[0] != 0) ca_cycles++;
      if (dfi_o.wrdata_en) begin
        if (wr_first < 0) wr_first = cyc;
        if (dfi_o.wrdata !== qtr(wr_slot_expect + wr_beats / 4, wr_beats % 4)) wr_bad++;
        if (wr_last >= 0 && cyc != wr_last + 1) wr_gap++;
        wr_last = cyc;
        wr_beats++;
      end
    end
  end

  // ---- DFI read model: returns rddata RL_EXTRA cycles after rddata_en ----
  localparam int RL_EXTRA = 5;
  logic [RL_EXTRA-1:0] en_pipe;
  int rd_beat = 0;
  always @(posedge clk) begin
    if (!rst_n) begin en_pipe <= '0; dfi_i <= '0; end
    else begin
      en_pipe <= {en_pipe[RL_EXTRA-2:0], dfi_o.rddata_en};
      dfi_i.rddata_valid <= en_pipe[RL_EXTRA-1];
      if (en_pipe[RL_EXTRA-1]) begin
        dfi_i.rddata <= {32'hDEAD_0000 + 32'(rd_beat), 96'(rd_beat * 3 + 1)};
        rd_beat <= rd_beat + 1;
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int p, p1, p2;
    logic [63:0] d;
    en = 0; cmd = '0; cmd_valid = 0; awvalid = 0; wvalid = 0; arvalid = 0; bready = 0; rready = 0;
    awaddr = 0; araddr = 0; wdata = 0; wstrb = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill slots 10..13 over the bus
    for (int s = 10; s < 14; s++) for (int l = 0; l < 8; l++) bus_write(32'(s * 64 + l * 8), pat(s, l));
    for (int l = 0; l < 8; l++) begin
      bus_read(32'(11 * 64 + l * 8), d);
      check(d == pat(11, l), "bus read back of slot 11");
    end
    check(!busy, "idle before enable");
    en = 1;

    // --- CA placement ---
    push(mk(OP_CA, 0, 10, 0, {6'h2A, 6'h15}, {6'h33, 6'h0C}), p);
    @(posedge clk); // cycle p+1
    check(dfi_o.cs[0] == 2'b11 && dfi_o.cs[1] == 2'b00, "CA A chip select on phase 0 only");
    check(dfi_o.address[0] == 6'h15 && dfi_o.address[1] == 6'h2A, "CA A ticks");
    @(posedge clk); // cycle p+2
    check(dfi_o.cs[0] == 2'b11 && dfi_o.address[0] == 6'h0C && dfi_o.address[1] == 6'h33, "CA B ticks");
    @(posedge clk);
    check(dfi_o.cs == '0, "CA bus idle after command");
    // delay 10: next pop exactly 10 cycles after this one
    push(mk(OP_CA, 0, 2, 0, 12'h001, 12'h002), p2);
    check(p2 - p == 10, $sformatf("delay honoured (%0d)", p2 - p));
    repeat (4) @(posedge clk);

    // --- full-rate CA stream: 8 commands with delay 2 -> 16 CA cycles ---
    ca_cycles = 0;
    fork
      for (int i = 0; i < 8; i++) push(mk(OP_CA, 0, 2, 0, 12'h041, 12'h082), p);
    join
    repeat (6) @(posedge clk);
    check(ca_cycles == 16, $sformatf("CA every cycle at delay 2 (%0d)", ca_cycles));

    // --- one write, latency 6 ---
    wr_first = -1; wr_beats = 0; wr_bad = 0; wr_slot_expect = 10; wr_last = -10; wr_gap = 0;
    push(mk(OP_WRITE, 10, 8, 6, 12'h111, 12'h222), p);
    repeat (20) @(posedge clk);
    check(wr_first == p + 2 + 6, $sformatf("write data latency (first %0d pop %0d)", wr_first, p));
    check(wr_beats == 4 && wr_bad == 0, "write data is slot 10, quarters in order");

    // --- back-to-back writes of slots 11..13, delay 4: seamless data ---
    wr_first = -1; wr_beats = 0; wr_bad = 0; wr_slot_expect = 11; wr_last = -10; wr_gap = 0;
    for (int s = 11; s < 14; s++) begin
      push(mk(OP_WRITE, s, 4, 7, 12'h111, 12'h222), p);
      if (s == 11) p1 = p;
    end
    repeat (24) @(posedge clk);
    check(wr_beats == 12 && wr_bad == 0, "three bursts of the right data");
    check(wr_gap == 0, "no gap between back-to-back bursts");
    check(wr_first == p1 + 9, "first burst on time");
    check(!late, "no late transfer at delay 4");

    // --- reads into slots 20, 21 ---
    rd_beat = 0;
    push(mk(OP_READ, 20, 4, 4, 12'h3C3, 12'h0F0), p);
    push(mk(OP_READ, 21, 4, 4, 12'h3C3, 12'h0F0), p);
    repeat (30) @(posedge clk);
    for (int s = 20; s < 22; s++) for (int l = 0; l < 8; l++) begin
      int beat; logic [127:0] q;
      beat = (s - 20) * 4 + l / 2;
      q = {32'hDEAD_0000 + 32'(beat), 96'(beat * 3 + 1)};
      bus_read(32'(s * 64 + l * 8), d);
      check(d == (l[0] ? q[127:64] : q[63:0]), $sformatf("read data slot %0d lane %0d", s, l));
    end
    check(!busy, "idle after all commands");

    // --- writes at delay 2 collide -> late flag ---
    wr_slot_expect = 10; wr_beats = 0;
    push(mk(OP_WRITE, 10, 2, 3, 12'h1, 12'h2), p);
    push(mk(OP_WRITE, 10, 2, 3, 12'h1, 12'h2), p);
    repeat (20) @(posedge clk);
    check(late, "late flag on colliding bursts");
    check(n_cmds == 2 + 8 + 1 + 3 + 2 + 2, $sformatf("command count %0d", n_cmds));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
