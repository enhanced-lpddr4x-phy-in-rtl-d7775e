// tb_axil_xbar: three masters run concurrent random write/read-back traffic
// through a 3x3 crossbar into three SRAMs.  Each master owns its own part of
// every SRAM, so the data it reads back is known.  Checks the data, OKAY
// responses, DECERR (and zero data) for unmapped addresses, that two slaves
// were at some point served in the same cycle, and that two masters at some
// point waited for the same slave (arbitration).
`timescale 1ns/1ps
module tb_axil_xbar;
  localparam int NM = 3, NS = 3;
  logic clk = 0, rst_n = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;

  logic [31:0] m_awaddr [NM]; logic m_awvalid [NM]; logic m_awready [NM];
  logic [31:0] m_wdata [NM];  logic [3:0] m_wstrb [NM]; logic m_wvalid [NM]; logic m_wready [NM];
  logic [1:0]  m_bresp [NM];  logic m_bvalid [NM]; logic m_bready [NM];
  logic [31:0] m_araddr [NM]; logic m_arvalid [NM]; logic m_arready [NM];
  logic [31:0] m_rdata [NM];  logic [1:0] m_rresp [NM]; logic m_rvalid [NM]; logic m_rready [NM];
  logic [31:0] s_awaddr [NS]; logic s_awvalid [NS]; logic s_awready [NS];
  logic [31:0] s_wdata [NS];  logic [3:0] s_wstrb [NS]; logic s_wvalid [NS]; logic s_wready [NS];
  logic [1:0]  s_bresp [NS];  logic s_bvalid [NS]; logic s_bready [NS];
  logic [31:0] s_araddr [NS]; logic s_arvalid [NS]; logic s_arready [NS];
  logic [31:0] s_rdata [NS];  logic [1:0] s_rresp [NS]; logic s_rvalid [NS]; logic s_rready [NS];

  axil_xbar #(.NM(NM), .NS(NS), .AW(32), .DW(32),
    .SLV_BASE({32'h0000_2000, 32'h0000_1000, 32'h0000_0000}),
    .SLV_SIZE({32'h1000, 32'h1000, 32'h1000})) dut (.*);

  for (genvar s = 0; s < NS; s++) begin : g_s
    axil_sram #(.DW(32), .SIZE_BYTES(4096)) u (.clk, .rst_n,
      .awaddr(s_awaddr[s]), .awvalid(s_awvalid[s]), .awready(s_awready[s]),
      .wdata(s_wdata[s]), .wstrb(s_wstrb[s]), .wvalid(s_wvalid[s]), .wready(s_wready[s]),
      .bresp(s_bresp[s]), .bvalid(s_bvalid[s]), .bready(s_bready[s]),
      .araddr(s_araddr[s]), .arvalid(s_arvalid[s]), .arready(s_arready[s]),
      .rdata(s_rdata[s]), .rresp(s_rresp[s]), .rvalid(s_rvalid[s]), .rready(s_rready[s]));
  end

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic mwrite(input int m, input logic [31:0] a, input logic [31:0] d, output logic [1:0] resp);
    @(negedge clk); m_awaddr[m] = a; m_wdata[m] = d; m_wstrb[m] = 4'hF;
    m_awvalid[m] = 1; m_wvalid[m] = 1; m_bready[m] = 1;
    fork
      begin #0.2; while (!m_awready[m]) begin @(negedge clk); #0.2; end @(posedge clk); @(negedge clk); m_awvalid[m] = 0; end
      begin #0.2; while (!m_wready[m]) begin @(negedge clk); #0.2; end @(posedge clk);  @(negedge clk); m_wvalid[m] = 0; end
    join
    while (!m_bvalid[m]) @(negedge clk);
    resp = m_bresp[m];
    @(posedge clk); @(negedge clk); m_bready[m] = 0;
  endtask

  task automatic mread(input int m, input logic [31:0] a, output logic [31:0] d, output logic [1:0] resp);
    @(negedge clk); m_araddr[m] = a; m_arvalid[m] = 1; m_rready[m] = 1;
    #0.2; while (!m_arready[m]) begin @(negedge clk); #0.2; end @(posedge clk);
    @(negedge clk); m_arvalid[m] = 0;
    while (!m_rvalid[m]) @(negedge clk);
    d = m_rdata[m]; resp = m_rresp[m];
    @(posedge clk); @(negedge clk); m_rready[m] = 0;
  endtask

  // concurrency and contention monitors
  int both_active = 0, contention = 0;
  always @(posedge clk) if (rst_n) begin
    int act, wait_same;
    act = 0;
    for (int s = 0; s < NS; s++) if (s_awvalid[s] || s_wvalid[s] || s_bvalid[s] || s_arvalid[s] || s_rvalid[s]) act++;
    if (act >= 2) both_active++;
    for (int s = 0; s < NS; s++) begin
      wait_same = 0;
      for (int m = 0; m < NM; m++)
        if (m_awvalid[m] && !m_awready[m] && m_awaddr[m][13:12] == 2'(s)) wait_same++;
      if (wait_same >= 2) contention++;
    end
  end

  initial begin #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int m = 0; m < NM; m++) begin
      m_awvalid[m] = 0; m_wvalid[m] = 0; m_bready[m] = 0; m_arvalid[m] = 0; m_rready[m] = 0;
      m_awaddr[m] = 0; m_araddr[m] = 0; m_wdata[m] = 0; m_wstrb[m] = 0;
    end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int m = 0; m < NM; m++) begin
      fork
        automatic int mm = m;
        begin
          logic [31:0] vals [48]; logic [31:0] addrs [48]; logic [31:0] d; logic [1:0] r;
          for (int i = 0; i < 48; i++) begin
            addrs[i] = 32'(((mm + i) % NS) * 32'h1000 + mm * 32'h400 + i * 4);
            vals[i] = $urandom;
            mwrite(mm, addrs[i], vals[i], r);
            check(r == 2'b00, "write OKAY");
          end
          for (int i = 0; i < 48; i++) begin
            mread(mm, addrs[i], d, r);
            check(d == vals[i] && r == 2'b00, $sformatf("master %0d read %0d", mm, i));
          end
          mwrite(mm, 32'h0000_8000 + mm * 4, 32'h1, r);
          check(r == 2'b11, "unmapped write DECERR");
          mread(mm, 32'h0000_9000, d, r);
          check(r == 2'b11 && d == 0, "unmapped read DECERR");
        end
      join_none
    end
    wait fork;
    check(both_active > 0, $sformatf("parallel slaves seen %0d times", both_active));
    check(contention > 0, $sformatf("contention seen %0d times", contention));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
