// tb_data_buffer: writes 64-bit lanes through port A, reads them as 128-bit
// quarters through port R, writes quarters through port W and reads them as
// lanes through port A, against a reference array of the full 256 x 512 bit.
`timescale 1ns/1ps
module tb_data_buffer;
  logic clk = 0;
  always #1 clk = !clk;
  int checks = 0, failures = 0;
  logic a_en; logic [7:0] a_slot; logic [2:0] a_lane; logic [7:0] a_we; logic [63:0] a_wdata, a_rdata;
  logic r_en; logic [7:0] r_slot; logic [1:0] r_qtr; logic [127:0] r_rdata;
  logic w_en; logic [7:0] w_slot; logic [1:0] w_qtr; logic [127:0] w_wdata;
  data_buffer dut (.*);
  logic [511:0] ref_mem [256];
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin #400000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    a_en = 0; r_en = 0; w_en = 0; a_we = 0; a_slot = 0; a_lane = 0; a_wdata = 0;
    r_slot = 0; r_qtr = 0; w_slot = 0; w_qtr = 0; w_wdata = 0;
    for (int s = 0; s < 256; s++) ref_mem[s] = '0;
    // port A: full writes to every slot
    for (int s = 0; s < 256; s++) for (int l = 0; l < 8; l++) begin
      @(negedge clk); a_en = 1; a_slot = 8'(s); a_lane = 3'(l); a_we = 8'hFF;
      a_wdata = {$urandom, $urandom}; ref_mem[s][l*64 +: 64] = a_wdata;
    end
    // byte-masked writes
    for (int s = 0; s < 256; s += 5) begin
      @(negedge clk); a_en = 1; a_slot = 8'(s); a_lane = 3'(s % 8); a_we = 8'($urandom);
      a_wdata = {$urandom, $urandom};
      for (int b = 0; b < 8; b++) if (a_we[b]) ref_mem[s][(s % 8)*64 + b*8 +: 8] = a_wdata[b*8 +: 8];
    end
    @(negedge clk); a_en = 0;
    // port R reads quarters
    for (int s = 0; s < 256; s += 3) for (int q = 0; q < 4; q++) begin
      @(negedge clk); r_en = 1; r_slot = 8'(s); r_qtr = 2'(q);
      @(negedge clk); r_en = 0;
      check(r_rdata == ref_mem[s][q*128 +: 128], $sformatf("port R slot %0d q %0d", s, q));
    end
    // port W writes quarters, port A reads lanes
    for (int s = 1; s < 256; s += 7) for (int q = 0; q < 4; q++) begin
      @(negedge clk); w_en = 1; w_slot = 8'(s); w_qtr = 2'(q);
      w_wdata = {$urandom, $urandom, $urandom, $urandom}; ref_mem[s][q*128 +: 128] = w_wdata;
    end
    @(negedge clk); w_en = 0;
    for (int s = 1; s < 256; s += 7) for (int l = 0; l < 8; l++) begin
      @(negedge clk); a_en = 1; a_we = 0; a_slot = 8'(s); a_lane = 3'(l);
      @(negedge clk); a_en = 0;
      check(a_rdata == ref_mem[s][l*64 +: 64], $sformatf("port A slot %0d lane %0d", s, l));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
