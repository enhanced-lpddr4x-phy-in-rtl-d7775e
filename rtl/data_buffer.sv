// data_buffer: the Data Buffer of the DFI Bridge, 256 words of 512 bits.
//
// One 512-bit word holds the data of one read or write command: a BL16 burst
// on both x16 channels (2 channels x 16 beats x 16 bits).  The paper gives
// the size (256 x 512 bit); the port organisation is this design's.
//
// Port A (bus side) reads or writes one 64-bit lane of a word, with byte
// enables; a_rdata changes only on a read (a_en with a_we all zero) and is
// valid one cycle later.  Port R (DFI write path) reads one 128-bit quarter,
// the data of one DFI clock, valid one cycle later.  Port W (DFI read path)
// writes one 128-bit quarter.  A bus write and a DFI write to the same byte
// in one cycle leave the DFI data.
module data_buffer #(
  parameter int unsigned SLOTS = 256,
  parameter int unsigned WORD_W = 512
) (
  input  logic clk,
  // port A: bus
  input  logic                         a_en,
  input  logic [$clog2(SLOTS)-1:0]     a_slot,
  input  logic [$clog2(WORD_W/64)-1:0] a_lane,
  input  logic [7:0]                   a_we,
  input  logic [63:0]                  a_wdata,
  output logic [63:0]                  a_rdata,
  // port R: DFI write data
  input  logic                          r_en,
  input  logic [$clog2(SLOTS)-1:0]      r_slot,
  input  logic [$clog2(WORD_W/128)-1:0] r_qtr,
  output logic [127:0]                  r_rdata,
  // port W: DFI read data
  input  logic                          w_en,
  input  logic [$clog2(SLOTS)-1:0]      w_slot,
  input  logic [$clog2(WORD_W/128)-1:0] w_qtr,
  input  logic [127:0]                  w_wdata
);
  logic [WORD_W-1:0] mem [SLOTS];

  always_ff @(posedge clk) begin
    if (a_en) begin
      for (int b = 0; b < 8; b++)
        if (a_we[b]) mem[a_slot][int'(a_lane)*64 + b*8 +: 8] <= a_wdata[b*8 +: 8];
      if (a_we == 8'h00) a_rdata <= mem[a_slot][int'(a_lane)*64 +: 64];
    end
    if (w_en) mem[w_slot][int'(w_qtr)*128 +: 128] <= w_wdata;
    if (r_en) r_rdata <= mem[r_slot][int'(r_qtr)*128 +: 128];
  end
endmodule
