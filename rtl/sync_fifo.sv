// sync_fifo: small synchronous FIFO used for the Bridge Control Unit's
// pending-transfer queues.  Head visible without delay (first-word fall
// through); push while full and pop while empty are ignored.
module sync_fifo #(
  parameter int unsigned W = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full
);
  localparam int unsigned PW = $clog2(DEPTH);
  logic [W-1:0] q [DEPTH];
  logic [PW-1:0] wp, rp;
  logic [PW:0] cnt;
  logic do_push, do_pop;

  assign empty = (cnt == 0);
  assign full  = (cnt == (PW+1)'(DEPTH));
  assign dout  = q[rp];
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk) if (do_push) q[wp] <= din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (do_push) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end
endmodule
