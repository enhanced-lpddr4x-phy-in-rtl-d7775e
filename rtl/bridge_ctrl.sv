// bridge_ctrl: the Bridge Control Unit of the DFI Bridge.
//
// It turns the 64-bit commands of the Command FIFO into DFI activity and
// owns the Data Buffer.  The paper says what the unit does (process queued
// commands, keep the data of reads and writes in the Data Buffer, sustain the
// DFI's full rate); the mechanism below is this design's.
//
// Command issue.  When enabled, a command is popped at cycle P.  Its first
// CA command is on the DFI at P+1, its second at P+2: tick 0 on phase 0 with
// chip select for the channels in cmd.chan, tick 1 on phase 1.  The next
// command is popped at P + max(cmd.delay, 2), so with delay = 2 the CA bus
// carries a command in every DFI cycle.
//
// Data.  A WRITE or READ also queues a data transfer due at cycle
// P + 2 + cmd.lat, i.e. lat DFI cycles after the second CA command.  For a
// WRITE, dfi_wrdata_en is high for four cycles from then, carrying the four
// 128-bit quarters of Data Buffer slot cmd.idx (quarter 0 first).  For a READ,
// dfi_rddata_en is high for the same four cycles, and the next four beats
// with dfi_rddata_valid are written, in order, into slot cmd.idx.  Up to
// QDEPTH transfers of each kind may be pending, so the CA bus runs ahead of
// the data.  A transfer that cannot start when due (the previous burst is
// still on the bus) starts as soon as it can and sets the sticky `late` flag.
// Popping stops while a queue is full.
//
// Bus port.  A 64-bit AXI4-Lite slave maps the Data Buffer: byte address bits
// [13:6] select the slot, [5:3] the 64-bit lane.  Writes take priority over
// reads; both answer one cycle after acceptance.
module bridge_ctrl #(
  parameter int unsigned SLOTS = phy_pkg::BUF_SLOTS,
  parameter int unsigned QDEPTH = 4,
  parameter int unsigned AW = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  // command stream
  input  phy_pkg::dfi_cmd_t cmd,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  // DFI
  output phy_pkg::dfi_out_t dfi_o,
  input  phy_pkg::dfi_in_t  dfi_i,
  // status
  output logic        busy,
  output logic        late,
  output logic [31:0] n_cmds,
  // AXI4-Lite slave: Data Buffer
  input  logic [AW-1:0] awaddr,
  input  logic        awvalid,
  output logic        awready,
  input  logic [63:0] wdata,
  input  logic [7:0]  wstrb,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready,
  input  logic [AW-1:0] araddr,
  input  logic        arvalid,
  output logic        arready,
  output logic [63:0] rdata,
  output logic [1:0]  rresp,
  output logic        rvalid,
  input  logic        rready
);
  import phy_pkg::*;
  localparam int unsigned SW = $clog2(SLOTS);

  // ---------------- time base and command issue ----------------
  logic [15:0] now;
  logic [15:0] wait_cnt;
  logic [11:0] ca_b_q;
  logic [1:0]  chan_q;
  logic        b_pending;
  dfi_cmd_t    c;

  logic wq_full, wq_empty, rq_full, rq_empty, cq_full, cq_empty;
  logic [SW+15:0] wq_head, rq_head;
  logic [SW-1:0]  cq_head;

  assign c = cmd;
  logic is_wr, is_rd;
  assign is_wr = (c.op == OP_WRITE);
  assign is_rd = (c.op == OP_READ);
  assign cmd_ready = en && (wait_cnt == 0) &&
                     !(is_wr && wq_full) && !(is_rd && (rq_full || cq_full));
  logic pop;
  assign pop = cmd_valid && cmd_ready;
  logic [15:0] due;
  assign due = now + 16'd2 + 16'(c.lat);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= '0; wait_cnt <= '0; ca_b_q <= '0; chan_q <= '0; b_pending <= 1'b0;
      dfi_o.cs <= '0; dfi_o.address <= '0; n_cmds <= '0;
    end else begin
      now <= now + 1'b1;
      dfi_o.cs <= '0;
      dfi_o.address <= '0;
      b_pending <= 1'b0;
      if (wait_cnt != 0) wait_cnt <= wait_cnt - 1'b1;
      if (b_pending) begin
        dfi_o.cs[0] <= chan_q;
        dfi_o.address[0] <= ca_b_q[5:0];
        dfi_o.address[1] <= ca_b_q[11:6];
      end
      if (pop) begin
        dfi_o.cs[0] <= c.chan;
        dfi_o.address[0] <= c.ca_a[5:0];
        dfi_o.address[1] <= c.ca_a[11:6];
        ca_b_q <= c.ca_b;
        chan_q <= c.chan;
        b_pending <= 1'b1;
        wait_cnt <= (c.delay < 16'd2) ? 16'd1 : c.delay - 1'b1;
        n_cmds <= n_cmds + 1'b1;
      end
    end
  end

  // ---------------- pending transfer queues ----------------
  logic wq_pop, rq_pop, cq_pop;
  sync_fifo #(.W(SW + 16), .DEPTH(QDEPTH)) u_wq (
    .clk, .rst_n, .push(pop && is_wr), .din({c.idx[SW-1:0], due}), .pop(wq_pop),
    .dout(wq_head), .empty(wq_empty), .full(wq_full));
  sync_fifo #(.W(SW + 16), .DEPTH(QDEPTH)) u_rq (
    .clk, .rst_n, .push(pop && is_rd), .din({c.idx[SW-1:0], due}), .pop(rq_pop),
    .dout(rq_head), .empty(rq_empty), .full(rq_full));
  sync_fifo #(.W(SW), .DEPTH(QDEPTH)) u_cq (
    .clk, .rst_n, .push(pop && is_rd), .din(c.idx[SW-1:0]), .pop(cq_pop),
    .dout(cq_head), .empty(cq_empty), .full(cq_full));

  // due reached: (now + 1) - due >= 0 in 16-bit modular arithmetic, so the
  // enable register loaded in this cycle shows the burst at cycle `due`
  function automatic logic reached(input logic [15:0] d, input logic [15:0] t);
    logic [15:0] diff;
    diff = t + 16'd1 - d;
    return !diff[15];
  endfunction

  // ---------------- write burst: Data Buffer -> dfi_wrdata ----------------
  logic       wb_act;
  logic [1:0] wb_q;
  logic [SW-1:0] wb_slot;
  logic       wb_start;
  assign wb_start = !wb_act && !wq_empty && reached(wq_head[15:0], now);
  assign wq_pop = wb_start;

  logic          r_en;
  logic [SW-1:0] r_slot;
  logic [1:0]    r_qtr;
  logic [127:0]  r_rdata;
  always_comb begin
    r_en = wb_start || wb_act;
    r_slot = wb_start ? wq_head[SW+15:16] : wb_slot;
    r_qtr = wb_start ? 2'd0 : wb_q;
  end
  assign dfi_o.wrdata = r_rdata;
  assign dfi_o.wrdata_mask = '0;

  // ---------------- read burst: dfi_rddata_en ----------------
  logic       rb_act;
  logic [1:0] rb_q;
  logic       rb_start;
  assign rb_start = !rb_act && !rq_empty && reached(rq_head[15:0], now);
  assign rq_pop = rb_start;

  // ---------------- read capture: dfi_rddata -> Data Buffer ----------------
  logic [1:0] cap_q;
  logic       w_en;
  assign w_en = dfi_i.rddata_valid && !cq_empty;
  assign cq_pop = w_en && (cap_q == 2'd3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_act <= 1'b0; wb_q <= '0; wb_slot <= '0;
      rb_act <= 1'b0; rb_q <= '0;
      cap_q <= '0; late <= 1'b0;
      dfi_o.wrdata_en <= 1'b0;
      dfi_o.rddata_en <= 1'b0;
    end else begin
      dfi_o.wrdata_en <= wb_start || wb_act;
      dfi_o.rddata_en <= rb_start || rb_act;
      if (wb_start) begin
        wb_act <= 1'b1; wb_q <= 2'd1; wb_slot <= wq_head[SW+15:16];
        if (wq_head[15:0] != now + 16'd1) late <= 1'b1;
      end else if (wb_act) begin
        wb_q <= wb_q + 1'b1;
        if (wb_q == 2'd3) wb_act <= 1'b0;
      end
      if (rb_start) begin
        rb_act <= 1'b1; rb_q <= 2'd1;
        if (rq_head[15:0] != now + 16'd1) late <= 1'b1;
      end else if (rb_act) begin
        rb_q <= rb_q + 1'b1;
        if (rb_q == 2'd3) rb_act <= 1'b0;
      end
      if (w_en) cap_q <= cap_q + 1'b1;
    end
  end

  assign busy = cmd_valid || (wait_cnt != 0) || b_pending || !wq_empty || !rq_empty ||
                !cq_empty || wb_act || rb_act;

  // ---------------- bus port ----------------
  logic do_wr, do_rd;
  assign do_wr = awvalid && wvalid && (!bvalid || bready);
  assign do_rd = arvalid && !do_wr && (!rvalid || rready);
  assign awready = do_wr;
  assign wready  = do_wr;
  assign arready = do_rd;
  assign bresp = RESP_OKAY;
  assign rresp = RESP_OKAY;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid <= 1'b0; rvalid <= 1'b0;
    end else begin
      if (do_wr) bvalid <= 1'b1;
      else if (bready) bvalid <= 1'b0;
      if (do_rd) rvalid <= 1'b1;
      else if (rready) rvalid <= 1'b0;
    end
  end

  data_buffer #(.SLOTS(SLOTS), .WORD_W(BUF_WORD_W)) u_buf (
    .clk,
    .a_en(do_wr || do_rd),
    .a_slot(do_wr ? awaddr[6 +: SW] : araddr[6 +: SW]),
    .a_lane(do_wr ? awaddr[5:3] : araddr[5:3]),
    .a_we(do_wr ? wstrb : 8'h00),
    .a_wdata(wdata),
    .a_rdata(rdata),
    .r_en, .r_slot, .r_qtr, .r_rdata,
    .w_en, .w_slot(cq_head), .w_qtr(cap_q), .w_wdata(dfi_i.rddata)
  );

  assert property (@(posedge clk) disable iff (!rst_n) dfi_i.rddata_valid |-> !cq_empty);
endmodule
