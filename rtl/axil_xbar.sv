// axil_xbar: AXI4-Lite crossbar with NM masters and NS slaves.
//
// The paper names two such interconnects: the 32-bit Memory Interconnect of
// the RISC-V Subsystem and the 64-bit Bridge Interconnect inside the DFI
// Bridge.  It gives their masters and slaves but not their insides; this is
// the simplest crossbar that serves them.
//
// Every slave has its own write arbiter and its own read arbiter, so two
// masters that address different slaves proceed in the same cycle and reads
// and writes to one slave overlap.  An arbiter picks round-robin among the
// masters whose address decodes to its slave, then owns the slave until the
// response handshake (B or R) completes.  Each master therefore has at most
// one write and one read in flight.  Slave s covers
// [SLV_BASE[s], SLV_BASE[s] + SLV_SIZE[s]); an address outside every window
// is answered by an internal error slave with DECERR (reads return zero).
//
// Timing: one cycle from a valid address to the grant, then the slave's own
// handshake passes through combinationally.
module axil_xbar #(
  parameter int unsigned NM = 3,
  parameter int unsigned NS = 3,
  parameter int unsigned AW = 32,
  parameter int unsigned DW = 32,
  parameter logic [NS*AW-1:0] SLV_BASE = {32'h2000_0000, 32'h1000_0000, 32'h0000_0000},
  parameter logic [NS*AW-1:0] SLV_SIZE = {32'h1000_0000, 32'h1000_0000, 32'h0001_0000}
) (
  input  logic clk,
  input  logic rst_n,
  // masters
  input  logic [AW-1:0]   m_awaddr  [NM],
  input  logic            m_awvalid [NM],
  output logic            m_awready [NM],
  input  logic [DW-1:0]   m_wdata   [NM],
  input  logic [DW/8-1:0] m_wstrb   [NM],
  input  logic            m_wvalid  [NM],
  output logic            m_wready  [NM],
  output logic [1:0]      m_bresp   [NM],
  output logic            m_bvalid  [NM],
  input  logic            m_bready  [NM],
  input  logic [AW-1:0]   m_araddr  [NM],
  input  logic            m_arvalid [NM],
  output logic            m_arready [NM],
  output logic [DW-1:0]   m_rdata   [NM],
  output logic [1:0]      m_rresp   [NM],
  output logic            m_rvalid  [NM],
  input  logic            m_rready  [NM],
  // slaves
  output logic [AW-1:0]   s_awaddr  [NS],
  output logic            s_awvalid [NS],
  input  logic            s_awready [NS],
  output logic [DW-1:0]   s_wdata   [NS],
  output logic [DW/8-1:0] s_wstrb   [NS],
  output logic            s_wvalid  [NS],
  input  logic            s_wready  [NS],
  input  logic [1:0]      s_bresp   [NS],
  input  logic            s_bvalid  [NS],
  output logic            s_bready  [NS],
  output logic [AW-1:0]   s_araddr  [NS],
  output logic            s_arvalid [NS],
  input  logic            s_arready [NS],
  input  logic [DW-1:0]   s_rdata   [NS],
  input  logic [1:0]      s_rresp   [NS],
  input  logic            s_rvalid  [NS],
  output logic            s_rready  [NS]
);
  // index NS is the internal error slave
  localparam int unsigned NT = NS + 1;
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned TW = $clog2(NT + 1);

  function automatic logic [TW-1:0] decode(input logic [AW-1:0] a);
    logic [TW-1:0] r;
    r = TW'(NS);
    for (int s = NS - 1; s >= 0; s--) begin
      if (a >= SLV_BASE[s*AW +: AW] && (a - SLV_BASE[s*AW +: AW]) < SLV_SIZE[s*AW +: AW])
        r = TW'(s);
    end
    return r;
  endfunction

  // ---------------- per-target arbitration state ----------------
  logic          w_busy [NT], r_busy [NT];
  logic [MW-1:0] w_own  [NT], r_own  [NT];
  logic [MW-1:0] w_rr   [NT], r_rr   [NT];
  logic          aw_sent [NT], w_sent [NT], ar_sent [NT];
  // error slave response pending
  logic          e_bvalid, e_rvalid;

  logic [TW-1:0] m_wtgt [NM], m_rtgt [NM];
  always_comb begin
    for (int m = 0; m < NM; m++) begin
      m_wtgt[m] = decode(m_awaddr[m]);
      m_rtgt[m] = decode(m_araddr[m]);
    end
  end

  // a master is "in flight" while it owns some target
  logic m_wact [NM], m_ract [NM];
  always_comb begin
    for (int m = 0; m < NM; m++) begin
      m_wact[m] = 1'b0;
      m_ract[m] = 1'b0;
      for (int t = 0; t < NT; t++) begin
        if (w_busy[t] && w_own[t] == MW'(m)) m_wact[m] = 1'b1;
        if (r_busy[t] && r_own[t] == MW'(m)) m_ract[m] = 1'b1;
      end
    end
  end

  // target-side views (index NS is the error slave)
  logic t_awready [NT], t_wready [NT], t_bvalid [NT], t_arready [NT], t_rvalid [NT];
  logic [1:0] t_bresp [NT], t_rresp [NT];
  logic [DW-1:0] t_rdata [NT];
  always_comb begin
    for (int s = 0; s < NS; s++) begin
      t_awready[s] = s_awready[s];
      t_wready[s]  = s_wready[s];
      t_bvalid[s]  = s_bvalid[s];
      t_bresp[s]   = s_bresp[s];
      t_arready[s] = s_arready[s];
      t_rvalid[s]  = s_rvalid[s];
      t_rresp[s]   = s_rresp[s];
      t_rdata[s]   = s_rdata[s];
    end
    t_awready[NS] = 1'b1;
    t_wready[NS]  = 1'b1;
    t_bvalid[NS]  = e_bvalid;
    t_bresp[NS]   = phy_pkg::RESP_DECERR;
    t_arready[NS] = 1'b1;
    t_rvalid[NS]  = e_rvalid;
    t_rresp[NS]   = phy_pkg::RESP_DECERR;
    t_rdata[NS]   = '0;
  end

  // ---------------- channel routing ----------------
  always_comb begin
    for (int m = 0; m < NM; m++) begin
      m_awready[m] = 1'b0; m_wready[m] = 1'b0; m_bvalid[m] = 1'b0; m_bresp[m] = '0;
      m_arready[m] = 1'b0; m_rvalid[m] = 1'b0; m_rresp[m] = '0;  m_rdata[m] = '0;
    end
    for (int s = 0; s < NS; s++) begin
      s_awaddr[s] = m_awaddr[w_own[s]];
      s_awvalid[s] = w_busy[s] && !aw_sent[s] && m_awvalid[w_own[s]];
      s_wdata[s]  = m_wdata[w_own[s]];
      s_wstrb[s]  = m_wstrb[w_own[s]];
      s_wvalid[s] = w_busy[s] && !w_sent[s] && m_wvalid[w_own[s]];
      s_bready[s] = w_busy[s] && m_bready[w_own[s]];
      s_araddr[s] = m_araddr[r_own[s]];
      s_arvalid[s] = r_busy[s] && !ar_sent[s] && m_arvalid[r_own[s]];
      s_rready[s] = r_busy[s] && m_rready[r_own[s]];
    end
    for (int t = 0; t < NT; t++) begin
      if (w_busy[t]) begin
        m_awready[w_own[t]] = !aw_sent[t] && t_awready[t];
        m_wready[w_own[t]]  = !w_sent[t] && t_wready[t];
        m_bvalid[w_own[t]]  = t_bvalid[t];
        m_bresp[w_own[t]]   = t_bresp[t];
      end
      if (r_busy[t]) begin
        m_arready[r_own[t]] = !ar_sent[t] && t_arready[t];
        m_rvalid[r_own[t]]  = t_rvalid[t];
        m_rresp[r_own[t]]   = t_rresp[t];
        m_rdata[r_own[t]]   = t_rdata[t];
      end
    end
  end

  // ---------------- arbiters ----------------
  // round-robin pick: first requesting master after the last one served
  logic          w_found [NT], r_found [NT];
  logic [MW-1:0] w_pick  [NT], r_pick  [NT];
  always_comb begin
    for (int t = 0; t < NT; t++) begin
      w_found[t] = 1'b0; w_pick[t] = '0;
      r_found[t] = 1'b0; r_pick[t] = '0;
      for (int k = 1; k <= NM; k++) begin
        int m;
        m = (int'(w_rr[t]) + k) % NM;
        if (!w_found[t] && m_awvalid[m] && m_wtgt[m] == TW'(t) && !m_wact[m]) begin
          w_found[t] = 1'b1;
          w_pick[t] = MW'(m);
        end
        m = (int'(r_rr[t]) + k) % NM;
        if (!r_found[t] && m_arvalid[m] && m_rtgt[m] == TW'(t) && !m_ract[m]) begin
          r_found[t] = 1'b1;
          r_pick[t] = MW'(m);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NT; t++) begin
        w_busy[t] <= 1'b0; r_busy[t] <= 1'b0;
        w_own[t] <= '0; r_own[t] <= '0; w_rr[t] <= '0; r_rr[t] <= '0;
        aw_sent[t] <= 1'b0; w_sent[t] <= 1'b0; ar_sent[t] <= 1'b0;
      end
      e_bvalid <= 1'b0;
      e_rvalid <= 1'b0;
    end else begin
      for (int t = 0; t < NT; t++) begin
        // ---- write ----
        if (!w_busy[t]) begin
          if (w_found[t]) begin
            w_busy[t] <= 1'b1;
            w_own[t] <= w_pick[t];
            w_rr[t]  <= w_pick[t];
          end
          aw_sent[t] <= 1'b0;
          w_sent[t]  <= 1'b0;
        end else begin
          if (m_awvalid[w_own[t]] && m_awready[w_own[t]]) aw_sent[t] <= 1'b1;
          if (m_wvalid[w_own[t]] && m_wready[w_own[t]]) w_sent[t] <= 1'b1;
          if (t_bvalid[t] && m_bready[w_own[t]]) w_busy[t] <= 1'b0;
        end
        // ---- read ----
        if (!r_busy[t]) begin
          if (r_found[t]) begin
            r_busy[t] <= 1'b1;
            r_own[t] <= r_pick[t];
            r_rr[t]  <= r_pick[t];
          end
          ar_sent[t] <= 1'b0;
        end else begin
          if (m_arvalid[r_own[t]] && m_arready[r_own[t]]) ar_sent[t] <= 1'b1;
          if (t_rvalid[t] && m_rready[r_own[t]]) r_busy[t] <= 1'b0;
        end
      end
      // ---- error slave ----
      if (w_busy[NS] && (aw_sent[NS] || m_awvalid[w_own[NS]]) &&
          (w_sent[NS] || m_wvalid[w_own[NS]]) && !e_bvalid)
        e_bvalid <= 1'b1;
      else if (e_bvalid && m_bready[w_own[NS]])
        e_bvalid <= 1'b0;
      if (r_busy[NS] && (ar_sent[NS] || m_arvalid[r_own[NS]]) && !e_rvalid)
        e_rvalid <= 1'b1;
      else if (e_rvalid && m_rready[r_own[NS]])
        e_rvalid <= 1'b0;
    end
  end

  // A master that sees a response before its address was taken would break
  // the one-transaction-per-arbiter rule.
  for (genvar t = 0; t < NT; t++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      t_bvalid[t] && w_busy[t] |-> aw_sent[t] || m_awready[w_own[t]]);
  end
endmodule
