// jtag_dbg: IEEE 1149.1 test access port with bus access and core control.
//
// The paper gives the subsystem a JTAG TAP compliant with IEEE 1149.1-2013,
// shows it as a master of the Memory Interconnect and with a link to the
// RISC-V core.  The TAP state machine below is the standard one; the
// instructions other than IDCODE and BYPASS, and their data registers, are
// this design's.
//
// The JTAG pins are sampled with the system clock (which must be at least
// four times faster than TCK): TCK passes a two-flop synchroniser and its
// rising edge advances the TAP and shifts, its falling edge updates TDO.
//
// Instructions (5-bit IR, IDCODE after reset):
//   0x01 IDCODE   32-bit IDCODE register
//   0x10 BUSACC   66-bit register {op[1:0], addr[31:0], data[31:0]}, shifted
//                 LSB first.  Update-DR with op = 01 writes data to addr, with
//                 op = 10 reads addr, both as one AXI4-Lite access of 32 bits.
//                 Capture-DR loads {busy, error, addr, read data}.
//   0x11 CORECTL  2-bit register {halt, reset} driving the core outputs
//   0x1F BYPASS   1-bit bypass (also for every other code)
module jtag_dbg #(
  parameter logic [31:0] IDCODE = 32'h1A5D_D001
) (
  input  logic clk,
  input  logic rst_n,
  input  logic tck,
  input  logic tms,
  input  logic tdi,
  output logic tdo,
  input  logic trst_n,
  output logic core_reset,
  output logic core_halt,
  // AXI4-Lite master (32-bit)
  output logic [31:0] awaddr,
  output logic        awvalid,
  input  logic        awready,
  output logic [31:0] wdata,
  output logic [3:0]  wstrb,
  output logic        wvalid,
  input  logic        wready,
  input  logic [1:0]  bresp,
  input  logic        bvalid,
  output logic        bready,
  output logic [31:0] araddr,
  output logic        arvalid,
  input  logic        arready,
  input  logic [31:0] rdata,
  input  logic [1:0]  rresp,
  input  logic        rvalid,
  output logic        rready
);
  typedef enum logic [3:0] {
    TLR, RTI, SEL_DR, CAP_DR, SH_DR, EX1_DR, PA_DR, EX2_DR, UPD_DR,
    SEL_IR, CAP_IR, SH_IR, EX1_IR, PA_IR, EX2_IR, UPD_IR
  } tap_e;

  localparam logic [4:0] I_IDCODE = 5'h01, I_BUSACC = 5'h10, I_CORECTL = 5'h11;

  // ---- pin sampling ----
  logic [2:0] tck_s;
  logic [1:0] tms_s, tdi_s, trst_s;
  logic tck_rise, tck_fall;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tck_s <= '0; tms_s <= '1; tdi_s <= '0; trst_s <= '0;
    end else begin
      tck_s <= {tck_s[1:0], tck};
      tms_s <= {tms_s[0], tms};
      tdi_s <= {tdi_s[0], tdi};
      trst_s <= {trst_s[0], trst_n};
    end
  end
  assign tck_rise = tck_s[1] && !tck_s[2];
  assign tck_fall = !tck_s[1] && tck_s[2];

  tap_e state, nxt;
  always_comb begin
    case (state)
      TLR:    nxt = tms_s[1] ? TLR    : RTI;
      RTI:    nxt = tms_s[1] ? SEL_DR : RTI;
      SEL_DR: nxt = tms_s[1] ? SEL_IR : CAP_DR;
      CAP_DR: nxt = tms_s[1] ? EX1_DR : SH_DR;
      SH_DR:  nxt = tms_s[1] ? EX1_DR : SH_DR;
      EX1_DR: nxt = tms_s[1] ? UPD_DR : PA_DR;
      PA_DR:  nxt = tms_s[1] ? EX2_DR : PA_DR;
      EX2_DR: nxt = tms_s[1] ? UPD_DR : SH_DR;
      UPD_DR: nxt = tms_s[1] ? SEL_DR : RTI;
      SEL_IR: nxt = tms_s[1] ? TLR    : CAP_IR;
      CAP_IR: nxt = tms_s[1] ? EX1_IR : SH_IR;
      SH_IR:  nxt = tms_s[1] ? EX1_IR : SH_IR;
      EX1_IR: nxt = tms_s[1] ? UPD_IR : PA_IR;
      PA_IR:  nxt = tms_s[1] ? EX2_IR : PA_IR;
      EX2_IR: nxt = tms_s[1] ? UPD_IR : SH_IR;
      UPD_IR: nxt = tms_s[1] ? SEL_DR : RTI;
      default: nxt = TLR;
    endcase
  end

  logic [4:0]  ir, ir_sh;
  logic [65:0] dr;
  logic [31:0] bus_addr, bus_rdata;
  logic        bus_busy, bus_err;
  logic        start_wr, start_rd;
  logic [31:0] start_addr, start_data;
  logic        tdo_n;

  // bit shifted out of the selected register
  always_comb begin
    if (state == SH_IR) tdo_n = ir_sh[0];
    else tdo_n = dr[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= TLR; ir <= I_IDCODE; ir_sh <= '0; dr <= '0; tdo <= 1'b0;
      core_reset <= 1'b0; core_halt <= 1'b0;
      start_wr <= 1'b0; start_rd <= 1'b0; start_addr <= '0; start_data <= '0;
    end else begin
      start_wr <= 1'b0;
      start_rd <= 1'b0;
      if (!trst_s[1]) begin
        state <= TLR;
        ir <= I_IDCODE;
      end else if (tck_rise) begin
        state <= nxt;
        case (state)
          TLR: ir <= I_IDCODE;
          CAP_IR: ir_sh <= 5'b00001;
          SH_IR: ir_sh <= {tdi_s[1], ir_sh[4:1]};
          UPD_IR: ir <= ir_sh;
          CAP_DR: begin
            case (ir)
              I_IDCODE:  dr <= {34'd0, IDCODE};
              I_BUSACC:  dr <= {bus_busy, bus_err, bus_addr, bus_rdata};
              I_CORECTL: dr <= {64'd0, core_halt, core_reset};
              default:   dr <= '0;
            endcase
          end
          SH_DR: begin
            case (ir)
              I_IDCODE:  dr <= {34'd0, tdi_s[1], dr[31:1]};
              I_BUSACC:  dr <= {tdi_s[1], dr[65:1]};
              I_CORECTL: dr <= {64'd0, tdi_s[1], dr[1]};
              default:   dr <= {65'd0, tdi_s[1]};
            endcase
          end
          UPD_DR: begin
            if (ir == I_CORECTL) begin
              core_reset <= dr[0];
              core_halt <= dr[1];
            end
            if (ir == I_BUSACC && !bus_busy) begin
              start_wr <= (dr[65:64] == 2'b01);
              start_rd <= (dr[65:64] == 2'b10);
              start_addr <= dr[63:32];
              start_data <= dr[31:0];
            end
          end
          default: ;
        endcase
      end
      if (tck_fall) tdo <= tdo_n;
    end
  end

  // ---- bus master ----
  typedef enum logic [1:0] {B_IDLE, B_WR, B_RD} bus_e;
  bus_e bst;
  logic aw_done, w_done, ar_done;
  assign awaddr = bus_addr;
  assign araddr = bus_addr;
  assign wstrb = 4'hF;
  assign awvalid = (bst == B_WR) && !aw_done;
  assign wvalid = (bst == B_WR) && !w_done;
  assign bready = (bst == B_WR);
  assign arvalid = (bst == B_RD) && !ar_done;
  assign rready = (bst == B_RD);
  assign bus_busy = (bst != B_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bst <= B_IDLE; aw_done <= 1'b0; w_done <= 1'b0; ar_done <= 1'b0;
      bus_addr <= '0; wdata <= '0; bus_rdata <= '0; bus_err <= 1'b0;
    end else begin
      case (bst)
        B_IDLE: begin
          aw_done <= 1'b0; w_done <= 1'b0; ar_done <= 1'b0;
          if (start_wr) begin
            bst <= B_WR; bus_addr <= start_addr; wdata <= start_data;
          end else if (start_rd) begin
            bst <= B_RD; bus_addr <= start_addr;
          end
        end
        B_WR: begin
          if (awvalid && awready) aw_done <= 1'b1;
          if (wvalid && wready) w_done <= 1'b1;
          if (bvalid) begin
            bus_err <= (bresp != 2'b00);
            bst <= B_IDLE;
          end
        end
        B_RD: begin
          if (arvalid && arready) ar_done <= 1'b1;
          if (rvalid) begin
            bus_rdata <= rdata;
            bus_err <= (rresp != 2'b00);
            bst <= B_IDLE;
          end
        end
        default: bst <= B_IDLE;
      endcase
    end
  end
endmodule
