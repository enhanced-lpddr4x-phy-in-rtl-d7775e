// phy_pkg: types and constants shared by the digital part of the LPDDR4X PHY.
//
// It fixes the DFI Bridge command word and the DFI signal bundle that the
// Bridge Control Unit, the DFI MUX and the top level exchange, and the
// register layout of a DMA channel.  The paper fixes the command word only
// as "64 bits holding two CA commands, timing information and a Data Buffer
// index"; the field positions below are this design's own choice.
//
// Command word (bit 63 left):
//   [63:62] op        00 CA only, 01 WRITE, 10 READ, 11 CA only
//   [61:60] chan      chip select enable of channel 1 / channel 0
//   [59:52] idx       Data Buffer slot (256 slots)
//   [51:36] delay     DFI cycles from this command to the next one
//   [35:32] reserved
//   [31:24] lat       DFI cycles from the second CA command to the data
//   [23:12] ca_b      second CA command (tick 1 in [23:18], tick 0 in [17:12])
//   [11:0]  ca_a      first CA command  (tick 1 in [11:6],  tick 0 in [5:0])
package phy_pkg;

  // DFI 4.0 with a 1:2 frequency ratio: two phases per DFI clock.
  localparam int unsigned DFI_PHASES = 2;
  localparam int unsigned DFI_CHANNELS = 2;   // two x16 LPDDR4X channels
  localparam int unsigned DFI_CA_W = 6;       // LPDDR4 CA bus width
  localparam int unsigned DQ_W = 32;          // x32 PHY
  // Data per DFI clock: 2 phases x 2 beats (DDR) x 32 DQ
  localparam int unsigned DFI_DATA_W = DFI_PHASES * 2 * DQ_W;  // 128
  localparam int unsigned BUF_WORD_W = 512;   // Data Buffer word
  localparam int unsigned BUF_SLOTS = 256;    // Data Buffer depth
  localparam int unsigned BURST_CYCLES = BUF_WORD_W / DFI_DATA_W;  // 4

  typedef enum logic [1:0] {
    OP_CA    = 2'b00,
    OP_WRITE = 2'b01,
    OP_READ  = 2'b10,
    OP_CA2   = 2'b11
  } dfi_op_e;

  typedef struct packed {
    dfi_op_e     op;
    logic [1:0]  chan;
    logic [7:0]  idx;
    logic [15:0] delay;
    logic [3:0]  rsvd;
    logic [7:0]  lat;
    logic [11:0] ca_b;
    logic [11:0] ca_a;
  } dfi_cmd_t;

  // DFI signals driven towards the PHY slices (one DFI clock).
  typedef struct packed {
    logic [DFI_PHASES-1:0][DFI_CHANNELS-1:0] cs;
    logic [DFI_PHASES-1:0][DFI_CA_W-1:0]     address;
    logic                                    wrdata_en;
    logic [DFI_DATA_W-1:0]                   wrdata;
    logic [DFI_DATA_W/8-1:0]                 wrdata_mask;
    logic                                    rddata_en;
  } dfi_out_t;

  // DFI signals returned by the PHY slices.
  typedef struct packed {
    logic                  rddata_valid;
    logic [DFI_DATA_W-1:0] rddata;
  } dfi_in_t;

  // One DMA channel as programmed through the configuration registers.
  typedef struct packed {
    logic [31:0] src;
    logic [31:0] dst;
    logic [15:0] len;      // number of bus words to move
    logic        src_inc;  // increment the source address
    logic        dst_inc;  // increment the destination address
    logic        start;    // one-cycle start pulse
  } dma_cfg_t;

  typedef struct packed {
    logic        busy;
    logic        done;     // sticky until the next start
    logic        error;    // a bus response other than OKAY was seen
  } dma_status_t;

  // Lightweight peripheral bus behind the Bus Bridge.  One access at a time:
  // req is held until the cycle in which the peripheral answers with ready.
  typedef struct packed {
    logic        req;
    logic        we;
    logic [15:0] addr;
    logic [31:0] wdata;
  } pbus_req_t;

  typedef struct packed {
    logic        ready;
    logic        err;
    logic [31:0] rdata;
  } pbus_rsp_t;

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;
  localparam logic [1:0] RESP_DECERR = 2'b11;

endpackage
