// picnic_pkg: types and constants shared by the IPCN (Inter-PE Computational
// Network) blocks.
//
// The 30-bit IPCN instruction follows the field map printed in the ISA figure:
// sp_addr[29:18], wr_en[17], intxfer_en[16], out_en[15:10], mode_sel[9:6],
// rd_en[5:0]. A command-register (CMR) row is 64 bits holding CMD_1 in [29:0]
// and CMD_2 in [59:30], [63:60] reserved. A configuration-register (CFR) row
// holds the router command selections in its low bits and a 4-bit repeat
// number above them.
//
// Port numbering (bit i of rd_en / out_en), the mode_sel encoding and the
// 2-bit per-router selection code are this design's choices; the paper gives
// the field names but not their encodings.
//
// The port-index and width constants document the encodings; not every
// module that imports the package uses all of them.
package picnic_pkg;

  // System bit width (64) and scratchpad word addressing (32 KB / 8 B = 4096).
  localparam int unsigned DATA_W    = 64;
  localparam int unsigned SP_AW     = 12;
  localparam int unsigned INSTR_W   = 30;
  localparam int unsigned REP_W     = 4;
  localparam int unsigned NPORT     = 6;   // FIFO-backed ports: N,S,E,W,L,TSV

  // Port index used in rd_en / out_en.
  localparam int unsigned P_N   = 0;
  localparam int unsigned P_S   = 1;
  localparam int unsigned P_E   = 2;
  localparam int unsigned P_W   = 3;
  localparam int unsigned P_L   = 4;   // local PE (AXI-Stream)
  localparam int unsigned P_TSV = 5;   // vertical port

  typedef logic [DATA_W-1:0] word_t;

  // Router operation modes (mode_sel).
  typedef enum logic [3:0] {
    MODE_ROUTE    = 4'd0,  // move the first selected operand
    MODE_PSUM     = 4'd1,  // lane-wise sum of all selected operands
    MODE_PSUM_ACT = 4'd2,  // partial sum followed by linear activation
    MODE_ACT      = 4'd3,  // linear activation of the first operand
    MODE_MAC      = 4'd4   // INT MAC: dot product of first two operands
  } mode_e;

  typedef struct packed {
    logic [SP_AW-1:0] sp_addr;     // [29:18]
    logic             wr_en;       // [17]
    logic             intxfer_en;  // [16]
    logic [5:0]       out_en;      // [15:10]
    logic [3:0]       mode_sel;    // [9:6]
    logic [5:0]       rd_en;       // [5:0]
  } instr_t;

  // Per-router command selection code in the CFR.
  typedef enum logic [1:0] {
    SEL_IDLE = 2'd0,
    SEL_CMD1 = 2'd1,
    SEL_CMD2 = 2'd2
  } cmd_sel_e;

  // NPM write regions.
  typedef enum logic [1:0] {
    REG_CMR = 2'd0,
    REG_CFR = 2'd1,
    REG_CSR = 2'd2
  } npm_region_e;

endpackage
