// compute_tile: one compute-tile chiplet (3D-stacked IC) of the accelerator.
//
// The middle die holds the IPCN: a MESH_X x MESH_Y 2D mesh of router-PE pairs
// (32 x 32 in the paper), the network program memory (NPM) and the network
// main controller (NMC). Router (x, y) is number y*MESH_X + x; its N/S/E/W
// ports connect to routers (x, y-1), (x, y+1), (x+1, y) and (x-1, y). Ports
// that leave the mesh accept and drop data and never deliver any. Each router
// talks to its RRAM PE through its local AXI-Stream port.
//
// Vertical TSV ports alternate by column, as in the paper: routers in odd
// columns (x = 1, 3, ...) reach the activation-function die above, modelled
// here as one softmax compute unit (SCU) per such router; routers in even
// columns reach the optical-engine die below, whose links are brought out as
// the opt_* ports. On the TSV link to an SCU, a word carries a Q4.12 score in
// bits [15:0], and the router's out_last (last repetition of the command that
// sends the scores) ends the sequence; the SCU answers with a Q0.16
// probability in bits [15:0], upper bits zero.
//
// The configuration co-processor that fills the NPM is not part of the tile;
// its write port is the cp_* port. PE weights and calibration offsets are
// programmed through a shared bus addressed by PE number. `sleep` is the power
// gate of the chiplet-clustering scheme: routers and the NMC stop, scratchpads
// and PE weights keep their contents.
//
// Lint notes: the NMC program counter (nmc_pc) is for observation only and is
// not used inside the tile. The reset also disables assertions in the blocks
// below, which lint reports as a net used both asynchronously and synchronously.
module compute_tile
  import picnic_pkg::*;
#(
  parameter int unsigned MESH_X      = 32,
  parameter int unsigned MESH_Y      = 32,
  parameter int unsigned FIFO_DEPTH  = 32,
  parameter int unsigned SP_WORDS    = 4096,
  parameter int unsigned PE_ROWS     = 256,
  parameter int unsigned PE_COLS     = 256,
  parameter int unsigned NPM_DEPTH   = 64,
  parameter int unsigned SCU_DEPTH   = 256,
  localparam int unsigned NR   = MESH_X * MESH_Y,
  localparam int unsigned NOPT = ((MESH_X + 1) / 2) * MESH_Y
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           sleep,
  // configuration co-processor -> NPM
  input  logic                           cp_we,
  input  logic                           cp_bank,
  input  npm_region_e                    cp_region,
  input  logic [$clog2(NPM_DEPTH)-1:0]   cp_row,
  input  logic [7:0]                     cp_word,
  input  logic [63:0]                    cp_wdata,
  output logic [31:0]                    csr_status,
  // PE weight programming / calibration
  input  logic                           prog_we,
  input  logic [$clog2(NR)-1:0]          prog_pe,
  input  logic [$clog2(PE_ROWS)-1:0]     prog_row,
  input  logic [$clog2(PE_COLS)-1:0]     prog_col,
  input  logic [7:0]                     prog_w,
  input  logic                           cal_we,
  input  logic [$clog2(NR)-1:0]          cal_pe,
  input  logic [$clog2(PE_COLS)-1:0]     cal_col,
  input  logic [15:0]                    cal_offset,
  // TSV links to the optical-engine die (even columns)
  output word_t                          opt_out_data  [NOPT],
  output logic                           opt_out_valid [NOPT],
  input  logic                           opt_out_ready [NOPT],
  input  word_t                          opt_in_data   [NOPT],
  input  logic                           opt_in_valid  [NOPT],
  output logic                           opt_in_ready  [NOPT],
  // status
  output logic                           nmc_busy,
  output logic [31:0]                    nmc_cmd_count
);
  // ---------------- NPM and NMC ----------------
  logic                          npm_re, npm_bank, npm_release, nmc_cur_bank;
  logic [$clog2(NPM_DEPTH)-1:0]  npm_row;
  logic [63:0]                   npm_cmr;
  logic [2*NR+REP_W-1:0]         npm_cfr;
  logic [1:0]                    bank_ready;
  logic [1:0][$clog2(NPM_DEPTH):0] bank_len;
  logic [$clog2(NPM_DEPTH):0]    nmc_pc;

  logic                          rt_start, rt_first, rt_last;
  instr_t                        rt_cmd [NR];
  logic   [NR-1:0]               rt_valid, rt_done;
  logic [REP_W-1:0]              rt_rep;

  npm #(.NUM_ROUTERS(NR), .DEPTH(NPM_DEPTH)) u_npm (
    .clk, .rst_n,
    .cp_we, .cp_bank, .cp_region, .cp_row, .cp_word, .cp_wdata, .csr_status,
    .nmc_re(npm_re), .nmc_bank(npm_bank), .nmc_row(npm_row),
    .nmc_cmr(npm_cmr), .nmc_cfr(npm_cfr), .bank_ready, .bank_len,
    .nmc_release(npm_release), .nmc_cur_bank(nmc_cur_bank)
  );
  assign nmc_cur_bank = npm_bank;

  nmc #(.NUM_ROUTERS(NR), .DEPTH(NPM_DEPTH)) u_nmc (
    .clk, .rst_n, .enable(!sleep),
    .npm_re, .npm_bank, .npm_row, .npm_cmr, .npm_cfr, .bank_ready, .bank_len,
    .npm_release,
    .rt_start, .rt_cmd, .rt_valid, .rt_first, .rt_last, .rt_rep, .rt_done,
    .pc(nmc_pc), .busy(nmc_busy), .cmd_count(nmc_cmd_count)
  );

  // ---------------- mesh of router-PE pairs ----------------
  word_t [NPORT-1:0] r_in_data   [NR];
  word_t [NPORT-1:0] r_out_data  [NR];
  logic  [NPORT-1:0] r_in_valid  [NR];
  logic  [NPORT-1:0] r_in_ready  [NR];
  logic  [NPORT-1:0] r_out_valid [NR];
  logic  [NPORT-1:0] r_out_ready [NR];
  logic              r_out_last  [NR];

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int unsigned R = y * MESH_X + x;

      unit_router #(
        .FIFO_DEPTH(FIFO_DEPTH), .SP_WORDS(SP_WORDS)
      ) u_router (
        .clk, .rst_n, .sleep,
        .cmd_start(rt_start), .cmd_valid(rt_valid[R]), .cmd(rt_cmd[R]),
        .cmd_first(rt_first), .cmd_last(rt_last), .cmd_rep(rt_rep), .done(rt_done[R]),
        .in_data(r_in_data[R]), .in_valid(r_in_valid[R]), .in_ready(r_in_ready[R]),
        .out_data(r_out_data[R]), .out_valid(r_out_valid[R]), .out_last(r_out_last[R]),
        .out_ready(r_out_ready[R])
      );

      // planar links: my output toward a direction feeds the neighbour's
      // input port of the opposite direction
      if (y > 0) begin : g_n
        assign r_in_data [R][P_N]   = r_out_data [R-MESH_X][P_S];
        assign r_in_valid[R][P_N]   = r_out_valid[R-MESH_X][P_S];
        assign r_out_ready[R][P_N]  = r_in_ready [R-MESH_X][P_S];
      end else begin : g_n_edge
        assign r_in_data [R][P_N]   = '0;
        assign r_in_valid[R][P_N]   = 1'b0;
        assign r_out_ready[R][P_N]  = 1'b1;
      end
      if (y < MESH_Y-1) begin : g_s
        assign r_in_data [R][P_S]   = r_out_data [R+MESH_X][P_N];
        assign r_in_valid[R][P_S]   = r_out_valid[R+MESH_X][P_N];
        assign r_out_ready[R][P_S]  = r_in_ready [R+MESH_X][P_N];
      end else begin : g_s_edge
        assign r_in_data [R][P_S]   = '0;
        assign r_in_valid[R][P_S]   = 1'b0;
        assign r_out_ready[R][P_S]  = 1'b1;
      end
      if (x < MESH_X-1) begin : g_e
        assign r_in_data [R][P_E]   = r_out_data [R+1][P_W];
        assign r_in_valid[R][P_E]   = r_out_valid[R+1][P_W];
        assign r_out_ready[R][P_E]  = r_in_ready [R+1][P_W];
      end else begin : g_e_edge
        assign r_in_data [R][P_E]   = '0;
        assign r_in_valid[R][P_E]   = 1'b0;
        assign r_out_ready[R][P_E]  = 1'b1;
      end
      if (x > 0) begin : g_w
        assign r_in_data [R][P_W]   = r_out_data [R-1][P_E];
        assign r_in_valid[R][P_W]   = r_out_valid[R-1][P_E];
        assign r_out_ready[R][P_W]  = r_in_ready [R-1][P_E];
      end else begin : g_w_edge
        assign r_in_data [R][P_W]   = '0;
        assign r_in_valid[R][P_W]   = 1'b0;
        assign r_out_ready[R][P_W]  = 1'b1;
      end

      // processing element on the local port
      logic pe_tlast_unused;
      rram_pe #(.ROWS(PE_ROWS), .COLS(PE_COLS)) u_pe (
        .clk, .rst_n,
        .prog_we(prog_we && prog_pe == ($clog2(NR))'(R)), .prog_row, .prog_col, .prog_w,
        .cal_we(cal_we && cal_pe == ($clog2(NR))'(R)), .cal_col, .cal_offset,
        .s_tdata(r_out_data[R][P_L]), .s_tvalid(r_out_valid[R][P_L]), .s_tready(r_out_ready[R][P_L]),
        .m_tdata(r_in_data[R][P_L]),  .m_tvalid(r_in_valid[R][P_L]),  .m_tlast(pe_tlast_unused),
        .m_tready(r_in_ready[R][P_L])
      );

      // vertical TSV port
      if (x % 2 == 1) begin : g_scu
        logic [15:0] scu_out;
        logic        scu_last_unused;
        scu #(.CACHE_DEPTH(SCU_DEPTH)) u_scu (
          .clk, .rst_n,
          .valid_in(r_out_valid[R][P_TSV]), .last_in(r_out_last[R]),
          .data_in(r_out_data[R][P_TSV][15:0]), .in_ready(r_out_ready[R][P_TSV]),
          .out_valid(r_in_valid[R][P_TSV]), .out_last(scu_last_unused), .out_data(scu_out),
          .out_ready(r_in_ready[R][P_TSV])
        );
        assign r_in_data[R][P_TSV] = {48'd0, scu_out};
      end else begin : g_opt
        localparam int unsigned O = y * ((MESH_X + 1) / 2) + x / 2;
        assign opt_out_data [O]      = r_out_data [R][P_TSV];
        assign opt_out_valid[O]      = r_out_valid[R][P_TSV];
        assign r_out_ready[R][P_TSV] = opt_out_ready[O];
        assign r_in_data [R][P_TSV]  = opt_in_data [O];
        assign r_in_valid[R][P_TSV]  = opt_in_valid[O];
        assign opt_in_ready[O]       = r_in_ready[R][P_TSV];
      end
    end
  end
endmodule
