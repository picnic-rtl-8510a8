// picnic_system: the accelerator as a set of compute-tile chiplets under
// chiplet clustering and power gating.
//
// GRID_X x GRID_Y compute tiles (4 x 2 by default: two clusters; the paper's
// clustering illustration shows 4 x 4), each a 3D-stacked chiplet with its own IPCN mesh, PEs, NPM,
// NMC and softmax units. The CCPG controller decides which cluster of four
// adjacent tiles is awake; the others sleep with only their scratchpads kept.
//
// Not part of this RTL, and therefore brought out as ports: the silicon
// photonic network between tiles and to the DRAM (each tile's optical-engine
// TSV links, opt_*), the configuration co-processors that write each tile's
// program memory (cp_*), and the host that programs PE weights (prog_*,
// cal_*) and steps the clusters (ccpg_*). All tiles share one clock and reset.
module picnic_system
  import picnic_pkg::*;
#(
  parameter int unsigned GRID_X     = 4,
  parameter int unsigned GRID_Y     = 2,
  parameter int unsigned CL_X       = 2,
  parameter int unsigned CL_Y       = 2,
  parameter int unsigned MESH_X     = 32,
  parameter int unsigned MESH_Y     = 32,
  parameter int unsigned FIFO_DEPTH = 32,
  parameter int unsigned SP_WORDS   = 4096,
  parameter int unsigned PE_ROWS    = 256,
  parameter int unsigned PE_COLS    = 256,
  parameter int unsigned NPM_DEPTH  = 64,
  parameter int unsigned SCU_DEPTH  = 256,
  localparam int unsigned NT   = GRID_X * GRID_Y,
  localparam int unsigned NCL  = (GRID_X / CL_X) * (GRID_Y / CL_Y),
  localparam int unsigned CW   = (NCL > 1) ? $clog2(NCL) : 1,
  localparam int unsigned NR   = MESH_X * MESH_Y,
  localparam int unsigned NOPT = ((MESH_X + 1) / 2) * MESH_Y
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // CCPG
  input  logic                                   ccpg_en,
  input  logic                                   ccpg_advance,
  input  logic                                   ccpg_set_valid,
  input  logic [CW-1:0]                          ccpg_set_cluster,
  output logic [CW-1:0]                          active_cluster,
  output logic [NT-1:0]                          tile_sleep,
  output logic [15:0]                            ccpg_switch_count,
  // configuration co-processors -> NPM of each tile
  input  logic        [NT-1:0]                   cp_we,
  input  logic        [NT-1:0]                   cp_bank,
  input  npm_region_e [NT-1:0]                   cp_region,
  input  logic        [NT-1:0][$clog2(NPM_DEPTH)-1:0] cp_row,
  input  logic        [NT-1:0][7:0]              cp_word,
  input  logic        [NT-1:0][63:0]             cp_wdata,
  output logic        [NT-1:0][31:0]             csr_status,
  // PE programming bus (shared, tile selected by prog_tile)
  input  logic                                   prog_we,
  input  logic [$clog2(NT)-1:0]                  prog_tile,
  input  logic [$clog2(NR)-1:0]                  prog_pe,
  input  logic [$clog2(PE_ROWS)-1:0]             prog_row,
  input  logic [$clog2(PE_COLS)-1:0]             prog_col,
  input  logic [7:0]                             prog_w,
  input  logic                                   cal_we,
  input  logic [$clog2(NT)-1:0]                  cal_tile,
  input  logic [$clog2(NR)-1:0]                  cal_pe,
  input  logic [$clog2(PE_COLS)-1:0]             cal_col,
  input  logic [15:0]                            cal_offset,
  // optical-engine TSV links of every tile
  output word_t                                  opt_out_data  [NT][NOPT],
  output logic                                   opt_out_valid [NT][NOPT],
  input  logic                                   opt_out_ready [NT][NOPT],
  input  word_t                                  opt_in_data   [NT][NOPT],
  input  logic                                   opt_in_valid  [NT][NOPT],
  output logic                                   opt_in_ready  [NT][NOPT],
  // status
  output logic  [NT-1:0]                         nmc_busy,
  output logic  [NT-1:0][31:0]                   nmc_cmd_count
);
  ccpg_ctrl #(.GRID_X(GRID_X), .GRID_Y(GRID_Y), .CL_X(CL_X), .CL_Y(CL_Y)) u_ccpg (
    .clk, .rst_n, .ccpg_en, .advance(ccpg_advance),
    .set_valid(ccpg_set_valid), .set_cluster(ccpg_set_cluster),
    .active_cluster, .sleep(tile_sleep), .switch_count(ccpg_switch_count)
  );

  for (genvar t = 0; t < NT; t++) begin : g_tile
    compute_tile #(
      .MESH_X(MESH_X), .MESH_Y(MESH_Y), .FIFO_DEPTH(FIFO_DEPTH), .SP_WORDS(SP_WORDS),
      .PE_ROWS(PE_ROWS), .PE_COLS(PE_COLS), .NPM_DEPTH(NPM_DEPTH), .SCU_DEPTH(SCU_DEPTH)
    ) u_tile (
      .clk, .rst_n, .sleep(tile_sleep[t]),
      .cp_we(cp_we[t]), .cp_bank(cp_bank[t]), .cp_region(cp_region[t]), .cp_row(cp_row[t]),
      .cp_word(cp_word[t]), .cp_wdata(cp_wdata[t]), .csr_status(csr_status[t]),
      .prog_we(prog_we && prog_tile == ($clog2(NT))'(t)), .prog_pe, .prog_row, .prog_col, .prog_w,
      .cal_we(cal_we && cal_tile == ($clog2(NT))'(t)), .cal_pe, .cal_col, .cal_offset,
      .opt_out_data(opt_out_data[t]), .opt_out_valid(opt_out_valid[t]), .opt_out_ready(opt_out_ready[t]),
      .opt_in_data(opt_in_data[t]), .opt_in_valid(opt_in_valid[t]), .opt_in_ready(opt_in_ready[t]),
      .nmc_busy(nmc_busy[t]), .nmc_cmd_count(nmc_cmd_count[t])
    );
  end
endmodule
