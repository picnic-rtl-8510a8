// ccpg_ctrl: chiplet clustering and power gating (CCPG) controller.
//
// Compute tiles sit on a GRID_X x GRID_Y grid (4 x 4 in the paper's
// illustration) and are grouped into clusters of CL_X x CL_Y adjacent tiles
// (2 x 2, four tiles, as in the paper). A language model runs layer after
// layer and each layer is mapped onto one cluster, so at any time only one
// cluster needs to compute. With ccpg_en high, the controller keeps exactly
// that cluster awake and puts every other tile to sleep: in a sleeping tile
// only the scratchpads (the key/value cache) stay powered; the RRAM weights
// are non-volatile. `advance` moves the active cluster to the next one
// (wrapping round after the last); `set_valid` jumps to `set_cluster`. With
// ccpg_en low every tile is awake, the paper's baseline without CCPG.
// Tile t is at (t % GRID_X, t / GRID_X); cluster numbers run in row-major
// order over the cluster grid. sleep[] is registered: it changes one cycle
// after the request. The advance/jump interface is this design's choice.
//
// Lint note: the reset also disables the assertions, which lint reports as a
// net used both asynchronously and synchronously.
module ccpg_ctrl #(
  parameter int unsigned GRID_X = 4,
  parameter int unsigned GRID_Y = 4,
  parameter int unsigned CL_X   = 2,
  parameter int unsigned CL_Y   = 2,
  localparam int unsigned NT    = GRID_X * GRID_Y,
  localparam int unsigned NCL   = (GRID_X / CL_X) * (GRID_Y / CL_Y),
  localparam int unsigned CW    = (NCL > 1) ? $clog2(NCL) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ccpg_en,
  input  logic          advance,
  input  logic          set_valid,
  input  logic [CW-1:0] set_cluster,
  output logic [CW-1:0] active_cluster,
  output logic [NT-1:0] sleep,
  output logic [15:0]   switch_count
);
  function automatic int unsigned cluster_of(int unsigned t);
    return ((t / GRID_X) / CL_Y) * (GRID_X / CL_X) + (t % GRID_X) / CL_X;
  endfunction

  logic [CW-1:0] next_cluster;
  always_comb begin
    if (set_valid)                         next_cluster = set_cluster;
    else if (advance)                      next_cluster = (32'(active_cluster) == NCL - 1) ? '0 : active_cluster + 1'b1;
    else                                   next_cluster = active_cluster;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_cluster <= '0;
      sleep          <= '0;
      switch_count   <= '0;
    end else begin
      active_cluster <= next_cluster;
      if (next_cluster != active_cluster) switch_count <= switch_count + 1'b1;
      for (int t = 0; t < NT; t++)
        sleep[t] <= ccpg_en && (cluster_of(t) != 32'(next_cluster));
    end
  end

  // When gating is on, exactly one cluster's tiles are awake.
  assert property (@(posedge clk) disable iff (!rst_n)
    ccpg_en |=> ($countones(~sleep) == CL_X * CL_Y));
endmodule
