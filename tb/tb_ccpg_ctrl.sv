// tb_ccpg_ctrl: a 4 x 4 grid of tiles in 2 x 2 clusters. Steps through all
// clusters with `advance` (including the wrap-around), jumps with
// `set_cluster`, and switches gating off and on. After each step the sleep
// mask must keep exactly the four tiles of the active cluster awake; the
// membership is worked out here from tile coordinates. Also checks the
// one-cycle update and the switch counter.
module tb_ccpg_ctrl;
  localparam int GX = 4, GY = 4;
  logic clk = 0, rst_n = 0;
  logic ccpg_en, advance, set_valid;
  logic [1:0] set_cluster, active_cluster;
  logic [15:0] sleep;
  logic [15:0] switch_count;
  int checks = 0, failures = 0;

  ccpg_ctrl #(.GRID_X(GX), .GRID_Y(GY), .CL_X(2), .CL_Y(2)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // expected awake mask for cluster c (clusters numbered row-major: 0 1 / 2 3)
  function automatic logic [15:0] awake(int c);
    logic [15:0] m;
    m = '0;
    for (int y = 0; y < GY; y++) for (int x = 0; x < GX; x++)
      if ((y / 2) * 2 + (x / 2) == c) m[y*GX + x] = 1'b1;
    return m;
  endfunction

  initial begin
    int exp_c, sw;
    ccpg_en = 1; advance = 0; set_valid = 0; set_cluster = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    @(negedge clk);
    chk(sleep == ~awake(0), "cluster 0 awake after reset");
    chk(awake(0) == 16'h0033, "cluster 0 is tiles 0,1,4,5");
    exp_c = 0; sw = 0;
    for (int i = 0; i < 9; i++) begin
      advance = 1;
      @(negedge clk);
      advance = 0;
      exp_c = (exp_c + 1) % 4; sw++;
      chk(active_cluster == 2'(exp_c), "active cluster after advance");
      chk(sleep == ~awake(exp_c), $sformatf("sleep mask for cluster %0d: %h", exp_c, sleep));
      repeat ($urandom % 3) @(negedge clk);
      chk(sleep == ~awake(exp_c), "mask holds without requests");
    end
    set_valid = 1; set_cluster = 2'd2;
    @(negedge clk); set_valid = 0;
    if (exp_c != 2) sw++;
    exp_c = 2;
    chk(sleep == ~awake(2), "jump to cluster 2");
    // gating off: everything awake, cluster still tracked
    ccpg_en = 0;
    @(negedge clk);
    chk(sleep == 16'h0000, "all awake when gating is off");
    advance = 1; @(negedge clk); advance = 0; exp_c = 3; sw++;
    chk(sleep == 16'h0000 && active_cluster == 2'd3, "advance tracked while gating off");
    ccpg_en = 1;
    @(negedge clk);
    chk(sleep == ~awake(3), "gating back on");
    chk(switch_count == 16'(sw), $sformatf("switch count %0d exp %0d", switch_count, sw));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
