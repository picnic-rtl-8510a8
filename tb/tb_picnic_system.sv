// tb_picnic_system: end-to-end test of the accelerator at reduced size
// (4 x 1 tiles in two clusters of two, 4 x 4 meshes, 16 x 16 PEs).
//
// Tile 0 (cluster 0 awake) runs an attention-style program written into its
// program memory through the co-processor port:
//   bank 1: input vectors arrive on optical links and go to PEs 0 and 2
//           (static-weight MAC), the two PE outputs are reduced by router 1
//           (partial sum), stored in router 5's scratchpad, multiplied with
//           query words by router 5's MAC (dynamic MAC) and the score is sent
//           out on an optical link;
//   bank 2: written while bank 1 runs (ping-pong), sends six scores to the
//           softmax unit above router 5 and the probabilities back out.
// Tile 2 gets a program while it sleeps and must not run it until the
// clusters advance. After switching back, tile 0 reads its scratchpad to show
// that the stored data survived the sleep. Finally CCPG is switched off and
// every tile must be awake. All results are compared with values computed in
// the testbench; each mechanism is counted and must have occurred.
module tb_picnic_system;
  import picnic_pkg::*;
  localparam int GX = 4, GY = 1, CX = 2, CY = 1, MX = 4, MY = 4;
  localparam int NT = GX*GY, NR = MX*MY, NOPT = (MX/2)*MY;
  localparam int PR = 16, PC = 16, ND = 16, SPW = 64;
  localparam int CW = 1;

  logic clk = 0, rst_n = 0;
  logic ccpg_en, ccpg_advance, ccpg_set_valid;
  logic [CW-1:0] ccpg_set_cluster, active_cluster;
  logic [NT-1:0] tile_sleep;
  logic [15:0] ccpg_switch_count;
  logic [NT-1:0] cp_we, cp_bank;
  npm_region_e [NT-1:0] cp_region;
  logic [NT-1:0][$clog2(ND)-1:0] cp_row;
  logic [NT-1:0][7:0] cp_word;
  logic [NT-1:0][63:0] cp_wdata;
  logic [NT-1:0][31:0] csr_status;
  logic prog_we, cal_we;
  logic [$clog2(NT)-1:0] prog_tile, cal_tile;
  logic [$clog2(NR)-1:0] prog_pe, cal_pe;
  logic [$clog2(PR)-1:0] prog_row;
  logic [$clog2(PC)-1:0] prog_col, cal_col;
  logic [7:0] prog_w;
  logic [15:0] cal_offset;
  word_t opt_out_data [NT][NOPT];
  logic  opt_out_valid [NT][NOPT];
  logic  opt_out_ready [NT][NOPT];
  word_t opt_in_data [NT][NOPT];
  logic  opt_in_valid [NT][NOPT];
  logic  opt_in_ready [NT][NOPT];
  logic [NT-1:0] nmc_busy;
  logic [NT-1:0][31:0] nmc_cmd_count;

  int checks = 0, failures = 0;
  word_t optq [NT][NOPT][$];

  // mechanism counters
  int n_smac = 0, n_psum = 0, n_mac = 0, n_softmax = 0, n_pingpong = 0, n_repeat = 0;
  int n_operand_wait = 0, n_sleep_hold = 0, n_cluster_switch = 0, n_ccpg_off = 0, n_retention = 0;

  picnic_system #(
    .GRID_X(GX), .GRID_Y(GY), .CL_X(CX), .CL_Y(CY), .MESH_X(MX), .MESH_Y(MY),
    .FIFO_DEPTH(8), .SP_WORDS(SPW), .PE_ROWS(PR), .PE_COLS(PC), .NPM_DEPTH(ND), .SCU_DEPTH(16)
  ) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // optical-link sinks
  always @(posedge clk) if (rst_n)
    for (int t = 0; t < NT; t++) for (int o = 0; o < NOPT; o++)
      if (opt_out_valid[t][o] && opt_out_ready[t][o]) optq[t][o].push_back(opt_out_data[t][o]);

  // router 5 of tile 0 waiting for an operand
  always @(posedge clk) if (rst_n) begin
    if (dut.g_tile[0].u_tile.g_y[1].g_x[1].u_router.state == 2'd1 &&
        !dut.g_tile[0].u_tile.g_y[1].g_x[1].u_router.operands_ready) n_operand_wait++;
    if (tile_sleep[2] && csr_status[2][0] && !nmc_busy[2]) n_sleep_hold++;
  end

  // ---------------- helpers ----------------
  function automatic instr_t mk(mode_e m, logic [5:0] rd, logic [5:0] oe, bit ix, bit we, int addr);
    instr_t c;
    c.sp_addr = SP_AW'(addr); c.wr_en = we; c.intxfer_en = ix;
    c.out_en = oe; c.mode_sel = m; c.rd_en = rd;
    return c;
  endfunction

  task automatic cp_write(int t, bit bank, npm_region_e r, int row, int word, logic [63:0] d);
    @(negedge clk);
    cp_we[t] = 1; cp_bank[t] = bank; cp_region[t] = r; cp_row[t] = row[$clog2(ND)-1:0];
    cp_word[t] = 8'(word); cp_wdata[t] = d;
    @(negedge clk); cp_we[t] = 0;
  endtask

  // one program row: two commands, a list of (router, selection) pairs, repeat
  task automatic prog_row_w(int t, bit bank, int row, instr_t c1, instr_t c2,
                            int r_a, int s_a, int r_b, int s_b, int rep);
    logic [2*NR+REP_W-1:0] cfr;
    cfr = '0;
    if (r_a >= 0) cfr[2*r_a +: 2] = 2'(s_a);
    if (r_b >= 0) cfr[2*r_b +: 2] = 2'(s_b);
    cfr[2*NR +: REP_W] = REP_W'(rep);
    cp_write(t, bank, REG_CMR, row, 0, {4'h0, c2, c1});
    cp_write(t, bank, REG_CFR, row, 0, 64'(cfr));
    if (rep > 1) n_repeat++;
  endtask

  task automatic commit(int t, bit bank, int len);
    cp_write(t, bank, REG_CSR, 0, 0, 64'(len));
  endtask

  task automatic opt_send(int t, int o, word_t d);
    @(negedge clk);
    opt_in_valid[t][o] = 1; opt_in_data[t][o] = d;
    @(posedge clk);
    while (!opt_in_ready[t][o]) @(posedge clk);
    @(negedge clk); opt_in_valid[t][o] = 0;
  endtask

  task automatic wait_opt(int t, int o, int n);
    while (optq[t][o].size() < n) @(posedge clk);
  endtask

  // ---------------- reference data ----------------
  int    wgt [NT][2][PR][PC];
  int    off [NT][2][PC];
  int    xin [NT][2][PR];
  word_t psumw [NT][4];
  word_t qw [NT][4];

  function automatic int sat16(int v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction

  function automatic longint dot4(word_t a, word_t b);
    longint s;
    s = 0;
    for (int i = 0; i < 16; i++) begin
      int x, y;
      x = int'(a[4*i +: 4]); if (x > 7) x -= 16;
      y = int'(b[4*i +: 4]); if (y > 7) y -= 16;
      s += longint'(x * y);
    end
    return s;
  endfunction

  // program PEs 0 and 2 of tile t, compute expected reduced output words
  task automatic setup_pes(int t);
    for (int p = 0; p < 2; p++) begin
      for (int r = 0; r < PR; r++) for (int c = 0; c < PC; c++) begin
        wgt[t][p][r][c] = int'($urandom % 32) - 16;
        @(negedge clk);
        prog_we = 1; prog_tile = 2'(t); prog_pe = 4'(p * 2);
        prog_row = 4'(r); prog_col = 4'(c); prog_w = 8'(wgt[t][p][r][c]);
      end
      for (int c = 0; c < PC; c++) begin
        off[t][p][c] = int'($urandom % 16) - 8;
        @(negedge clk);
        prog_we = 0; cal_we = 1; cal_tile = 2'(t); cal_pe = 4'(p * 2);
        cal_col = 4'(c); cal_offset = 16'(off[t][p][c]);
      end
      @(negedge clk); cal_we = 0;
      for (int r = 0; r < PR; r++) xin[t][p][r] = int'($urandom % 64) - 32;
    end
    for (int wv = 0; wv < 4; wv++) begin
      for (int k = 0; k < 4; k++) begin
        int c, s;
        c = wv*4 + k;
        s = 0;
        for (int p = 0; p < 2; p++) begin
          int y;
          y = 0;
          for (int r = 0; r < PR; r++) y += xin[t][p][r] * wgt[t][p][r][c];
          s += sat16(y - off[t][p][c]);
        end
        psumw[t][wv][16*k +: 16] = 16'(sat16(s));
      end
      qw[t][wv] = {$urandom, $urandom};
    end
  endtask

  // bank with the SMAC / reduction / DMAC program (7 rows)
  task automatic load_attention(int t, bit bank);
    prog_row_w(t, bank, 0, mk(MODE_ROUTE, 6'b100000, 6'b010000, 0, 0, 0), '0, 0, 1, 2, 1, 2);
    prog_row_w(t, bank, 1, mk(MODE_ROUTE, 6'b010000, 6'b000100, 0, 0, 0),
                           mk(MODE_ROUTE, 6'b010000, 6'b001000, 0, 0, 0), 0, 1, 2, 2, 4);
    prog_row_w(t, bank, 2, mk(MODE_PSUM, 6'b001100, 6'b000010, 0, 0, 0), '0, 1, 1, -1, 0, 4);
    prog_row_w(t, bank, 3, mk(MODE_ROUTE, 6'b000001, 6'b000000, 1, 1, 0), '0, 5, 1, -1, 0, 4);
    prog_row_w(t, bank, 4, mk(MODE_ROUTE, 6'b100000, 6'b000100, 0, 0, 0),
                           mk(MODE_MAC, 6'b001000, 6'b000001, 1, 0, 0), 4, 1, 5, 2, 4);
    prog_row_w(t, bank, 5, mk(MODE_ROUTE, 6'b000010, 6'b001000, 0, 0, 0), '0, 1, 1, -1, 0, 1);
    prog_row_w(t, bank, 6, mk(MODE_ROUTE, 6'b000100, 6'b100000, 0, 0, 0), '0, 0, 1, -1, 0, 1);
    commit(t, bank, 7);
  endtask

  task automatic feed_attention(int t);
    for (int p = 0; p < 2; p++)
      for (int bt = 0; bt < PR/8; bt++) begin
        word_t w;
        for (int k = 0; k < 8; k++) w[8*k +: 8] = 8'(xin[t][p][bt*8 + k]);
        opt_send(t, p, w);        // routers 0 and 2 are links 0 and 1
      end
    for (int k = 0; k < 4; k++) opt_send(t, 2, qw[t][k]);   // router 4 is link 2
  endtask

  task automatic check_attention(int t);
    longint e;
    e = 0;
    for (int k = 0; k < 4; k++) e += dot4(qw[t][k], psumw[t][k]);
    wait_opt(t, 0, 1);
    chk($signed(optq[t][0][0]) == e, $sformatf("tile %0d DMAC score %0d exp %0d", t, $signed(optq[t][0][0]), e));
    optq[t][0].delete();
    n_smac++; n_psum++; n_mac++;
  endtask

  initial begin
    int xs [6];
    longint ex [6], sum, recip, knot [9];
    for (int k = 0; k < 9; k++) knot[k] = longint'($exp(real'(k - 4)) * 65536.0);
    ccpg_en = 1; ccpg_advance = 0; ccpg_set_valid = 0; ccpg_set_cluster = 0;
    cp_we = '0; cp_bank = '0; cp_region = '{default: REG_CMR}; cp_row = '0; cp_word = '0; cp_wdata = '0;
    prog_we = 0; cal_we = 0; prog_tile = 0; cal_tile = 0; prog_pe = 0; cal_pe = 0;
    prog_row = 0; prog_col = 0; prog_w = 0; cal_col = 0; cal_offset = 0;
    for (int t = 0; t < NT; t++) for (int o = 0; o < NOPT; o++) begin
      opt_in_valid[t][o] = 0; opt_in_data[t][o] = '0; opt_out_ready[t][o] = 1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    chk(tile_sleep == 4'b1100, "cluster 0 awake, cluster 1 asleep");

    setup_pes(0);
    setup_pes(2);
    load_attention(0, 1'b0);
    load_attention(2, 1'b0);      // tile 2 sleeps: its program must wait
    feed_attention(0);
    // bank 2 of tile 0 (softmax), written while bank 1 runs
    prog_row_w(0, 1'b1, 0, mk(MODE_ROUTE, 6'b100000, 6'b000100, 0, 0, 0), '0, 4, 1, -1, 0, 6);
    prog_row_w(0, 1'b1, 1, mk(MODE_ROUTE, 6'b001000, 6'b100000, 0, 0, 0), '0, 5, 1, -1, 0, 6);
    prog_row_w(0, 1'b1, 2, mk(MODE_ROUTE, 6'b100000, 6'b001000, 0, 0, 0), '0, 5, 1, -1, 0, 6);
    prog_row_w(0, 1'b1, 3, mk(MODE_ROUTE, 6'b000100, 6'b100000, 0, 0, 0), '0, 4, 1, -1, 0, 6);
    chk(nmc_busy[0], "bank 2 written while bank 1 executes");
    commit(0, 1'b1, 4);
    check_attention(0);
    // softmax scores
    sum = 0;
    for (int i = 0; i < 6; i++) begin
      int xi, fr;
      xs[i] = int'($urandom % 16384) - 8192;
      xi = (xs[i] < 0) ? -((-xs[i] + 4095) / 4096) : xs[i] / 4096;
      fr = xs[i] - xi * 4096;
      ex[i] = knot[xi+4] + (((knot[xi+5] - knot[xi+4]) * fr) >>> 12);
      sum += ex[i];
      opt_send(0, 2, word_t'(16'(xs[i])));
    end
    recip = (longint'(1) <<< 48) / sum;
    wait_opt(0, 2, 6);
    for (int i = 0; i < 6; i++) begin
      longint p;
      p = (ex[i] * recip) >>> 32;
      if (p > 65535) p = 65535;
      chk(optq[0][2][i] == word_t'(p), $sformatf("softmax %0d got %0d exp %0d", i, optq[0][2][i], p));
    end
    optq[0][2].delete();
    n_softmax++;
    repeat (5) @(posedge clk);
    chk(csr_status[0][31:16] == 2, "both banks of tile 0 completed");
    n_pingpong += (csr_status[0][31:16] == 2) ? 1 : 0;
    chk(nmc_cmd_count[2] == 0, "sleeping tile ran nothing");
    chk(!nmc_busy[2] && csr_status[2][0], "sleeping tile holds its committed program");

    // switch clusters: tile 2 wakes and runs its program
    @(negedge clk); ccpg_advance = 1;
    @(negedge clk); ccpg_advance = 0;
    chk(active_cluster == 1 && tile_sleep == 4'b0011, "cluster 1 awake after advance");
    n_cluster_switch++;
    feed_attention(2);
    check_attention(2);

    // back to cluster 0: the scratchpad of tile 0 router 5 kept the reduced words
    @(negedge clk); ccpg_set_valid = 1; ccpg_set_cluster = 0;
    @(negedge clk); ccpg_set_valid = 0;
    chk(tile_sleep == 4'b1100, "cluster 0 awake again");
    n_cluster_switch++;
    prog_row_w(0, 1'b0, 0, mk(MODE_ROUTE, 6'b000000, 6'b000001, 1, 0, 0), '0, 5, 1, -1, 0, 4);
    prog_row_w(0, 1'b0, 1, mk(MODE_ROUTE, 6'b000010, 6'b001000, 0, 0, 0), '0, 1, 1, -1, 0, 4);
    prog_row_w(0, 1'b0, 2, mk(MODE_ROUTE, 6'b000100, 6'b100000, 0, 0, 0), '0, 0, 1, -1, 0, 4);
    commit(0, 1'b0, 3);
    wait_opt(0, 0, 4);
    for (int k = 0; k < 4; k++) chk(optq[0][0][k] == psumw[0][k], $sformatf("retained scratchpad word %0d", k));
    n_retention++;

    // CCPG off: every tile awake
    @(negedge clk); ccpg_en = 0;
    @(negedge clk);
    chk(tile_sleep == '0, "all tiles awake without CCPG");
    n_ccpg_off++;

    chk(n_smac > 0, "static MAC in PE");
    chk(n_psum > 0, "partial-sum reduction");
    chk(n_mac > 0, "dynamic MAC");
    chk(n_softmax > 0, "softmax");
    chk(n_pingpong > 0, "bank ping-pong");
    chk(n_repeat > 0, "command repetition");
    chk(n_operand_wait > 0, "router operand wait");
    chk(n_sleep_hold > 0, "committed program held by sleep");
    chk(n_cluster_switch > 0, "cluster switch");
    chk(n_retention > 0, "scratchpad retention across sleep");
    chk(n_ccpg_off > 0, "CCPG disabled mode");
    $display("mechanisms: smac %0d psum %0d mac %0d softmax %0d pingpong %0d repeat %0d operand_wait %0d sleep_hold %0d switch %0d retention %0d ccpg_off %0d",
             n_smac, n_psum, n_mac, n_softmax, n_pingpong, n_repeat, n_operand_wait, n_sleep_hold,
             n_cluster_switch, n_retention, n_ccpg_off);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
