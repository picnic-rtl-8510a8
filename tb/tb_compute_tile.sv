// tb_compute_tile: one compute tile at reduced size (4 x 4 mesh, 16 x 16 PEs)
// runs an attention-style program from its program memory: input vectors
// arrive on optical links and go to PEs 0 and 2 (static-weight MAC), router 1
// reduces the two PE outputs (partial sum), router 5 stores them in its
// scratchpad and multiplies them with query words (dynamic MAC), and the
// score leaves on an optical link. A second bank, written while the first
// runs, sends six scores through the softmax unit above router 5. A third
// program reads the scratchpad back. Everything is compared with values
// computed in the testbench; the cycle count of the whole run is printed.
module tb_compute_tile;
  import picnic_pkg::*;
  localparam int MX = 4, MY = 4;
  localparam int NR = MX*MY, NOPT = (MX/2)*MY;
  localparam int PR = 16, PC = 16, ND = 16, SPW = 64;

  logic clk = 0, rst_n = 0;
  logic sleep;
  logic cp_we, cp_bank;
  npm_region_e cp_region;
  logic [$clog2(ND)-1:0] cp_row;
  logic [7:0] cp_word;
  logic [63:0] cp_wdata;
  logic [31:0] csr_status;
  logic prog_we, cal_we;
  logic [$clog2(NR)-1:0] prog_pe, cal_pe;
  logic [$clog2(PR)-1:0] prog_row;
  logic [$clog2(PC)-1:0] prog_col, cal_col;
  logic [7:0] prog_w;
  logic [15:0] cal_offset;
  word_t opt_out_data [NOPT];
  logic  opt_out_valid [NOPT];
  logic  opt_out_ready [NOPT];
  word_t opt_in_data [NOPT];
  logic  opt_in_valid [NOPT];
  logic  opt_in_ready [NOPT];
  logic nmc_busy;
  logic [31:0] nmc_cmd_count;

  int checks = 0, failures = 0;
  word_t optq [NOPT][$];
  int n_repeat = 0;

  compute_tile #(
    .MESH_X(MX), .MESH_Y(MY), .FIFO_DEPTH(8), .SP_WORDS(SPW), .PE_ROWS(PR), .PE_COLS(PC),
    .NPM_DEPTH(ND), .SCU_DEPTH(16)
  ) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (rst_n)
    for (int o = 0; o < NOPT; o++)
      if (opt_out_valid[o] && opt_out_ready[o]) optq[o].push_back(opt_out_data[o]);
  // ---------------- helpers ----------------
  function automatic instr_t mk(mode_e m, logic [5:0] rd, logic [5:0] oe, bit ix, bit we, int addr);
    instr_t c;
    c.sp_addr = SP_AW'(addr); c.wr_en = we; c.intxfer_en = ix;
    c.out_en = oe; c.mode_sel = m; c.rd_en = rd;
    return c;
  endfunction

  task automatic cp_write(bit bank, npm_region_e r, int row, int word, logic [63:0] d);
    @(negedge clk);
    cp_we = 1; cp_bank = bank; cp_region = r; cp_row = row[$clog2(ND)-1:0];
    cp_word = 8'(word); cp_wdata = d;
    @(negedge clk); cp_we = 0;
  endtask

  // one program row: two commands, a list of (router, selection) pairs, repeat
  task automatic prog_row_w(int t, bit bank, int row, instr_t c1, instr_t c2,
                            int r_a, int s_a, int r_b, int s_b, int rep);
    logic [2*NR+REP_W-1:0] cfr;
    cfr = '0;
    if (r_a >= 0) cfr[2*r_a +: 2] = 2'(s_a);
    if (r_b >= 0) cfr[2*r_b +: 2] = 2'(s_b);
    cfr[2*NR +: REP_W] = REP_W'(rep);
    cp_write(bank, REG_CMR, row, 0, {4'h0, c2, c1});
    cp_write(bank, REG_CFR, row, 0, 64'(cfr));
    if (rep > 1) n_repeat++;
  endtask

  task automatic commit(int t, bit bank, int len);
    cp_write(bank, REG_CSR, 0, 0, 64'(len));
  endtask

  task automatic opt_send(int t, int o, word_t d);
    @(negedge clk);
    opt_in_valid[o] = 1; opt_in_data[o] = d;
    @(posedge clk);
    while (!opt_in_ready[o]) @(posedge clk);
    @(negedge clk); opt_in_valid[o] = 0;
  endtask

  task automatic wait_opt(int t, int o, int n);
    while (optq[o].size() < n) @(posedge clk);
  endtask

  // ---------------- reference data ----------------
  int    wgt [1][2][PR][PC];
  int    off [1][2][PC];
  int    xin [1][2][PR];
  word_t psumw [1][4];
  word_t qw [1][4];

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
        prog_we = 1; prog_pe = 4'(p * 2);
        prog_row = 4'(r); prog_col = 4'(c); prog_w = 8'(wgt[t][p][r][c]);
      end
      for (int c = 0; c < PC; c++) begin
        off[t][p][c] = int'($urandom % 16) - 8;
        @(negedge clk);
        prog_we = 0; cal_we = 1; cal_pe = 4'(p * 2);
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
    chk($signed(optq[0][0]) == e, $sformatf("tile %0d DMAC score %0d exp %0d", t, $signed(optq[0][0]), e));
    optq[0].delete();
  endtask

  initial begin
    int xs [6];
    int t0;
    longint ex [6], sum, recip, knot [9];
    for (int k = 0; k < 9; k++) knot[k] = longint'($exp(real'(k - 4)) * 65536.0);
    sleep = 0;
    cp_we = 0; cp_bank = 0; cp_region = REG_CMR; cp_row = '0; cp_word = '0; cp_wdata = '0;
    prog_we = 0; cal_we = 0; prog_pe = 0; cal_pe = 0;
    prog_row = 0; prog_col = 0; prog_w = 0; cal_col = 0; cal_offset = 0;
    for (int o = 0; o < NOPT; o++) begin
      opt_in_valid[o] = 0; opt_in_data[o] = '0; opt_out_ready[o] = 1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    setup_pes(0);
    t0 = $time / 10;
    load_attention(0, 1'b0);
    feed_attention(0);
    prog_row_w(0, 1'b1, 0, mk(MODE_ROUTE, 6'b100000, 6'b000100, 0, 0, 0), '0, 4, 1, -1, 0, 6);
    prog_row_w(0, 1'b1, 1, mk(MODE_ROUTE, 6'b001000, 6'b100000, 0, 0, 0), '0, 5, 1, -1, 0, 6);
    prog_row_w(0, 1'b1, 2, mk(MODE_ROUTE, 6'b100000, 6'b001000, 0, 0, 0), '0, 5, 1, -1, 0, 6);
    prog_row_w(0, 1'b1, 3, mk(MODE_ROUTE, 6'b000100, 6'b100000, 0, 0, 0), '0, 4, 1, -1, 0, 6);
    commit(0, 1'b1, 4);
    check_attention(0);
    $display("attention program done after %0d cycles", $time / 10 - t0);
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
      chk(optq[2][i] == word_t'(p), $sformatf("softmax %0d got %0d exp %0d", i, optq[2][i], p));
    end
    optq[2].delete();
    repeat (5) @(posedge clk);
    chk(csr_status[31:16] == 2, "both banks completed");
    prog_row_w(0, 1'b0, 0, mk(MODE_ROUTE, 6'b000000, 6'b000001, 1, 0, 0), '0, 5, 1, -1, 0, 4);
    prog_row_w(0, 1'b0, 1, mk(MODE_ROUTE, 6'b000010, 6'b001000, 0, 0, 0), '0, 1, 1, -1, 0, 4);
    prog_row_w(0, 1'b0, 2, mk(MODE_ROUTE, 6'b000100, 6'b100000, 0, 0, 0), '0, 0, 1, -1, 0, 4);
    commit(0, 1'b0, 3);
    wait_opt(0, 0, 4);
    for (int k = 0; k < 4; k++) chk(optq[0][k] == psumw[0][k], $sformatf("scratchpad word %0d", k));
    chk(n_repeat > 0, "repetitions used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
