// tb_unit_router: runs one router through every command mode with words fed
// into its input FIFOs and outputs collected under random back-pressure:
// unicast and broadcast routing, partial sum, partial sum with activation,
// activation, scratchpad write and read (intxfer_en), and a three-repetition
// multiply-accumulate that reads the scratchpad at stepping addresses. Every
// output word is compared with a value computed in the testbench. Also
// checked: the router waits (done low) while an operand is missing, and holds
// its result while an output is not ready; the minimum of three cycles per
// execution.
module tb_unit_router;
  import picnic_pkg::*;
  logic clk = 0, rst_n = 0;
  logic sleep, cmd_start, cmd_valid, cmd_first, cmd_last, done, out_last;
  instr_t cmd;
  logic [REP_W-1:0] cmd_rep;
  word_t [NPORT-1:0] in_data, out_data;
  logic [NPORT-1:0] in_valid, in_ready, out_valid, out_ready;
  int checks = 0, failures = 0;
  word_t outq [NPORT][$];
  int stall_in = 0, stall_out = 0, rand_ready = 0;

  unit_router #(.FIFO_DEPTH(4), .SP_WORDS(64)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // output collection with optional random back-pressure
  always @(negedge clk) out_ready = rand_ready ? NPORT'($urandom) : '1;
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NPORT; p++) if (out_valid[p] && out_ready[p]) outq[p].push_back(out_data[p]);
    if (!done && dut.state == 2'd2 && !((out_ready | ~dut.cur.out_en) == '1)) stall_out++;
    if (!done && dut.state == 2'd1 && !((~dut.fifo_empty & dut.cur.rd_en) == dut.cur.rd_en)) stall_in++;
  end

  task automatic push(int p, word_t d);
    @(negedge clk);
    in_valid[p] = 1; in_data[p] = d;
    @(posedge clk);
    while (!in_ready[p]) @(posedge clk);
    @(negedge clk); in_valid[p] = 0;
  endtask

  task automatic run(instr_t c, bit first, bit last, int rep, output int cycles);
    @(negedge clk);
    cmd = c; cmd_valid = 1; cmd_first = first; cmd_last = last; cmd_rep = REP_W'(rep);
    cmd_start = 1;
    @(negedge clk); cmd_start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  function automatic instr_t mk(mode_e m, logic [5:0] rd, logic [5:0] oe, bit ix, bit we, int addr);
    instr_t c;
    c.sp_addr = SP_AW'(addr); c.wr_en = we; c.intxfer_en = ix;
    c.out_en = oe; c.mode_sel = m; c.rd_en = rd;
    return c;
  endfunction

  function automatic word_t lanesum(word_t a, word_t b, word_t c, int n, bit relu);
    word_t r;
    for (int l = 0; l < 4; l++) begin
      int s;
      s = int'($signed(a[16*l +: 16])) + int'($signed(b[16*l +: 16]));
      if (n > 2) s += int'($signed(c[16*l +: 16]));
      if (s > 32767) s = 32767;
      if (s < -32768) s = -32768;
      if (relu && s < 0) s = 0;
      r[16*l +: 16] = 16'(s);
    end
    return r;
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

  function automatic word_t rnd();
    return {$urandom, $urandom};
  endfunction

  initial begin
    int cyc;
    word_t a, b, c, r;
    word_t kv [3];
    longint acc;
    sleep = 0; cmd_start = 0; cmd_valid = 0; cmd = '0; cmd_first = 0; cmd_last = 0; cmd_rep = 0;
    in_valid = '0; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    for (int iter = 0; iter < 20; iter++) begin
      rand_ready = iter % 2;
      // 1. broadcast route N -> E, S, TSV
      a = rnd(); push(P_N, a);
      run(mk(MODE_ROUTE, 6'b000001, 6'b100110, 0, 0, 0), 1, 1, 0, cyc);
      repeat (2) @(posedge clk);
      chk(cyc >= 3, "at least three cycles per execution");
      foreach (outq[p]) begin
        if (p == P_E || p == P_S || p == P_TSV) chk(outq[p].size() == 1 && outq[p][0] == a, $sformatf("broadcast port %0d", p));
        else chk(outq[p].size() == 0, "no spurious output");
        outq[p].delete();
      end
      // 2. partial sum of N, W, L (L through the AXI-Stream adapter) -> TSV
      a = rnd(); b = rnd(); c = rnd();
      push(P_N, a); push(P_W, b); push(P_L, c);
      run(mk(MODE_PSUM, 6'b011001, 6'b100000, 0, 0, 0), 1, 1, 0, cyc);
      repeat (2) @(posedge clk);
      chk(outq[P_TSV].size() == 1 && outq[P_TSV][0] == lanesum(a, b, c, 3, 0), "psum");
      outq[P_TSV].delete();
      // 3. psum + activation of N, S written to scratchpad word 5+iter, no output.
      //    The operands arrive after the command: the router must wait.
      a = rnd(); b = rnd();
      fork
        run(mk(MODE_PSUM_ACT, 6'b000011, 6'b000000, 1, 1, 5 + iter), 1, 1, 0, cyc);
        begin repeat (4) @(posedge clk); chk(!done, "waits for operands"); push(P_N, a); push(P_S, b); end
      join
      r = lanesum(a, b, '0, 2, 1);
      // 4. read that scratchpad word back, route it to W and L (local PE)
      run(mk(MODE_ROUTE, 6'b000000, 6'b011000, 1, 0, 5 + iter), 1, 1, 0, cyc);
      repeat (4) @(posedge clk);
      chk(outq[P_W].size() == 1 && outq[P_W][0] == r, "scratchpad write/read with activation");
      chk(outq[P_L].size() == 1 && outq[P_L][0] == r, "local output through adapter");
      outq[P_W].delete(); outq[P_L].delete();
      // 5. activation of a TSV word -> N
      a = rnd(); push(P_TSV, a);
      run(mk(MODE_ACT, 6'b100000, 6'b000001, 0, 0, 0), 1, 1, 0, cyc);
      repeat (2) @(posedge clk);
      chk(outq[P_N].size() == 1 && outq[P_N][0] == lanesum(a, '0, '0, 2, 1), "activation");
      outq[P_N].delete();
      // 6. store three key words from E into scratchpad 40..42 (repeated write)
      for (int k = 0; k < 3; k++) begin
        kv[k] = rnd(); push(P_E, kv[k]);
        run(mk(MODE_ROUTE, 6'b000100, 6'b000000, 1, 1, 40), k == 0, k == 2, k, cyc);
      end
      // 7. MAC over three repetitions: query words from N times keys from the
      //    scratchpad (address steps with the repetition), result to S at the end
      acc = 0;
      for (int k = 0; k < 3; k++) begin
        a = rnd(); push(P_N, a);
        acc += dot4(a, kv[k]);
        run(mk(MODE_MAC, 6'b000001, 6'b000010, 1, 0, 40), k == 0, k == 2, k, cyc);
        if (k < 2) chk(outq[P_S].size() == 0, "no MAC output before the last repetition");
      end
      repeat (2) @(posedge clk);
      chk(outq[P_S].size() == 1 && $signed(outq[P_S][0]) == acc, $sformatf("MAC result %0d", acc));
      outq[P_S].delete();
    end
    chk(stall_in > 0, "operand wait exercised");
    chk(stall_out > 0, "output back-pressure exercised");
    $display("stalls: operand %0d output %0d", stall_in, stall_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
