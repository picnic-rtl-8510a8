// tb_nmc: drives the controller from a testbench model of the program memory
// (two banks of random rows, synchronous read) and of four routers that take a
// random time to finish. Every command start is checked against the expected
// sequence: per-router command from the crossbar (IDLE, CMD1 or CMD2), the
// repetition index and first/last flags, and the number of repetitions. Also
// checked: the bank release after the last row and the switch to the other
// bank, and that no start is issued before all routers are done.
module tb_nmc;
  import picnic_pkg::*;
  localparam int NR = 4, D = 8;
  localparam int CFR_W = 2*NR + REP_W;
  logic clk = 0, rst_n = 0;
  logic enable, npm_re, npm_bank, npm_release, rt_start, rt_first, rt_last, busy;
  logic [$clog2(D)-1:0] npm_row;
  logic [63:0] npm_cmr;
  logic [CFR_W-1:0] npm_cfr;
  logic [1:0] bank_ready;
  logic [1:0][$clog2(D):0] bank_len;
  instr_t rt_cmd [NR];
  logic [NR-1:0] rt_valid, rt_done;
  logic [REP_W-1:0] rt_rep;
  logic [$clog2(D):0] pc;
  logic [31:0] cmd_count;
  int checks = 0, failures = 0;

  logic [63:0]      cmr_m [2][D];
  logic [CFR_W-1:0] cfr_m [2][D];
  int busy_cnt [NR];

  nmc #(.NUM_ROUTERS(NR), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // program memory model
  always_ff @(posedge clk) if (npm_re) begin
    npm_cmr <= cmr_m[npm_bank][npm_row];
    npm_cfr <= cfr_m[npm_bank][npm_row];
  end
  always @(posedge clk) if (rst_n && npm_release) bank_ready[npm_bank] = 1'b0;

  // router models: done drops on start and rises after a random delay
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rt_done <= '1;
      for (int r = 0; r < NR; r++) busy_cnt[r] <= 0;
    end else begin
      for (int r = 0; r < NR; r++) begin
        if (rt_start) begin
          rt_done[r]  <= !rt_valid[r];
          busy_cnt[r] <= rt_valid[r] ? int'($urandom % 6) : 0;
        end else if (!rt_done[r]) begin
          if (busy_cnt[r] == 0) rt_done[r] <= 1'b1;
          else busy_cnt[r] <= busy_cnt[r] - 1;
        end
      end
    end
  end

  // expected start sequence
  typedef struct { instr_t cmd [NR]; logic [NR-1:0] valid; int rep; bit first, last; } exp_t;
  exp_t expq [$];
  int starts = 0, releases = 0;

  always @(posedge clk) if (rst_n) begin
    if (rt_start) begin
      starts++;
      checks++;
      if (rt_done !== '1) begin failures++; $display("FAIL start while routers busy"); end
      if (expq.size() == 0) begin
        failures++; $display("FAIL unexpected start");
      end else begin
        exp_t e;
        e = expq.pop_front();
        checks++;
        if (rt_valid != e.valid || rt_rep != REP_W'(e.rep) || rt_first != e.first || rt_last != e.last) begin
          failures++;
          $display("FAIL start %0d valid %b/%b rep %0d/%0d first %b/%b last %b/%b", starts,
                   rt_valid, e.valid, rt_rep, e.rep, rt_first, e.first, rt_last, e.last);
        end
        for (int r = 0; r < NR; r++) begin
          checks++;
          if (rt_valid[r] && rt_cmd[r] != e.cmd[r]) begin failures++; $display("FAIL cmd router %0d", r); end
        end
      end
    end
    if (npm_release) releases++;
  end

  task automatic load_bank(int b, int len);
    for (int row = 0; row < len; row++) begin
      instr_t c1, c2;
      logic [2*NR-1:0] sel;
      int rep, n;
      c1 = instr_t'(30'($urandom)); c2 = instr_t'(30'($urandom));
      for (int r = 0; r < NR; r++) sel[2*r +: 2] = 2'($urandom % 3);
      rep = $urandom % 4;
      cmr_m[b][row] = {4'h0, c2, c1};
      cfr_m[b][row] = {REP_W'(rep), sel};
      n = (rep == 0) ? 1 : rep;
      for (int k = 0; k < n; k++) begin
        exp_t e;
        for (int r = 0; r < NR; r++) begin
          e.valid[r] = sel[2*r +: 2] != 2'd0;
          e.cmd[r]   = (sel[2*r +: 2] == 2'd1) ? c1 : c2;
        end
        e.rep = k; e.first = (k == 0); e.last = (k == n - 1);
        expq.push_back(e);
      end
    end
    bank_len[b] = ($clog2(D)+1)'(len);
  endtask

  initial begin
    enable = 0; bank_ready = 0; bank_len = '0;
    repeat (2) @(posedge clk);
    rst_n = 1; enable = 1;
    load_bank(0, 5);
    load_bank(1, 3);
    @(negedge clk); bank_ready = 2'b11;
    wait (releases == 2);
    repeat (5) @(posedge clk);
    chk(expq.size() == 0, "all expected commands issued");
    chk(!busy, "controller idle after both banks");
    chk(bank_ready == 2'b00, "both banks released");
    // refill bank 0 while idle: the controller resumes with bank 0 (ping-pong order)
    load_bank(0, 2);
    @(negedge clk); bank_ready[0] = 1'b1;
    wait (releases == 3);
    repeat (5) @(posedge clk);
    chk(expq.size() == 0, "refilled bank executed");
    chk(cmd_count == 32'(starts), "command counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
