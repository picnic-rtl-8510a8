// tb_npm: fills both banks of a small program memory through the
// co-processor port, commits them through the CSR, reads rows back on the
// controller port, and checks the ping-pong lock: writes to a committed bank
// are dropped and become possible again after the controller releases it.
module tb_npm;
  import picnic_pkg::*;
  localparam int NR = 40, D = 8;   // CFR is 84 bits: two 64-bit chunks
  localparam int CFR_W = 2*NR + REP_W;
  logic clk = 0, rst_n = 0;
  logic cp_we, cp_bank, nmc_re, nmc_bank, nmc_release, nmc_cur_bank;
  npm_region_e cp_region;
  logic [$clog2(D)-1:0] cp_row, nmc_row;
  logic [7:0] cp_word;
  logic [63:0] cp_wdata, nmc_cmr;
  logic [31:0] csr_status;
  logic [CFR_W-1:0] nmc_cfr;
  logic [1:0] bank_ready;
  logic [1:0][$clog2(D):0] bank_len;
  logic [63:0] cmr_m [2][D];
  logic [127:0] cfr_m [2][D];
  int checks = 0, failures = 0;

  npm #(.NUM_ROUTERS(NR), .DEPTH(D)) dut (.*);
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

  task automatic wr(bit bank, npm_region_e reg_, int row, int word, logic [63:0] d);
    @(negedge clk);
    cp_we = 1; cp_bank = bank; cp_region = reg_; cp_row = row[$clog2(D)-1:0];
    cp_word = 8'(word); cp_wdata = d;
    @(negedge clk); cp_we = 0;
  endtask

  task automatic rd_check(bit bank, int row);
    @(negedge clk);
    nmc_re = 1; nmc_bank = bank; nmc_row = row[$clog2(D)-1:0];
    @(negedge clk); nmc_re = 0;
    chk(nmc_cmr == cmr_m[bank][row], "cmr read");
    chk(nmc_cfr == cfr_m[bank][row][CFR_W-1:0], "cfr read");
  endtask

  initial begin
    cp_we = 0; cp_bank = 0; cp_region = REG_CMR; cp_row = 0; cp_word = 0; cp_wdata = 0;
    nmc_re = 0; nmc_bank = 0; nmc_row = 0; nmc_release = 0; nmc_cur_bank = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(bank_ready == 2'b00, "no bank ready after reset");
    for (int b = 0; b < 2; b++) for (int r = 0; r < D; r++) begin
      cmr_m[b][r] = {$urandom, $urandom};
      cfr_m[b][r] = {$urandom, $urandom, $urandom, $urandom};
      wr(b[0], REG_CMR, r, 0, cmr_m[b][r]);
      wr(b[0], REG_CFR, r, 0, cfr_m[b][r][63:0]);
      wr(b[0], REG_CFR, r, 1, cfr_m[b][r][127:64]);
    end
    wr(1'b0, REG_CSR, 0, 0, 64'd5);
    chk(bank_ready == 2'b01 && bank_len[0] == 5, "bank 1 committed");
    chk(csr_status[1:0] == 2'b01, "status shows bank ready");
    // writes into a committed bank are dropped
    wr(1'b0, REG_CMR, 2, 0, 64'hDEAD);
    for (int r = 0; r < D; r++) rd_check(1'b0, r);
    // the other bank can still be written
    cmr_m[1][3] = 64'h1234_5678_9ABC_DEF0;
    wr(1'b1, REG_CMR, 3, 0, cmr_m[1][3]);
    wr(1'b1, REG_CSR, 0, 0, 64'd8);
    chk(bank_ready == 2'b11 && bank_len[1] == 8, "bank 2 committed");
    for (int r = 0; r < D; r++) rd_check(1'b1, r);
    // release bank 1, then it accepts writes again
    @(negedge clk); nmc_release = 1; nmc_cur_bank = 0;
    @(negedge clk); nmc_release = 0;
    chk(bank_ready == 2'b10, "bank 1 released");
    chk(csr_status[31:16] == 1, "one bank completed");
    cmr_m[0][2] = 64'hBEEF;
    wr(1'b0, REG_CMR, 2, 0, 64'hBEEF);
    rd_check(1'b0, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
