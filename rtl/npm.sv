// npm: Network Program Memory of the IPCN.
//
// Three banks as in the paper: B1 and B2, each split into a command-register
// sub-bank (CMR, 64-bit rows holding CMD_1 in [29:0] and CMD_2 in [59:30]) and
// a configuration-register sub-bank (CFR rows holding a 2-bit command
// selection per router in [2N-1:0] and a 4-bit repeat number above it), plus
// a control/status register bank (CSR).
//
// Ping-pong use: the configuration co-processor fills one bank while the
// network main controller (NMC) executes the other. The co-processor writes
// 64-bit words (CFR rows, being wider, are written as numbered 64-bit chunks)
// and then commits the bank by writing its row count into the CSR, which
// marks the bank ready. While a bank is ready it belongs to the NMC and
// co-processor writes to it are dropped; the NMC releases it when its last row
// has executed. CSR writes: row 0 commits bank `cp_bank` with length
// wdata[15:0]. Status (csr_status): [1:0] bank ready flags, [2] bank the NMC
// executes next, [31:16] number of banks completed so far. The NMC read port is synchronous (data the cycle
// after nmc_re). Row count per bank (DEPTH) and the CSR layout are this
// design's choices; the bank/sub-bank structure and field positions follow
// the paper's figure.
module npm
  import picnic_pkg::*;
#(
  parameter int unsigned NUM_ROUTERS = 1024,
  parameter int unsigned DEPTH       = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // co-processor write port
  input  logic                          cp_we,
  input  logic                          cp_bank,
  input  npm_region_e                   cp_region,
  input  logic [$clog2(DEPTH)-1:0]      cp_row,
  input  logic [7:0]                    cp_word,
  input  logic [63:0]                   cp_wdata,
  output logic [31:0]                   csr_status,
  // NMC side
  input  logic                          nmc_re,
  input  logic                          nmc_bank,
  input  logic [$clog2(DEPTH)-1:0]      nmc_row,
  output logic [63:0]                   nmc_cmr,
  output logic [2*NUM_ROUTERS+REP_W-1:0] nmc_cfr,
  output logic [1:0]                    bank_ready,
  output logic [1:0][$clog2(DEPTH):0]   bank_len,
  input  logic                          nmc_release,
  input  logic                          nmc_cur_bank
);
  localparam int unsigned CFR_W  = 2*NUM_ROUTERS + REP_W;
  localparam int unsigned NCHUNK = (CFR_W + 63) / 64;
  localparam int unsigned LW     = $clog2(DEPTH) + 1;

  logic [63:0]           cmr [2][DEPTH];
  logic [NCHUNK*64-1:0]  cfr [2][DEPTH];
  logic [15:0]           banks_done;

  wire wr_ok = cp_we && !bank_ready[cp_bank];

  always_ff @(posedge clk) begin
    if (wr_ok && cp_region == REG_CMR) cmr[cp_bank][cp_row] <= cp_wdata;
    if (wr_ok && cp_region == REG_CFR && 32'(cp_word) < NCHUNK)
      cfr[cp_bank][cp_row][cp_word*64 +: 64] <= cp_wdata;
    if (nmc_re) begin
      nmc_cmr <= cmr[nmc_bank][nmc_row];
      nmc_cfr <= cfr[nmc_bank][nmc_row][CFR_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_ready <= '0;
      bank_len   <= '0;
      banks_done <= '0;
    end else begin
      if (nmc_release) begin
        bank_ready[nmc_cur_bank] <= 1'b0;
        banks_done <= banks_done + 1'b1;
      end
      if (wr_ok && cp_region == REG_CSR && cp_row == '0) begin
        bank_len[cp_bank]   <= LW'(cp_wdata[15:0]);
        bank_ready[cp_bank] <= 1'b1;
      end
    end
  end

  assign csr_status = {banks_done, 13'd0, nmc_cur_bank, bank_ready};
endmodule
