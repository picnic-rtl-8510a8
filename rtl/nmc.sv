// nmc: Network Main Controller of the IPCN.
//
// Reads the network program memory row by row and drives every router of the
// mesh. Its parts follow the paper: a program counter (PC); an instruction
// decoder that splits a CMR/CFR row into the two routing commands, the
// per-router command selection and the repeat number; a command crossbar with
// three inputs (IDLE, CMD1, CMD2) and one output per router; and a repeat
// counter that is loaded with the repeat number and decremented each time
// the command completes.
//
// Sequence per row: FETCH (read request) -> DECODE (row arrives, fields
// latched) -> START (one-cycle cmd_start to all routers, each with its own
// command and a valid bit that is low for IDLE) -> WAIT (until every router
// reports done) -> START again while repetitions remain, else the next row.
// After the last row of a bank the bank is released and the controller moves
// to the other bank (ping-pong); it waits in IDLE until that bank is ready.
// A repeat number r runs the command r times (r = 0 also runs it once); the
// routers get the repetition index and first/last flags. The handshake, the
// zero-repeat rule and the 2-bit selection code are this design's choices.
//
// Lint note: CMR bits [63:60] are reserved and not read.
module nmc
  import picnic_pkg::*;
#(
  parameter int unsigned NUM_ROUTERS = 1024,
  parameter int unsigned DEPTH       = 64
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             enable,
  // NPM read side
  output logic                             npm_re,
  output logic                             npm_bank,
  output logic [$clog2(DEPTH)-1:0]         npm_row,
  input  logic [63:0]                      npm_cmr,
  input  logic [2*NUM_ROUTERS+REP_W-1:0]   npm_cfr,
  input  logic [1:0]                       bank_ready,
  input  logic [1:0][$clog2(DEPTH):0]      bank_len,
  output logic                             npm_release,
  // router side
  output logic                             rt_start,
  output instr_t                           rt_cmd [NUM_ROUTERS],
  output logic   [NUM_ROUTERS-1:0]         rt_valid,
  output logic                             rt_first,
  output logic                             rt_last,
  output logic [REP_W-1:0]                 rt_rep,
  input  logic   [NUM_ROUTERS-1:0]         rt_done,
  // status
  output logic [$clog2(DEPTH):0]           pc,
  output logic                             busy,
  output logic [31:0]                      cmd_count
);
  typedef enum logic [2:0] {N_IDLE, N_FETCH, N_DECODE, N_START, N_WAIT} nstate_e;
  nstate_e state;

  instr_t                      cmd1, cmd2;
  logic [2*NUM_ROUTERS-1:0]    sel;
  logic [REP_W-1:0]            rep_cnt, rep_idx;
  logic                        cur_bank;

  // instruction decoder (combinational split of the row just read)
  instr_t                      dec_cmd1, dec_cmd2;
  logic [2*NUM_ROUTERS-1:0]    dec_sel;
  logic [REP_W-1:0]            dec_rep;
  assign dec_cmd1 = instr_t'(npm_cmr[29:0]);
  assign dec_cmd2 = instr_t'(npm_cmr[59:30]);
  assign dec_sel  = npm_cfr[2*NUM_ROUTERS-1:0];
  assign dec_rep  = npm_cfr[2*NUM_ROUTERS +: REP_W];

  // command crossbar: 3 inputs, NUM_ROUTERS outputs
  always_comb begin
    for (int r = 0; r < NUM_ROUTERS; r++) begin
      unique case (cmd_sel_e'(sel[2*r +: 2]))
        SEL_CMD1: begin rt_cmd[r] = cmd1; rt_valid[r] = 1'b1; end
        SEL_CMD2: begin rt_cmd[r] = cmd2; rt_valid[r] = 1'b1; end
        default:  begin rt_cmd[r] = '0;   rt_valid[r] = 1'b0; end
      endcase
    end
  end

  assign npm_bank = cur_bank;
  assign npm_row  = pc[$clog2(DEPTH)-1:0];
  assign npm_re   = (state == N_FETCH);
  assign rt_start = (state == N_START);
  assign rt_rep   = rep_idx;
  assign rt_first = (rep_idx == '0);
  assign rt_last  = (rep_cnt <= 1);
  assign busy     = (state != N_IDLE);

  wire all_done = &rt_done;
  wire last_row = (pc + 1'b1 >= bank_len[cur_bank]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= N_IDLE;
      pc          <= '0;
      cur_bank    <= 1'b0;
      cmd1        <= '0;
      cmd2        <= '0;
      sel         <= '0;
      rep_cnt     <= '0;
      rep_idx     <= '0;
      npm_release <= 1'b0;
      cmd_count   <= '0;
    end else begin
      npm_release <= 1'b0;
      unique case (state)
        N_IDLE: if (npm_release) begin
          cur_bank <= ~cur_bank;     // bank released last cycle: go to the other one
        end else if (enable && bank_ready[cur_bank] && bank_len[cur_bank] != '0) begin
          pc    <= '0;
          state <= N_FETCH;
        end
        N_FETCH:  state <= N_DECODE;
        N_DECODE: begin
          cmd1    <= dec_cmd1;
          cmd2    <= dec_cmd2;
          sel     <= dec_sel;
          rep_cnt <= dec_rep;
          rep_idx <= '0;
          state   <= N_START;
        end
        N_START: state <= N_WAIT;
        N_WAIT: if (all_done) begin
          cmd_count <= cmd_count + 1'b1;
          if (rep_cnt > 1) begin
            rep_cnt <= rep_cnt - 1'b1;
            rep_idx <= rep_idx + 1'b1;
            state   <= N_START;
          end else if (last_row) begin
            npm_release <= 1'b1;
            state       <= N_IDLE;
          end else begin
            pc    <= pc + 1'b1;
            state <= N_FETCH;
          end
        end
        default: state <= N_IDLE;
      endcase
    end
  end
endmodule
