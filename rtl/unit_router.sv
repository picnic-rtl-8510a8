// unit_router: one router of the IPCN 2D mesh, paired with a PE.
//
// Data enter through six FIFO-backed ports: the four planar neighbours
// (N, S, E, W), the local PE (L, through an AXI-Stream slave adapter) and the
// vertical TSV port. Together with the scratchpad these are the router's seven
// data sources. A command from the network main controller says which FIFOs to
// read (rd_en), what to compute (mode_sel), where to send the result (out_en,
// one bit per output port, several bits for a broadcast), and whether the
// scratchpad takes part (intxfer_en, with wr_en choosing write or read and
// sp_addr the word address).
//
// Controller FSM, one command execution per cmd_start pulse:
//   IDLE  -> WAIT  on cmd_start with cmd_valid (an IDLE selection sets done at once)
//   WAIT  -> EXEC  when every FIFO named in rd_en holds a word: the words are
//                  popped and latched, and a scratchpad read is issued if the
//                  command reads the scratchpad
//   EXEC  -> IDLE  when every output named in out_en can accept a word: the
//                  result is pushed to all of them in the same cycle (broadcast
//                  is atomic), written to the scratchpad if asked, and `done`
//                  is raised until the next cmd_start.
// An execution therefore takes at least three cycles (start, WAIT, EXEC).
// Modes: ROUTE forwards the first operand; PSUM adds all operands lane-wise;
// PSUM_ACT adds then applies the linear activation; ACT activates the first
// operand; MAC accumulates the dot product of the first two operands across
// the repetitions of a command (cleared on cmd_first) and sends it out only
// on cmd_last. "First" means the lowest port index, the scratchpad counting
// last. The scratchpad address advances by the repetition index, so a
// repeated command streams through consecutive words.
//
// The port set, the FIFO per port, the field names and the three macros come
// from the paper; the mode encodings, operand order, address stepping and the
// start/done handshake are this design's choices. `sleep` (power gating)
// freezes the controller and refuses input while the scratchpad keeps its
// contents. out_last marks the words of a command's last repetition (tlast on
// the PE side); the softmax unit uses it as its end-of-sequence marker.
//
// Lint notes: the FIFO occupancy output is left open (only full/empty are
// needed); tlast from the PE side (l_in_last) is not used because commands
// count words themselves; the MAC's registered accumulator (mac_acc) is not
// read because the value taken in the current cycle (mac_next) is sent. The
// reset also disables the handshake assertion, which lint reports as a net
// used both asynchronously and synchronously.
module unit_router
  import picnic_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 32,    // 256 B / 8 B
  parameter int unsigned SP_WORDS   = 4096,  // 32 KB / 8 B
  parameter int unsigned NUM_MAC    = 16,
  parameter int unsigned LANE_W     = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sleep,
  // command interface from the NMC
  input  logic                    cmd_start,
  input  logic                    cmd_valid,
  input  instr_t                  cmd,
  input  logic                    cmd_first,
  input  logic                    cmd_last,
  input  logic [REP_W-1:0]        cmd_rep,
  output logic                    done,
  // input ports: index P_N..P_TSV; P_L is the AXI-Stream slave from the PE
  input  word_t [NPORT-1:0]       in_data,
  input  logic  [NPORT-1:0]       in_valid,
  output logic  [NPORT-1:0]       in_ready,
  // output ports; P_L is the AXI-Stream master to the PE
  output word_t [NPORT-1:0]       out_data,
  output logic  [NPORT-1:0]       out_valid,
  output logic                    out_last,   // word belongs to the last repetition
  input  logic  [NPORT-1:0]       out_ready
);
  localparam int unsigned NOPS = NPORT + 1;   // six FIFOs and the scratchpad
  localparam int unsigned SPAW = $clog2(SP_WORDS);

  typedef enum logic [1:0] {R_IDLE, R_WAIT, R_EXEC} rstate_e;
  rstate_e state;

  instr_t            cur;
  logic              cur_first, cur_last;
  logic [REP_W-1:0]  cur_rep;

  // ---------------- input FIFOs ----------------
  word_t             fifo_in   [NPORT];
  logic  [NPORT-1:0] fifo_push, fifo_pop, fifo_full, fifo_empty, fifo_rdy;
  word_t             fifo_head [NPORT];

  // local (PE) input passes through an AXI-Stream slave adapter
  word_t l_in_data;
  logic  l_in_valid, l_in_ready, l_in_last;

  axis_slice #(.WIDTH(DATA_W)) u_axis_slave (
    .clk, .rst_n,
    .s_tdata (in_data[P_L]), .s_tlast(1'b0), .s_tvalid(in_valid[P_L]), .s_tready(in_ready[P_L]),
    .m_tdata (l_in_data),    .m_tlast(l_in_last), .m_tvalid(l_in_valid), .m_tready(l_in_ready)
  );

  for (genvar p = 0; p < NPORT; p++) begin : g_fifo
    if (p == P_L) begin : g_l
      assign fifo_in[p]   = l_in_data;
      assign fifo_push[p] = l_in_valid && fifo_rdy[p];
      assign l_in_ready   = fifo_rdy[p];
    end else begin : g_x
      assign fifo_in[p]   = in_data[p];
      assign fifo_push[p] = in_valid[p] && fifo_rdy[p];
      assign in_ready[p]  = fifo_rdy[p];
    end
    assign fifo_rdy[p] = !fifo_full[p] && !sleep;

    sync_fifo #(.WIDTH(DATA_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .push(fifo_push[p]), .wr_data(fifo_in[p]),
      .pop (fifo_pop[p]),  .rd_data(fifo_head[p]),
      .full(fifo_full[p]), .empty(fifo_empty[p]), .count()
    );
  end

  // ---------------- scratchpad ----------------
  wire              sp_read_cmd  = cur.intxfer_en && !cur.wr_en;
  wire              sp_write_cmd = cur.intxfer_en &&  cur.wr_en;
  wire [SPAW-1:0]   sp_addr      = SPAW'(cur.sp_addr) + SPAW'(cur_rep);
  logic             sp_re, sp_we;
  word_t            sp_rdata;
  word_t            result;
  logic             l_out_ready;

  scratchpad #(.WIDTH(DATA_W), .WORDS(SP_WORDS)) u_sp (
    .clk,
    .rd_en(sp_re), .rd_addr(sp_addr), .rd_data(sp_rdata),
    .wr_en(sp_we), .wr_addr(sp_addr), .wr_data(result)
  );

  // ---------------- operand capture ----------------
  logic [NPORT-1:0]             opnd_mask_q;
  logic [NOPS-1:0][DATA_W-1:0]  ops;
  logic [NOPS-1:0]              ops_sel;
  word_t                        opnd_q [NPORT];

  wire operands_ready = ((~fifo_empty) & cur.rd_en) == cur.rd_en;
  wire do_issue       = (state == R_WAIT) && operands_ready && !sleep;

  assign fifo_pop = do_issue ? cur.rd_en : '0;
  assign sp_re    = do_issue && sp_read_cmd;

  always_ff @(posedge clk) begin
    if (do_issue) begin
      for (int p = 0; p < NPORT; p++) opnd_q[p] <= fifo_head[p];
      opnd_mask_q <= cur.rd_en;
    end
  end

  always_comb begin
    for (int p = 0; p < NPORT; p++) ops[p] = opnd_q[p];
    ops[NPORT] = sp_rdata;
    ops_sel    = {sp_read_cmd, opnd_mask_q};
  end

  // first and second selected operands
  word_t op_a, op_b;
  always_comb begin
    int found;
    found = 0;
    op_a  = '0;
    op_b  = '0;
    for (int o = 0; o < NOPS; o++) begin
      if (ops_sel[o]) begin
        if (found == 0)      op_a = ops[o];
        else if (found == 1) op_b = ops[o];
        found++;
      end
    end
  end

  // ---------------- computational macros ----------------
  word_t psum, act_in, act_out, mac_acc, mac_next;
  logic  act_en;
  mode_e mode;
  assign mode = mode_e'(cur.mode_sel);

  psum_unit #(.DATA_W(DATA_W), .LANE_W(LANE_W), .NOPS(NOPS)) u_psum (
    .sel(ops_sel), .ops(ops), .sum(psum)
  );

  assign act_in = (mode == MODE_ACT) ? op_a : psum;
  assign act_en = (mode == MODE_ACT) || (mode == MODE_PSUM_ACT);

  lin_act #(.DATA_W(DATA_W), .LANE_W(LANE_W)) u_act (
    .en(act_en), .din(act_in), .dout(act_out)
  );

  wire is_mac   = (mode == MODE_MAC);
  wire emits    = !is_mac || cur_last;
  logic [NPORT-1:0] out_rdy_int;
  always_comb begin
    out_rdy_int      = out_ready;
    out_rdy_int[P_L] = l_out_ready;
  end
  wire outs_ok  = ((out_rdy_int & cur.out_en) == cur.out_en) || !emits;
  wire do_exec  = (state == R_EXEC) && outs_ok && !sleep;

  int_mac #(.DATA_W(DATA_W), .NUM_MAC(NUM_MAC)) u_mac (
    .clk, .rst_n,
    .valid(do_exec && is_mac), .first(cur_first),
    .a(op_a), .b(op_b), .acc(mac_acc), .acc_next(mac_next)
  );

  always_comb begin
    unique case (mode)
      MODE_PSUM:     result = psum;
      MODE_PSUM_ACT: result = act_out;
      MODE_ACT:      result = act_out;
      MODE_MAC:      result = mac_next;
      default:       result = op_a;   // MODE_ROUTE and unused codes
    endcase
  end

  assign sp_we = do_exec && sp_write_cmd && emits;

  // ---------------- outputs ----------------
  logic l_out_last_unused;
  for (genvar p = 0; p < NPORT; p++) begin : g_out
    if (p != P_L) begin : g_x
      assign out_data[p]  = result;
      assign out_valid[p] = do_exec && emits && cur.out_en[p];
    end
  end

  assign out_last = cur_last;

  // local output passes through an AXI-Stream master adapter
  axis_slice #(.WIDTH(DATA_W)) u_axis_master (
    .clk, .rst_n,
    .s_tdata(result), .s_tlast(cur_last),
    .s_tvalid(do_exec && emits && cur.out_en[P_L]), .s_tready(l_out_ready),
    .m_tdata(out_data[P_L]), .m_tlast(l_out_last_unused),
    .m_tvalid(out_valid[P_L]), .m_tready(out_ready[P_L])
  );

  // ---------------- controller FSM ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= R_IDLE;
      done      <= 1'b1;
      cur       <= '0;
      cur_first <= 1'b0;
      cur_last  <= 1'b0;
      cur_rep   <= '0;
    end else begin
      if (cmd_start) begin
        cur       <= cmd;
        cur_first <= cmd_first;
        cur_last  <= cmd_last;
        cur_rep   <= cmd_rep;
        state     <= cmd_valid ? R_WAIT : R_IDLE;
        done      <= !cmd_valid;
      end else begin
        unique case (state)
          R_WAIT: if (do_issue) state <= R_EXEC;
          R_EXEC: if (do_exec) begin
            state <= R_IDLE;
            done  <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

  // A command never starts while the previous one is still running.
  assert property (@(posedge clk) disable iff (!rst_n) cmd_start |-> done);
endmodule
