// rram_pe: behavioural model of the RRAM compute-in-memory processing element.
//
// Behavioural model, not synthesizable logic: the real part is an analog
// resistive crossbar macro with ADCs. It stands in for that macro with its
// digital ports so that the mesh can be simulated end to end.
//
// The PE holds a ROWS x COLS matrix of static weights (256 x 256 in the
// paper), programmed once through the prog_* port and then kept (non-volatile
// in the real device, so it survives power gating). For each input vector it
// computes y[c] = sum_r x[r] * W[r][c] (the static-weight MAC, SMAC), removes
// a per-column offset stored during calibration, and clamps the result to the
// ADC range. These three steps follow the paper's description of the macro;
// the number formats are this model's choices: 8-bit signed inputs and
// weights, 16-bit signed outputs.
//
// Interface: an AXI-Stream slave receives ROWS/8 beats of eight packed inputs
// (element r in bits [8*(r%8) +: 8] of beat r/8); the model then waits
// COMPUTE_CYCLES cycles and sends COLS/4 beats of four packed outputs on its
// AXI-Stream master, tlast on the final beat. It takes no new input while it
// computes or sends.
module rram_pe #(
  parameter int unsigned ROWS           = 256,
  parameter int unsigned COLS           = 256,
  parameter int unsigned COMPUTE_CYCLES = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // weight programming and calibration
  input  logic        prog_we,
  input  logic [$clog2(ROWS)-1:0] prog_row,
  input  logic [$clog2(COLS)-1:0] prog_col,
  input  logic [7:0]  prog_w,
  input  logic        cal_we,
  input  logic [$clog2(COLS)-1:0] cal_col,
  input  logic [15:0] cal_offset,
  // AXI-Stream slave (activations in)
  input  logic [63:0] s_tdata,
  input  logic        s_tvalid,
  output logic        s_tready,
  // AXI-Stream master (results out)
  output logic [63:0] m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  input  logic        m_tready
);
  localparam int unsigned IN_BEATS  = ROWS / 8;
  localparam int unsigned OUT_BEATS = COLS / 4;

  typedef enum logic [1:0] {P_LOAD, P_COMPUTE, P_SEND} pstate_e;
  pstate_e state;

  logic signed [7:0]  w   [ROWS][COLS];
  logic signed [15:0] off [COLS];
  logic signed [7:0]  x   [ROWS];
  logic signed [15:0] y   [COLS];
  int unsigned        beat, wait_cnt;

  always_ff @(posedge clk) begin
    if (prog_we) w[prog_row][prog_col] <= prog_w;
    if (cal_we)  off[cal_col] <= cal_offset;
  end

  assign s_tready = (state == P_LOAD);
  assign m_tvalid = (state == P_SEND);
  assign m_tlast  = m_tvalid && (beat == OUT_BEATS - 1);
  always_comb begin
    for (int k = 0; k < 4; k++) m_tdata[16*k +: 16] = y[(beat*4 + k) % COLS];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= P_LOAD;
      beat     <= 0;
      wait_cnt <= 0;
    end else begin
      unique case (state)
        P_LOAD: if (s_tvalid) begin
          for (int k = 0; k < 8; k++) x[(beat*8 + k) % ROWS] <= s_tdata[8*k +: 8];
          if (beat == IN_BEATS - 1) begin
            beat     <= 0;
            wait_cnt <= 0;
            state    <= P_COMPUTE;
          end else beat <= beat + 1;
        end
        P_COMPUTE: begin
          if (wait_cnt == 0) begin
            for (int c = 0; c < COLS; c++) begin
              longint acc;
              acc = 0;
              for (int r = 0; r < ROWS; r++) acc += longint'(x[r]) * longint'(w[r][c]);
              acc -= longint'(off[c]);
              if (acc > 32767)       y[c] <= 16'sd32767;
              else if (acc < -32768) y[c] <= -16'sd32768;
              else                   y[c] <= 16'(acc);
            end
          end
          if (wait_cnt == COMPUTE_CYCLES - 1) state <= P_SEND;
          wait_cnt <= wait_cnt + 1;
        end
        P_SEND: if (m_tready) begin
          if (beat == OUT_BEATS - 1) begin
            beat  <= 0;
            state <= P_LOAD;
          end else beat <= beat + 1;
        end
        default: state <= P_LOAD;
      endcase
    end
  end
endmodule
