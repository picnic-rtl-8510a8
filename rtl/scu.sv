// scu: Softmax Compute Unit on the activation-function die.
//
// Turns a sequence of attention scores into softmax probabilities. The parts
// and the three-state controller follow the paper's figure: an exponent unit
// (eight-segment piecewise-linear e^x), an indexed cache holding each e^x,
// a partial-sum adder, a reciprocal unit and an output multiplier.
//   S_ACC   (state 1) one score per valid_in: e^x goes to the cache at the
//           running index and is added to the partial sum.
//   S_RECIP (state 2) after the last score, the reciprocal of the sum is
//           computed (bit-serial, RSHIFT+1 cycles).
//   S_OUT   (state 3) each cached e^x is multiplied by the reciprocal and sent
//           out, one per cycle while out_ready is high; after the last one
//           the partial sum is reset and the unit returns to state 1.
// Number formats: score in signed Q4.12, e^x in Q8.16, probability out in
// unsigned Q0.16 (saturated at 0xFFFF). A sequence ends at last_in or when the
// cache is full (CACHE_DEPTH scores). The figure shows only valid_in; the
// last_in marker, in_ready, out_ready, formats and cache depth are this
// design's choices. The paper's figure also writes no max-subtraction, so
// scores are used as given, and values outside [-4,4) are clamped by the
// exponent unit. Timing: one score per cycle in; the first probability is
// valid RSHIFT+3 cycles after the cycle that accepted the last score; then one
// probability per cycle.
module scu #(
  parameter int unsigned IN_W        = 16,
  parameter int unsigned EXP_W       = 24,
  parameter int unsigned OUT_W       = 16,
  parameter int unsigned CACHE_DEPTH = 256,
  parameter int unsigned RSHIFT      = 48
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid_in,
  input  logic             last_in,
  input  logic [IN_W-1:0]  data_in,
  output logic             in_ready,
  output logic             out_valid,
  output logic             out_last,
  output logic [OUT_W-1:0] out_data,
  input  logic             out_ready
);
  localparam int unsigned IW    = $clog2(CACHE_DEPTH);
  localparam int unsigned SUM_W = EXP_W + IW;

  typedef enum logic [1:0] {S_ACC, S_RECIP, S_OUT} sstate_e;
  sstate_e state;

  logic [EXP_W-1:0] exp_y;
  logic [EXP_W-1:0] cache [CACHE_DEPTH];
  logic [IW-1:0]    idx, oidx, last_idx;
  logic [SUM_W-1:0] psum;
  logic             div_start, div_done;
  logic [RSHIFT:0]  recip;
  logic [SUM_W-1:0] psum_final;  // includes the score accepted this cycle

  exp_pwl #(.IN_W(IN_W), .OUT_W(EXP_W)) u_exp (.x(data_in), .y(exp_y));

  recip_div #(.D_W(SUM_W), .SHIFT(RSHIFT)) u_recip (
    .clk, .rst_n, .start(div_start), .d(psum_final), .q(recip), .done(div_done)
  );

  assign in_ready = (state == S_ACC);
  wire   accept   = valid_in && in_ready;
  wire   seq_end  = accept && (last_in || idx == IW'(CACHE_DEPTH-1));
  assign div_start = seq_end;
  assign psum_final = psum + SUM_W'(exp_y);

  // indexed cache write
  always_ff @(posedge clk) begin
    if (accept) cache[idx] <= exp_y;
  end

  // output multiplier: e^x * (2^RSHIFT / sum) >> (RSHIFT - OUT_W)
  logic [EXP_W+RSHIFT:0] prod;
  logic [EXP_W+RSHIFT:0] scaled;
  always_comb begin
    prod   = (EXP_W+RSHIFT+1)'(cache[oidx]) * (EXP_W+RSHIFT+1)'(recip);
    scaled = prod >> (RSHIFT - OUT_W);
    out_data = (scaled > (EXP_W+RSHIFT+1)'({OUT_W{1'b1}})) ? {OUT_W{1'b1}} : OUT_W'(scaled);
  end
  assign out_valid = (state == S_OUT);
  assign out_last  = out_valid && (oidx == last_idx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_ACC;
      idx      <= '0;
      oidx     <= '0;
      last_idx <= '0;
      psum     <= '0;
    end else begin
      unique case (state)
        S_ACC: if (accept) begin
          psum <= psum + SUM_W'(exp_y);
          idx  <= idx + 1'b1;
          if (seq_end) begin
            last_idx <= idx;
            state    <= S_RECIP;
          end
        end
        S_RECIP: if (div_done && !div_start) begin
          oidx  <= '0;
          state <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          if (oidx == last_idx) begin
            idx   <= '0;
            psum  <= '0;          // reset of the partial sum
            state <= S_ACC;
          end else begin
            oidx <= oidx + 1'b1;
          end
        end
        default: state <= S_ACC;
      endcase
    end
  end
endmodule
