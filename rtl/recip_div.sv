// recip_div: reciprocal unit of the softmax compute unit.
//
// Computes q = floor(2^SHIFT / d) with a bit-serial restoring divider: one
// quotient bit per cycle, SHIFT+1 cycles from `start` to `done`. The result
// stays valid until the next start. d = 0 gives all ones. Bit-serial division
// is this design's choice; the paper only names a reciprocal block.
//
// Lint note: the stored remainder is always below the divisor, so its top bit
// is zero and is never read.
module recip_div #(
  parameter int unsigned D_W   = 32,
  parameter int unsigned SHIFT = 48
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [D_W-1:0]   d,
  output logic [SHIFT:0]   q,
  output logic             done
);
  localparam int unsigned CW = $clog2(SHIFT + 2);

  logic [D_W:0]   rem;
  logic [D_W-1:0] dq;
  logic [CW-1:0]  bitn;
  logic           run;

  logic [D_W:0]   rem_sh;
  always_comb rem_sh = {rem[D_W-1:0], (bitn == CW'(SHIFT))};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem  <= '0;
      dq   <= '0;
      q    <= '0;
      bitn <= '0;
      run  <= 1'b0;
      done <= 1'b0;
    end else if (start) begin
      rem  <= '0;
      dq   <= d;
      q    <= '0;
      bitn <= CW'(SHIFT);
      run  <= 1'b1;
      done <= 1'b0;
    end else if (run) begin
      if (rem_sh >= {1'b0, dq}) begin
        rem          <= rem_sh - {1'b0, dq};
        q[bitn]      <= 1'b1;
      end else begin
        rem          <= rem_sh;
      end
      if (bitn == '0) begin
        run  <= 1'b0;
        done <= 1'b1;
      end else begin
        bitn <= bitn - 1'b1;
      end
    end
  end
endmodule
