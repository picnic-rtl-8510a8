// int_mac: integer multiply-accumulate macro (DMAC) of the unit router.
//
// Multiplies two dynamic-data words element by element with NUM_MAC
// multipliers (16, as the paper's "non-weighted MAC #") and adds the products
// into a signed DATA_W-bit accumulator. With the 64-bit word this gives
// 4-bit signed elements; the element width follows from the two numbers in
// the paper, the signedness is this design's choice. The accumulator is
// cleared by `first` (the first repetition of a command) and updated on
// `valid`. `acc_next` is the combinational value the accumulator takes this
// cycle, so the router can forward the final dot product in the same cycle
// as the last update. Used for the Q.K and S.V products of attention.
module int_mac #(
  parameter int unsigned DATA_W  = 64,
  parameter int unsigned NUM_MAC = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              valid,
  input  logic              first,
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b,
  output logic [DATA_W-1:0] acc,
  output logic [DATA_W-1:0] acc_next
);
  localparam int unsigned EW = DATA_W / NUM_MAC;

  logic signed [DATA_W-1:0] dot;

  always_comb begin
    dot = '0;
    for (int i = 0; i < NUM_MAC; i++) begin
      logic signed [DATA_W-1:0] ea, eb;
      ea  = DATA_W'($signed(a[i*EW +: EW]));
      eb  = DATA_W'($signed(b[i*EW +: EW]));
      dot += ea * eb;
    end
    acc_next = (first ? '0 : acc) + dot;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (valid) acc <= acc_next;
  end
endmodule
