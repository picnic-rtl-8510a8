// lin_act: linear-activation macro of the unit router.
//
// Applies a rectified-linear function lane by lane to a 64-bit word of signed
// LANE_W-bit lanes: a negative lane becomes zero, others pass unchanged. When
// `en` is low the word passes through untouched, so the same path serves the
// "partial sum" and "partial sum + activation" outputs. The paper names a
// linear activation macro without its function; the rectified form is this
// design's choice. Purely combinational.
module lin_act #(
  parameter int unsigned DATA_W = 64,
  parameter int unsigned LANE_W = 16
) (
  input  logic              en,
  input  logic [DATA_W-1:0] din,
  output logic [DATA_W-1:0] dout
);
  localparam int unsigned LANES = DATA_W / LANE_W;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      if (en && din[l*LANE_W + LANE_W - 1]) dout[l*LANE_W +: LANE_W] = '0;
      else                                  dout[l*LANE_W +: LANE_W] = din[l*LANE_W +: LANE_W];
    end
  end
endmodule
