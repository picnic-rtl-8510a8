// psum_unit: partial-summation macro of the unit router.
//
// Adds, lane by lane, every operand whose bit is set in `sel`. A 64-bit word
// is treated as DATA_W/LANE_W signed lanes (four 16-bit lanes by default) and
// each lane sum saturates to the lane range. It is used for the reduction of
// partial outputs of partitioned weight matrices across router-PE pairs. The
// paper names the macro only; lane width, saturation and the operand count are
// this design's choices. Purely combinational.
module psum_unit #(
  parameter int unsigned DATA_W = 64,
  parameter int unsigned LANE_W = 16,
  parameter int unsigned NOPS   = 7
) (
  input  logic [NOPS-1:0]              sel,
  input  logic [NOPS-1:0][DATA_W-1:0]  ops,
  output logic [DATA_W-1:0]            sum
);
  localparam int unsigned LANES = DATA_W / LANE_W;
  localparam int unsigned ACC_W = LANE_W + $clog2(NOPS) + 1;
  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'(2**(LANE_W-1) - 1);
  localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(2**(LANE_W-1));

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [ACC_W-1:0] acc;
      acc = '0;
      for (int o = 0; o < NOPS; o++)
        if (sel[o]) acc += ACC_W'($signed(ops[o][l*LANE_W +: LANE_W]));
      if (acc > MAXV)      sum[l*LANE_W +: LANE_W] = MAXV[LANE_W-1:0];
      else if (acc < MINV) sum[l*LANE_W +: LANE_W] = MINV[LANE_W-1:0];
      else                 sum[l*LANE_W +: LANE_W] = acc[LANE_W-1:0];
    end
  end
endmodule
