// tb_psum_unit: random operands and selections; reference lane sums with
// saturation computed in the testbench with plain integers.
module tb_psum_unit;
  localparam int DW = 64, LW = 16, NO = 7, L = DW / LW;
  logic [NO-1:0] sel;
  logic [NO-1:0][DW-1:0] ops;
  logic [DW-1:0] sum;
  int checks = 0, failures = 0;

  psum_unit #(.DATA_W(DW), .LANE_W(LW), .NOPS(NO)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sat_seen = 0;
    for (int i = 0; i < 3000; i++) begin
      sel = NO'($urandom);
      for (int o = 0; o < NO; o++)
        // mix small values with full-range ones so that saturation happens
        ops[o] = (i % 3 == 0) ? {$urandom, $urandom} :
                 {16'($urandom % 200 - 100), 16'($urandom % 200 - 100),
                  16'($urandom % 200 - 100), 16'($urandom % 200 - 100)};
      #1;
      for (int l = 0; l < L; l++) begin
        int s, e;
        s = 0;
        for (int o = 0; o < NO; o++) if (sel[o]) s += int'($signed(ops[o][l*LW +: LW]));
        e = (s > 32767) ? 32767 : (s < -32768) ? -32768 : s;
        if (e != s) sat_seen++;
        checks++;
        if ($signed(sum[l*LW +: LW]) != e) begin
          failures++;
          $display("FAIL lane %0d got %0d exp %0d", l, $signed(sum[l*LW +: LW]), e);
        end
      end
    end
    checks++;
    if (sat_seen == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
