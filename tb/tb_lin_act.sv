// tb_lin_act: random words, activation on and off; negative lanes must become
// zero when enabled and every lane must pass unchanged when disabled.
module tb_lin_act;
  localparam int DW = 64, LW = 16, L = DW / LW;
  logic en;
  logic [DW-1:0] din, dout;
  int checks = 0, failures = 0;

  lin_act #(.DATA_W(DW), .LANE_W(LW)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      en = ($urandom % 2) == 1;
      din = {$urandom, $urandom};
      #1;
      for (int l = 0; l < L; l++) begin
        int x, e;
        x = int'($signed(din[l*LW +: LW]));
        e = (en && x < 0) ? 0 : x;
        checks++;
        if (int'($signed(dout[l*LW +: LW])) != e) begin
          failures++;
          $display("FAIL en=%0d x=%0d got %0d", en, x, $signed(dout[l*LW +: LW]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
