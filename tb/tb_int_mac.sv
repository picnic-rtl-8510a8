// tb_int_mac: dot-product accumulation over random runs of 1..8 word pairs;
// the reference multiplies the sixteen signed 4-bit elements in the testbench.
module tb_int_mac;
  localparam int DW = 64, NM = 16, EW = DW / NM;
  logic clk = 0, rst_n = 0;
  logic valid, first;
  logic [DW-1:0] a, b, acc, acc_next;
  int checks = 0, failures = 0;

  int_mac #(.DATA_W(DW), .NUM_MAC(NM)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint dotp(logic [DW-1:0] x, logic [DW-1:0] y);
    longint s;
    s = 0;
    for (int i = 0; i < NM; i++) begin
      int xi, yi;
      xi = int'(x[i*EW +: EW]); if (xi >= 8) xi -= 16;
      yi = int'(y[i*EW +: EW]); if (yi >= 8) yi -= 16;
      s += longint'(xi * yi);
    end
    return s;
  endfunction

  initial begin
    valid = 0; first = 0; a = 0; b = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 300; run++) begin
      longint ref_acc;
      int n;
      ref_acc = 0;
      n = 1 + $urandom % 8;
      for (int k = 0; k < n; k++) begin
        @(negedge clk);
        valid = 1; first = (k == 0);
        a = {$urandom, $urandom}; b = {$urandom, $urandom};
        ref_acc += dotp(a, b);
        #1;
        checks++;
        if ($signed(acc_next) != ref_acc) begin failures++; $display("FAIL acc_next"); end
        @(posedge clk);
        // idle cycles must not change the accumulator
        @(negedge clk); valid = 0; #1;
        checks++;
        if ($signed(acc) != ref_acc) begin failures++; $display("FAIL acc %0d exp %0d", $signed(acc), ref_acc); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
