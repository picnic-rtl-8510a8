// tb_scratchpad: writes random words to random addresses, reads them back and
// checks the data and the one-cycle read latency, including read-during-write
// returning the old word.
module tb_scratchpad;
  localparam int W = 64, N = 256;
  logic clk = 0;
  logic rd_en, wr_en;
  logic [$clog2(N)-1:0] rd_addr, wr_addr;
  logic [W-1:0] rd_data, wr_data;
  logic [W-1:0] model [N];
  int checks = 0, failures = 0;

  scratchpad #(.WIDTH(W), .WORDS(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = 0;
    for (int a = 0; a < N; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = a[$clog2(N)-1:0]; wr_data = {$urandom, $urandom};
      model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 2000; i++) begin
      logic [W-1:0] expect_d;
      @(negedge clk);
      rd_en = 1; rd_addr = $clog2(N)'($urandom);
      wr_en = ($urandom % 2) == 1; wr_addr = ($urandom % 4 == 0) ? rd_addr : $clog2(N)'($urandom);
      wr_data = {$urandom, $urandom};
      expect_d = model[rd_addr];
      if (wr_en) model[wr_addr] = wr_data;
      @(posedge clk); #1;
      checks++;
      if (rd_data !== expect_d) begin
        failures++;
        $display("FAIL addr %0d got %h exp %h", rd_addr, rd_data, expect_d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
