// tb_sync_fifo: random push/pop traffic against a queue reference model;
// checks data order, full/empty flags and count, and that a full FIFO holds
// exactly DEPTH entries.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  logic push, pop, full, empty;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    push = 0; pop = 0; wr_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(empty && !full && count == 0, "empty after reset");
    // fill to full
    for (int i = 0; i < D + 2; i++) begin
      push = 1; wr_data = W'(i + 100);
      @(posedge clk);
      if (i < D) q.push_back(W'(i + 100));
      @(negedge clk);
    end
    push = 0;
    chk(full && count == D, "full after DEPTH pushes");
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      push = ($urandom % 2) == 1; pop = ($urandom % 2) == 1;
      wr_data = W'($urandom);
      chk(empty == (q.size() == 0), "empty flag");
      chk(full == (q.size() == D), "full flag");
      chk(count == q.size(), "count");
      if (!empty) chk(rd_data == q[0], "head data");
      @(posedge clk);
      if (pop && q.size() > 0) void'(q.pop_front());
      if (push && q.size() < D + (pop && q.size() > 0 ? 1 : 0) && !full) q.push_back(wr_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
