// tb_axis_slice: random tvalid/tready on both sides with a scoreboard; checks
// order and content of every beat, and full throughput (one beat per cycle
// with both sides always willing) after the one-cycle latency.
module tb_axis_slice;
  localparam int W = 32;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] s_tdata, m_tdata;
  logic s_tlast, s_tvalid, s_tready, m_tlast, m_tvalid, m_tready;
  int checks = 0, failures = 0;
  logic [W:0] sb[$];
  int sent = 0, rcvd = 0;

  axis_slice #(.WIDTH(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sink
  always @(posedge clk) if (rst_n && m_tvalid && m_tready) begin
    checks++;
    if (sb.size() == 0 || {m_tlast, m_tdata} != sb[0]) begin
      failures++; $display("FAIL beat %0d", rcvd);
    end
    if (sb.size() > 0) void'(sb.pop_front());
    rcvd++;
  end

  initial begin
    int t0;
    s_tvalid = 0; s_tdata = 0; s_tlast = 0; m_tready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // random phase
    while (sent < 2000) begin
      @(negedge clk);
      m_tready = ($urandom % 3) != 0;
      if (!s_tvalid || s_tready === 1'b1) begin
        // previous beat (if any) was taken at the last edge
      end
      s_tvalid = ($urandom % 2) == 1;
      s_tdata = W'($urandom); s_tlast = ($urandom % 8) == 0;
      @(posedge clk);
      if (s_tvalid && s_tready) begin sb.push_back({s_tlast, s_tdata}); sent++; end
    end
    @(negedge clk); s_tvalid = 0; m_tready = 1;
    repeat (5) @(posedge clk);
    checks++;
    if (rcvd != sent) begin failures++; $display("FAIL sent %0d rcvd %0d", sent, rcvd); end
    // throughput phase: 100 beats with both sides always ready
    t0 = rcvd;
    for (int i = 0; i < 100; i++) begin
      @(negedge clk); s_tvalid = 1; s_tdata = W'(i); s_tlast = (i == 99);
      @(posedge clk); if (s_tready) begin sb.push_back({s_tlast, s_tdata}); sent++; end
    end
    @(negedge clk); s_tvalid = 0;
    @(posedge clk); #1;
    checks++;
    if (rcvd - t0 != 100) begin failures++; $display("FAIL throughput: %0d beats in 101 cycles", rcvd - t0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
