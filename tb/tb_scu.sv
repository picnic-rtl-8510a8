// tb_scu: softmax of random score sequences (lengths 1..40, random gaps on the
// input, random back-pressure on the output). The reference builds the
// exponent knots with $exp, evaluates the same eight-segment interpolation,
// sum, reciprocal and product in integers, and must match bit for bit. Also
// checked: the probabilities of a sequence add up to about 1.0, the cycle
// count from the last score to the first probability, the end of a sequence
// when the cache fills, and clamping of out-of-range scores.
module tb_scu;
  localparam int DEPTH = 32, RSH = 48;
  logic clk = 0, rst_n = 0;
  logic valid_in, last_in, in_ready, out_valid, out_last, out_ready;
  logic [15:0] data_in, out_data;
  int checks = 0, failures = 0;
  longint knot [9];

  scu #(.CACHE_DEPTH(DEPTH), .RSHIFT(RSH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint ref_exp(int x);
    int xi, fr;
    xi = (x < 0) ? -((-x + 4095) / 4096) : x / 4096;   // floor(x / 4096)
    fr = x - xi * 4096;
    if (xi < -4) return knot[0];
    if (xi >= 4) return knot[8];
    return knot[xi+4] + (((knot[xi+5] - knot[xi+4]) * fr) >>> 12);
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int seq_count = 0, full_ends = 0;

  task automatic run_seq(int n, bit use_last, bit wide);
    int xs [$];
    longint e [$];
    longint sum, recip, psum_out;
    int lat;
    for (int i = 0; i < n; i++) begin
      int v;
      v = wide ? int'($urandom % 65536) - 32768 : int'($urandom % 32768) - 16384;
      xs.push_back(v);
      e.push_back(ref_exp(v));
    end
    sum = 0;
    foreach (e[i]) sum += e[i];
    recip = (longint'(1) <<< RSH) / sum;
    // send
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      while ($urandom % 3 == 0) begin valid_in = 0; @(negedge clk); end
      valid_in = 1; data_in = 16'(xs[i]); last_in = use_last && (i == n - 1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk); valid_in = 0; last_in = 0;
    lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    chk(lat == RSH + 3, $sformatf("latency %0d", lat));
    psum_out = 0;
    for (int i = 0; i < n; i++) begin
      longint p;
      out_ready = ($urandom % 4) != 0;
      while (!out_ready) begin @(negedge clk); out_ready = ($urandom % 4) != 0; end
      p = (e[i] * recip) >>> 32;
      if (p > 65535) p = 65535;
      chk(out_valid && longint'(out_data) == p, $sformatf("seq %0d elem %0d got %0d exp %0d", seq_count, i, out_data, p));
      chk(out_last == (i == n - 1), "out_last");
      psum_out += longint'(out_data);
      @(negedge clk);
    end
    out_ready = 0;
    if (n > 1) chk(psum_out > 65536 - 2 * n - 64 && psum_out <= 65536 + 2, $sformatf("sum of probabilities %0d", psum_out));
    seq_count++;
  endtask

  initial begin
    for (int k = 0; k < 9; k++) knot[k] = longint'($exp(real'(k - 4)) * 65536.0);  // real-to-integer casts round
    valid_in = 0; last_in = 0; data_in = 0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 30; s++) run_seq(1 + $urandom % 30, 1'b1, s % 5 == 0);
    // a sequence longer than the cache ends when the cache is full
    run_seq(DEPTH, 1'b0, 1'b0);
    full_ends++;
    chk(in_ready, "back to state 1");
    chk(full_ends == 1, "cache-full end exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
