// tb_rram_pe: programs random weights and calibration offsets into a small
// PE, streams input vectors, and checks every output column against a
// matrix-vector product computed in the testbench (offset removed, clamped to
// 16 bits), plus the input-to-first-output latency.
module tb_rram_pe;
  localparam int R = 16, C = 8, CC = 4;
  logic clk = 0, rst_n = 0;
  logic prog_we, cal_we;
  logic [$clog2(R)-1:0] prog_row;
  logic [$clog2(C)-1:0] prog_col, cal_col;
  logic [7:0] prog_w;
  logic [15:0] cal_offset;
  logic [63:0] s_tdata, m_tdata;
  logic s_tvalid, s_tready, m_tvalid, m_tlast, m_tready;
  int checks = 0, failures = 0;
  int w [R][C];
  int off [C];
  int x [R];

  rram_pe #(.ROWS(R), .COLS(C), .COMPUTE_CYCLES(CC)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prog_we = 0; cal_we = 0; prog_row = 0; prog_col = 0; prog_w = 0;
    cal_col = 0; cal_offset = 0; s_tvalid = 0; s_tdata = 0; m_tready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int vec = 0; vec < 6; vec++) begin
      // program weights (first two vectors use extreme weights to reach the clamp)
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        @(negedge clk);
        prog_we = 1; prog_row = r[$clog2(R)-1:0]; prog_col = c[$clog2(C)-1:0];
        w[r][c] = (vec < 2) ? 127 : int'($urandom % 256) - 128;
        prog_w = 8'(w[r][c]);
      end
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        prog_we = 0; cal_we = 1; cal_col = c[$clog2(C)-1:0];
        off[c] = int'($urandom % 64) - 32;
        cal_offset = 16'(off[c]);
      end
      @(negedge clk); cal_we = 0;
      for (int r = 0; r < R; r++) x[r] = (vec < 2) ? 127 : int'($urandom % 256) - 128;
      for (int bt = 0; bt < R / 8; bt++) begin
        @(negedge clk);
        s_tvalid = 1;
        for (int k = 0; k < 8; k++) s_tdata[8*k +: 8] = 8'(x[bt*8 + k]);
        @(posedge clk);
        while (!s_tready) @(posedge clk);
      end
      @(negedge clk); s_tvalid = 0; m_tready = 1;
      begin
        int lat;
        lat = 0;
        while (!m_tvalid) begin @(posedge clk); lat++; #1; end
        checks++;
        if (lat != CC) begin failures++; $display("FAIL latency %0d", lat); end
      end
      for (int bt = 0; bt < C / 4; bt++) begin
        #1;
        for (int k = 0; k < 4; k++) begin
          int c, acc, e;
          c = bt*4 + k;
          acc = 0;
          for (int r = 0; r < R; r++) acc += x[r] * w[r][c];
          acc -= off[c];
          e = (acc > 32767) ? 32767 : (acc < -32768) ? -32768 : acc;
          checks++;
          if (int'($signed(m_tdata[16*k +: 16])) != e) begin
            failures++;
            $display("FAIL vec %0d col %0d got %0d exp %0d", vec, c, $signed(m_tdata[16*k +: 16]), e);
          end
        end
        checks++;
        if (m_tlast != (bt == C/4 - 1)) begin failures++; $display("FAIL tlast"); end
        @(posedge clk);
      end
      @(negedge clk); m_tready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
