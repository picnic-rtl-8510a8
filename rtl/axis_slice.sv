// axis_slice: AXI-Stream adapter between a router and its PE.
//
// The paper joins each router to its processing element through a pair of
// AXI-Stream adapters (a master and a slave on each side). This module is one
// such adapter: a two-entry register slice with the tvalid/tready handshake.
// A beat moves when tvalid and tready are both high; the slice accepts a beat
// per cycle at full rate and breaks the combinational ready path, so s_tready
// depends only on its own state. tlast travels with the data. Latency is one
// cycle. The two-entry skid structure is this design's choice.
//
// Lint note: the reset also disables the assertions, which lint reports as a
// net used both asynchronously and synchronously.
module axis_slice #(
  parameter int unsigned WIDTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] s_tdata,
  input  logic             s_tlast,
  input  logic             s_tvalid,
  output logic             s_tready,
  output logic [WIDTH-1:0] m_tdata,
  output logic             m_tlast,
  output logic             m_tvalid,
  input  logic             m_tready
);
  logic [WIDTH:0] buf_q [2];
  logic [1:0]     cnt;
  logic           rd_ptr, wr_ptr;

  wire in_fire  = s_tvalid && s_tready;
  wire out_fire = m_tvalid && m_tready;

  assign s_tready = (cnt != 2'd2);
  assign m_tvalid = (cnt != 2'd0);
  assign {m_tlast, m_tdata} = buf_q[rd_ptr];

  always_ff @(posedge clk) begin
    if (in_fire) buf_q[wr_ptr] <= {s_tlast, s_tdata};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      rd_ptr <= 1'b0;
      wr_ptr <= 1'b0;
    end else begin
      if (in_fire)  wr_ptr <= ~wr_ptr;
      if (out_fire) rd_ptr <= ~rd_ptr;
      cnt <= cnt + 2'(in_fire) - 2'(out_fire);
    end
  end

  // AXI-Stream rule: once valid, data must hold until accepted.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (m_tvalid && !m_tready) |=> (m_tvalid && $stable(m_tdata));
  endproperty
  assert property (p_hold);
endmodule
