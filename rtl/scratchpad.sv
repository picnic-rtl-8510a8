// scratchpad: router-local scratchpad memory (32 KB per router-PE pair).
//
// Holds the partitioned intermediate tensors (Q, K, V, S) and the key/value
// cache of the attention layers. Organised as WORDS x 64-bit with one read
// port and one write port, both synchronous: a read issued in cycle t returns
// rd_data in cycle t+1. A write and a read to the same address in the same
// cycle return the old data. The size follows the paper (32 KB); the port
// arrangement and the one-cycle read latency are this design's choices, as
// the paper models the macro only for power and area. The memory has no
// reset: under power gating it keeps its contents, which is how the key/value
// cache survives while the rest of a compute tile sleeps.
module scratchpad #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned WORDS = 4096
) (
  input  logic                     clk,
  input  logic                     rd_en,
  input  logic [$clog2(WORDS)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data,
  input  logic                     wr_en,
  input  logic [$clog2(WORDS)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data
);
  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
