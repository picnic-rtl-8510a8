// sync_fifo: single-clock first-in first-out buffer, one per router input port.
//
// The paper gives each router port a FIFO of 256 bytes; with the 64-bit system
// word that is 32 entries, the default DEPTH. The FIFO is written on
// push & ~full and read on pop & ~empty; rd_data always shows the oldest entry
// (first-word fall-through), so a consumer can look at the head before
// popping. Storage is a plain array with read and write pointers one bit wider
// than the address. Count, full and empty are registered state derived from
// the pointers. Reset empties the FIFO; stored data are not cleared.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             full,
  output logic             empty,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wptr, rptr;

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  assign count   = ($clog2(DEPTH)+1)'(wptr - rptr);
  assign full    = (wptr - rptr) == (AW+1)'(DEPTH);
  assign empty   = (wptr == rptr);
  assign rd_data = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_push) wptr <= wptr + 1'b1;
      if (do_pop)  rptr <= rptr + 1'b1;
    end
  end

  // DEPTH must be a power of two for the wrapping pointers.
  initial assert ((DEPTH & (DEPTH - 1)) == 0)
    else $error("sync_fifo DEPTH must be a power of two");
endmodule
