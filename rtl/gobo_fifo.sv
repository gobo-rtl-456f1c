// gobo_fifo: synchronous first-in first-out buffer.
//
// GOBO uses FIFOs at four places: the tile's quantized-weight buffer (16
// entries of one 16-index block each, i.e. the 256 indexes of one
// submatrix), the tile's outlier-and-centroid FIFO in front of the shared
// processing unit, and the quantized-weight and outlier FIFOs of the
// off-chip decompression engine. The paper names these buffers; the
// handshake and depths are this design's choice.
// Interface: push/din write an entry at the clock edge when not full;
// pop removes the head when not empty. The head is always visible on dout
// (first-word fall-through), so a consumer may look at it before popping.
// A push and a pop may happen in the same cycle. Reset (rst_n low,
// synchronous) empties the FIFO; clr empties it as well.
// Storage is a register array indexed by read and write pointers with one
// extra wrap bit each.
module gobo_fifo #(
  parameter int unsigned WIDTH = 40,
  parameter int unsigned DEPTH = 16    // power of two
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     push,
  input  logic [WIDTH-1:0]         din,
  output logic                     full,
  input  logic                     pop,
  output logic [WIDTH-1:0]         dout,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wp, rp;

  assign count = wp - rp;
  assign empty = (wp == rp);
  assign full  = (count == (AW+1)'(DEPTH));
  assign dout  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (pop && !empty) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp[AW-1:0]] <= din;
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("gobo_fifo: DEPTH must be a power of two");

endmodule
