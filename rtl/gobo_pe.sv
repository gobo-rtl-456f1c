// gobo_pe: GOBO processing element.
//
// Instead of multiplying every activation by its decoded weight, a PE adds
// the activation into one of 2^IDX_BITS running sums, the one named by the
// weight's index; the sums are multiplied by their centroids only once, at
// the end, by the tile's shared processing unit. This follows the paper:
// one FP32 adder and an 8-entry, 32-bit register file whose address port
// (A) is the 3-bit weight index, whose write port (W) takes the adder
// output and whose read port (R) goes to the SPU.
// Phase 1, each cycle with en high: rf[widx] <= rf[widx] + act.
// Phase 2: rd_data = rf[rd_addr] (combinational read) for the SPU.
// en low (E in the paper's figure) blocks the write; the tile uses it for
// the dummy index of an outlier, for stalls and, in 4-bit mode, for indexes
// that belong to the partner tile.
// clr zeroes all entries in one cycle (the paper does not say how the sums
// are cleared between output groups; this is this design's choice).
// Timing: the addition and write take one cycle; a new index can be
// accumulated every cycle, including into the same entry.
module gobo_pe
  import gobo_pkg::*;
#(
  parameter int unsigned RF_ENTRIES = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clr,
  input  logic                          en,
  input  fp32_t                         act,
  input  logic [$clog2(RF_ENTRIES)-1:0] widx,
  input  logic [$clog2(RF_ENTRIES)-1:0] rd_addr,
  output fp32_t                         rd_data
);

  fp32_t rf [RF_ENTRIES];
  fp32_t sum;

  fp32_add u_add (.a(rf[widx]), .b(act), .y(sum));

  assign rd_data = rf[rd_addr];

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      for (int i = 0; i < int'(RF_ENTRIES); i++) rf[i] <= '0;
    end else if (en) begin
      rf[widx] <= sum;
    end
  end

endmodule
