// gobo_spu: shared processing unit (SPU) of a GOBO tile.
//
// The SPU holds the tile's output activations: a 16-entry FP32 register
// file, one entry per PE (i.e. per output row of the current submatrix
// strip), one FP32 multiplier and one FP32 adder. Its datapath follows the
// paper's tile figure: a 16:1 multiplexer picks the read port of one PE's
// register file, a 2:1 multiplexer picks either that value or the
// activation currently at PE15 (the bypass used for outliers), the
// multiplier scales the pick by a value from the outlier/centroid FIFO, and
// the adder accumulates the product into the output entry.
// op, per cycle:
//   SPU_CENTROID  out[pe_sel] += pe_rf[pe_sel] * coef   (phase 2)
//   SPU_OUTLIER   out[pe_sel] += pe15_act * coef        (outlier in phase 1)
//   SPU_PAIR      out[pe_sel] += pair_val               (4-bit tile pairs)
//   SPU_NONE      no change
// The pair addition, where the product is replaced by the partner tile's
// entry, is this design's reading of "reuse the adder from one of the
// tiles". clr zeroes the output entries. rd_addr/rd_data read an entry
// combinationally.
// Timing: every operation reads, computes and writes back in one cycle, so
// one operation can issue per cycle; the paper's 16 cycles per centroid
// follow from that.
module gobo_spu
  import gobo_pkg::*;
#(
  parameter int unsigned NPE_P = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  spu_op_e                  op,
  input  logic [$clog2(NPE_P)-1:0] pe_sel,
  input  fp32_t                    pe_rf [NPE_P],
  input  fp32_t                    pe15_act,
  input  fp32_t                    coef,
  input  fp32_t                    pair_val,
  input  logic [$clog2(NPE_P)-1:0] rd_addr,
  output fp32_t                    rd_data
);

  fp32_t orf [NPE_P];
  fp32_t mux16, mux2, prod, addend, sum;

  assign mux16  = pe_rf[pe_sel];
  assign mux2   = (op == SPU_OUTLIER) ? pe15_act : mux16;
  assign addend = (op == SPU_PAIR) ? pair_val : prod;

  fp32_mul u_mul (.a(mux2), .b(coef), .y(prod));
  fp32_add u_add (.a(orf[pe_sel]), .b(addend), .y(sum));

  assign rd_data = orf[rd_addr];

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      for (int i = 0; i < int'(NPE_P); i++) orf[i] <= '0;
    end else if (op != SPU_NONE) begin
      orf[pe_sel] <= sum;
    end
  end

endmodule
