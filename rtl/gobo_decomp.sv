// gobo_decomp: GOBO off-chip memory decompression engine.
//
// Used in front of an accelerator that computes with plain FP32 weights,
// this engine lets the weights stay GOBO-compressed in DRAM (about 10x
// smaller) and rebuilds the FP32 weight stream on chip. A layer's GOBO
// container has three sections: a header (layer dimensions, index width,
// centroid table), the 3-bit weight indexes in the original weight order,
// with a dummy index where an outlier sits, and the outliers, grouped per
// 16x16 submatrix (SM) behind an 8-bit count, each outlier given as
// (block B, weight W within the block, FP32 value V).
//
// As in the paper, the engine reads the container as two sequential
// streams: the first carries the header and then the index blocks, the
// second the outlier section; each goes through its own FIFO. The header
// loads the centroids into one lookup table per output lane; each index
// block is then translated lane by lane, and outliers of that block
// overwrite their lanes, at most one outlier per cycle.
//
// Stream formats (this design's choice where the paper gives none):
//   qw stream, 48 bit (the width the paper's figure prints):
//     word 0: bits [15:0] = rows/16, bits [31:16] = cols/16
//     word 1: bits [7:0]  = index width (must be IDX_BITS, else hdr_error)
//     words 2..9: centroid 0..7 in bits [31:0]
//     then one word per block, lane l's index in bits [3l+2:3l]
//     (padding to a memory row is assumed removed by the memory controller)
//   ol stream, 40 bit: per SM a count entry (count in bits [39:32]) then
//     that many ocf_entry_t outliers in block order.
// The paper's figures print both 40 and 48 bits for the outlier stream;
// 40 bits is used here, matching the text's "at most 40b each".
// Output: out_data holds LANES FP32 weights, lane l = weight l of the block;
// blocks leave in container order. last marks the layer's final block.
// Timing: after the 10 header words, one block per cycle when it has no
// outliers; a block with k outliers leaves k cycles later.
// The FIFOs' occupancy outputs are not needed here and are left open.
module gobo_decomp
  import gobo_pkg::*;
#(
  parameter int unsigned LANES       = 16,   // one LUT per lane
  parameter int unsigned QW_DEPTH    = 16,
  parameter int unsigned OL_DEPTH    = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   qw_valid,
  input  logic [47:0]            qw_data,
  output logic                   qw_ready,
  input  logic                   ol_valid,
  input  ocf_entry_t             ol_data,
  output logic                   ol_ready,
  output logic                   out_valid,
  output fp32_t                  out_data [LANES],
  output logic                   out_last,
  input  logic                   out_ready,
  output logic                   busy,
  output logic                   hdr_error
);

  typedef enum logic [2:0] {D_DIM, D_BITS, D_CENT, D_RUN, D_END} dstate_e;

  dstate_e     state;
  logic [31:0] n_blocks, blk;
  logic [2:0]  cent_n;
  fp32_t       lut [LANES][NCENT];

  // FIFOs
  logic        qf_pop, qf_empty, qf_full;
  logic [47:0] qf_head;
  gobo_fifo #(.WIDTH(48), .DEPTH(QW_DEPTH)) u_qw (
    .clk, .rst_n, .clr(1'b0), .push(qw_valid), .din(qw_data), .full(qf_full),
    .pop(qf_pop), .dout(qf_head), .empty(qf_empty), .count()
  );
  assign qw_ready = !qf_full;

  logic       of_pop, of_empty, of_full;
  ocf_entry_t of_head;
  gobo_fifo #(.WIDTH(OCF_W), .DEPTH(OL_DEPTH)) u_ol (
    .clk, .rst_n, .clr(1'b0), .push(ol_valid), .din(ol_data), .full(of_full),
    .pop(of_pop), .dout(of_head), .empty(of_empty), .count()
  );
  assign ol_ready = !of_full;

  // block under assembly (the FP32 weight register)
  logic       asm_valid, asm_last;
  logic [3:0] asm_b;
  logic [7:0] ol_rem;
  logic       ol_hit, complete, load_blk, need_cnt;

  assign ol_hit    = asm_valid && (ol_rem != 8'd0) && !of_empty && (of_head.blk == asm_b);
  assign complete  = asm_valid && ((ol_rem == 8'd0) || (!of_empty && of_head.blk != asm_b));
  assign out_valid = complete;
  assign out_last  = asm_last;
  assign need_cnt  = (blk[3:0] == 4'd0);
  // a new block enters when the register is free or leaving, and (at the
  // start of an SM) the SM's outlier count is at the head of the ol FIFO
  assign load_blk  = (state == D_RUN) && (blk != n_blocks) && !qf_empty &&
                     (!asm_valid || (complete && out_ready)) &&
                     (!need_cnt || (!of_empty && !ol_hit));
  assign qf_pop    = load_blk || (!qf_empty && (state == D_DIM || state == D_BITS || state == D_CENT));
  assign of_pop    = ol_hit || (load_blk && need_cnt);
  assign busy      = (state != D_END);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= D_DIM;
      n_blocks  <= '0;
      blk       <= '0;
      cent_n    <= '0;
      asm_valid <= 1'b0;
      asm_last  <= 1'b0;
      asm_b     <= '0;
      ol_rem    <= '0;
      hdr_error <= 1'b0;
    end else begin
      case (state)
        D_DIM: if (!qf_empty) begin
          n_blocks <= 32'(qf_head[15:0]) * 32'(qf_head[31:16]) * 32'(BLKS_PER_SM);
          blk      <= '0;
          state    <= D_BITS;
        end
        D_BITS: if (!qf_empty) begin
          hdr_error <= (qf_head[7:0] != 8'(IDX_BITS));
          cent_n    <= '0;
          state     <= D_CENT;
        end
        D_CENT: if (!qf_empty) begin
          for (int l = 0; l < int'(LANES); l++) lut[l][cent_n] <= qf_head[31:0];
          cent_n <= cent_n + 3'd1;
          if (cent_n == 3'(NCENT - 1)) state <= D_RUN;
        end
        D_RUN: begin
          if (blk == n_blocks && (!asm_valid || (complete && out_ready))) state <= D_END;
        end
        default: ;
      endcase

      // outlier overwrite, one per cycle
      if (ol_hit) ol_rem <= ol_rem - 8'd1;

      if (load_blk) begin
        asm_valid <= 1'b1;
        asm_b     <= blk[3:0];
        asm_last  <= (blk + 32'd1 == n_blocks);
        blk       <= blk + 32'd1;
        if (need_cnt) ol_rem <= {of_head.blk, of_head.wofs};
      end else if (complete && out_ready) begin
        asm_valid <= 1'b0;
      end
    end
  end

  // lane datapath: LUT lookup on load, outlier overwrite afterwards
  always_ff @(posedge clk) begin
    for (int l = 0; l < int'(LANES); l++) begin
      if (load_blk)
        out_data[l] <= lut[l][qf_head[l*IDX_BITS +: IDX_BITS]];
      else if (ol_hit && of_head.wofs == 4'(l))
        out_data[l] <= of_head.value;
    end
  end

  // a block holds 16 weights, addressed by the 4-bit W field of an outlier
  initial assert (LANES == BLKS_PER_SM && LANES * IDX_BITS <= 48)
    else $error("gobo_decomp: LANES must be 16 for 16-weight blocks on a 48-bit stream");

  assert property (@(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid)
    else $error("gobo_decomp: output dropped while stalled");

endmodule
