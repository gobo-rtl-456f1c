// gobo_tile: one GOBO compute tile and its control unit.
//
// A tile computes 16 output activations of a fully-connected layer whose
// weights are stored as 3-bit dictionary indexes plus rare FP32 outliers.
// It does not decode weights. In phase 1 each of its 16 PEs adds every
// input activation into the running sum named by the weight's index (8
// sums per PE); in phase 2 the shared processing unit (SPU) multiplies each
// of the 8 sums of every PE by its centroid and accumulates them, 8 x 16 =
// 128 cycles. Outliers bypass the dictionary: the SPU multiplies them with
// their activation directly during phase 1.
//
// Phase 1 dataflow (as in the paper). Activations come in groups of 16,
// one submatrix (SM) of 16x16 weights per group. The current activation
// buffer rotates once per cycle; in cycle t of an SM, PE p holds activation
// (p - t) mod 16 and takes index p of block t from the weight buffer, i.e.
// the weights on one wrapped diagonal of the SM form a block. Meanwhile the
// staging buffer loads the next 16 activations; the buffers swap after 16
// cycles, so an SM costs 16 cycles when it has no outliers.
//
// Outliers (as in the paper, details this design's own). Each SM's outliers
// arrive, in block order, behind an 8-bit count in the outlier/centroid
// FIFO. A loader moves them into one of two banks of OUTL_SLOTS registers
// while the previous SM is processed. In cycle t the PE W of every outlier
// (B = t, W) is disabled, so its dummy index adds nothing. The activation
// of that outlier, column (W - B) mod 16, reaches PE15 in cycle
// (15 - column) mod 16; in that cycle the SPU multiplies the PE15
// activation by the outlier value and adds the product to output W, while
// the PEs go on. When k > 1 outliers share a column, the array stalls k - 1
// cycles (PEs disabled, no rotation) so the SPU can apply them one per
// cycle. More than OUTL_SLOTS outliers in one SM is not supported: the
// extra ones are dropped and 'overflow' is raised.
//
// Phase 2: the 8 centroids follow the last SM's outliers in the same FIFO;
// for centroid c the SPU spends 16 cycles on out[p] += pe[p].rf[c] * c_val.
//
// 4-bit indexes (paper: pair adjacent tiles). With wide_mode high, two
// tiles receive the same activations and the same blocks of 4-bit indexes.
// The lower tile (upper = 0) accumulates indexes 0..7 and holds all
// outliers and centroids 0..7; the upper tile accumulates indexes 8..15 and
// its FIFO holds zero counts and centroids 8..15. After phase 2 the lower
// tile adds the upper tile's 16 outputs into its own over 16 cycles,
// reading them through pair_rd_addr/pair_rd_data once pair_done is high.
//
// Interface: start (one cycle, while idle) begins an output group of n_sm
// SMs; it clears the sums, the outputs and both FIFOs. Streams act_*,
// wblk_* (16 fields of 4 bits, field p for PE p; in 3-bit mode bit 3 of a
// field is ignored) and ocf_* (ocf_entry_t) use valid/ready. done stays
// high from the end of the group until the next start; rd_addr/rd_data read
// an output activation. The paper gives 48-bit weight blocks for 3-bit
// indexes; the 64-bit block word serving both modes is this design's choice.
//
// Timing: 16 cycles to fill the first activation group, then 16 cycles per
// SM plus one per extra outlier of a shared column, 128 cycles of phase 2,
// and 16 more for the pair addition; one cycle more to reach done.
// The FIFOs' occupancy outputs are not needed here and are left open.
module gobo_tile
  import gobo_pkg::*;
#(
  parameter int unsigned OUTL_SLOTS = 16,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  // command
  input  logic            start,
  input  logic [15:0]     n_sm,
  input  logic            wide_mode,
  input  logic            upper,
  output logic            done,
  output logic            overflow,
  // activation stream (shared by all tiles)
  input  logic            act_valid,
  input  fp32_t           act_data,
  output logic            act_ready,
  // weight block stream
  input  logic            wblk_valid,
  input  logic [WBLK_W-1:0] wblk_data,
  output logic            wblk_ready,
  // outlier / centroid stream
  input  logic            ocf_valid,
  input  ocf_entry_t      ocf_data,
  output logic            ocf_ready,
  // partner tile (4-bit mode)
  input  logic            pair_done,
  output logic [3:0]      pair_rd_addr,
  input  fp32_t           pair_rd_data,
  // output activations
  input  logic [3:0]      rd_addr,
  output fp32_t           rd_data
);

  typedef enum logic [2:0] {S_IDLE, S_FILL, S_PASS, S_P2, S_PAIRW, S_PAIR, S_DONE} state_e;
  typedef enum logic       {L_CNT, L_ENT} lstate_e;

  localparam int unsigned SW = $clog2(OUTL_SLOTS);

  state_e  state;
  lstate_e lstate;

  // ---------------- datapath instances ----------------
  fp32_t pe_act [NPE];
  fp32_t pe_rd  [NPE];
  logic  [NPE-1:0] pe_en;
  logic  [2:0] c_idx;             // centroid counter (phase 2)
  logic  [3:0] p_idx;             // PE counter (phase 2, pair)
  logic  [3:0] t_cnt;             // block counter inside an SM
  logic  clr_all;
  logic  rotate, swap, swap_ok;

  gobo_act_buffer #(.N(NPE)) u_act (
    .clk, .rst_n, .clr(clr_all),
    .ld_valid(act_valid), .ld_data(act_data), .ld_ready(act_ready),
    .rotate, .swap, .swap_ok, .pe_act
  );

  logic              wb_pop, wb_empty, wb_full;
  logic [WBLK_W-1:0] wb_head;
  gobo_fifo #(.WIDTH(WBLK_W), .DEPTH(16)) u_wbuf (
    .clk, .rst_n, .clr(clr_all),
    .push(wblk_valid), .din(wblk_data), .full(wb_full),
    .pop(wb_pop), .dout(wb_head), .empty(wb_empty), .count()
  );
  assign wblk_ready = !wb_full;

  logic       of_pop, of_empty, of_full;
  ocf_entry_t of_head;
  gobo_fifo #(.WIDTH(OCF_W), .DEPTH(FIFO_DEPTH)) u_ocf (
    .clk, .rst_n, .clr(clr_all),
    .push(ocf_valid), .din(ocf_data), .full(of_full),
    .pop(of_pop), .dout(of_head), .empty(of_empty), .count()
  );
  assign ocf_ready = !of_full;

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    gobo_pe #(.RF_ENTRIES(NCENT)) u_pe (
      .clk, .rst_n, .clr(clr_all), .en(pe_en[p]), .act(pe_act[p]),
      .widx(wb_head[p*WIDX_FIELD +: IDX_BITS]), .rd_addr(c_idx), .rd_data(pe_rd[p])
    );
  end

  spu_op_e     spu_op;
  logic [3:0]  spu_sel;
  fp32_t       spu_coef;
  gobo_spu #(.NPE_P(NPE)) u_spu (
    .clk, .rst_n, .clr(clr_all), .op(spu_op), .pe_sel(spu_sel),
    .pe_rf(pe_rd), .pe15_act(pe_act[NPE-1]), .coef(spu_coef),
    .pair_val(pair_rd_data), .rd_addr, .rd_data
  );

  // ---------------- outlier banks ----------------
  ocf_entry_t  slot [2][OUTL_SLOTS];
  logic [SW:0] bank_cnt [2];
  logic [1:0]  bank_valid;
  logic        ld_bank, ps_bank;
  logic [15:0] ld_sm, sm_cnt;
  logic [7:0]  ld_need, ld_n;
  logic [OUTL_SLOTS-1:0] slot_done;
  logic        ld_pop;

  // ---------------- per-step outlier decode ----------------
  logic [NPE-1:0]        dis_mask;
  logic [OUTL_SLOTS-1:0] pend;
  logic [SW-1:0]         pend_k;
  logic                  pend_any, pend_more;
  logic [3:0]            col_now;

  assign col_now = 4'd15 - t_cnt;   // column at PE15 in this cycle

  always_comb begin
    dis_mask  = '0;
    pend      = '0;
    for (int k = 0; k < int'(OUTL_SLOTS); k++) begin
      if ((SW+1)'(k) < bank_cnt[ps_bank]) begin
        if (slot[ps_bank][k].blk == t_cnt) dis_mask[slot[ps_bank][k].wofs] = 1'b1;
        if (!slot_done[k] && (4'(slot[ps_bank][k].wofs - slot[ps_bank][k].blk) == col_now))
          pend[k] = 1'b1;
      end
    end
    pend_k    = '0;
    pend_any  = 1'b0;
    pend_more = 1'b0;
    for (int k = OUTL_SLOTS - 1; k >= 0; k--) begin
      if (pend[k]) begin
        if (pend_any) pend_more = 1'b1;
        pend_k   = SW'(k);
        pend_any = 1'b1;
      end
    end
    // pend_more is set when a lower-numbered slot was also pending
  end

  // A phase-1 step can happen when a block and this SM's outliers are there.
  logic step_ok, step, last_step;
  assign step_ok   = (state == S_PASS) && !wb_empty && bank_valid[ps_bank];
  // the PE array advances unless further outliers of this column wait
  assign step      = step_ok && !pend_more &&
                     !((t_cnt == 4'd15) && (sm_cnt + 16'd1 < n_sm) && !swap_ok);
  assign last_step = step && (t_cnt == 4'd15);

  always_comb begin
    for (int p = 0; p < NPE; p++) begin
      logic sel_ok;
      sel_ok   = !wide_mode || (wb_head[p*WIDX_FIELD + IDX_BITS] == upper);
      pe_en[p] = step && sel_ok && !dis_mask[p];
    end
  end

  assign wb_pop  = step;
  assign rotate  = step && !(last_step && (sm_cnt + 16'd1 < n_sm));
  assign swap    = ((state == S_FILL) && swap_ok) || (last_step && (sm_cnt + 16'd1 < n_sm));
  assign clr_all = (state == S_IDLE || state == S_DONE) && start;

  // SPU control
  always_comb begin
    spu_op       = SPU_NONE;
    spu_sel      = p_idx;
    spu_coef     = of_head.value;
    pair_rd_addr = p_idx;
    if (state == S_PASS && step_ok && pend_any) begin
      spu_op   = SPU_OUTLIER;
      spu_sel  = slot[ps_bank][pend_k].wofs;
      spu_coef = slot[ps_bank][pend_k].value;
    end else if (state == S_P2 && !of_empty) begin
      spu_op   = SPU_CENTROID;
    end else if (state == S_PAIR) begin
      spu_op   = SPU_PAIR;
    end
  end

  assign of_pop = ld_pop || (state == S_P2 && !of_empty && p_idx == 4'd15);
  assign done   = (state == S_DONE);

  // ---------------- outlier loader ----------------
  always_comb begin
    ld_pop = 1'b0;
    if ((state == S_FILL || state == S_PASS) && !of_empty) begin
      if (lstate == L_CNT) ld_pop = (ld_sm < n_sm) && !bank_valid[ld_bank];
      else                 ld_pop = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clr_all) begin
      lstate     <= L_CNT;
      ld_bank    <= 1'b0;
      ld_sm      <= '0;
      ld_need    <= '0;
      ld_n       <= '0;
      bank_valid <= '0;
      bank_cnt[0] <= '0;
      bank_cnt[1] <= '0;
      overflow   <= 1'b0;
    end else begin
      if (ld_pop) begin
        if (lstate == L_CNT) begin
          ld_need <= {of_head.blk, of_head.wofs};
          ld_n    <= '0;
          bank_cnt[ld_bank] <= '0;
          if ({of_head.blk, of_head.wofs} == 8'd0) begin
            bank_valid[ld_bank] <= 1'b1;
            ld_bank <= !ld_bank;
            ld_sm   <= ld_sm + 16'd1;
          end else begin
            lstate <= L_ENT;
          end
        end else begin
          if (ld_n < 8'(OUTL_SLOTS)) begin
            slot[ld_bank][ld_n[SW-1:0]] <= of_head;
            bank_cnt[ld_bank] <= bank_cnt[ld_bank] + 1'b1;
          end else begin
            overflow <= 1'b1;
          end
          ld_n <= ld_n + 8'd1;
          if (ld_n + 8'd1 == ld_need) begin
            bank_valid[ld_bank] <= 1'b1;
            ld_bank <= !ld_bank;
            ld_sm   <= ld_sm + 16'd1;
            lstate  <= L_CNT;
          end
        end
      end
      // the pass releases its bank after the last block
      if (last_step) bank_valid[ps_bank] <= 1'b0;
    end
  end

  // ---------------- main sequencer ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      t_cnt     <= '0;
      sm_cnt    <= '0;
      ps_bank   <= 1'b0;
      c_idx     <= '0;
      p_idx     <= '0;
      slot_done <= '0;
    end else begin
      case (state)
        S_IDLE, S_DONE: if (start) begin
          state     <= (n_sm == 16'd0) ? S_P2 : S_FILL;
          t_cnt     <= '0;
          sm_cnt    <= '0;
          ps_bank   <= 1'b0;
          c_idx     <= '0;
          p_idx     <= '0;
          slot_done <= '0;
        end
        S_FILL: if (swap_ok) state <= S_PASS;
        S_PASS: begin
          if (step_ok && pend_any) slot_done[pend_k] <= 1'b1;
          if (step) begin
            t_cnt <= t_cnt + 4'd1;
            if (last_step) begin
              slot_done <= '0;
              ps_bank   <= !ps_bank;
              sm_cnt    <= sm_cnt + 16'd1;
              if (sm_cnt + 16'd1 == n_sm) state <= S_P2;
            end
          end
        end
        S_P2: if (!of_empty) begin
          p_idx <= p_idx + 4'd1;
          if (p_idx == 4'd15) begin
            c_idx <= c_idx + 3'd1;
            if (c_idx == 3'(NCENT - 1))
              state <= (wide_mode && !upper) ? S_PAIRW : S_DONE;
          end
        end
        S_PAIRW: if (pair_done) state <= S_PAIR;
        S_PAIR: begin
          p_idx <= p_idx + 4'd1;
          if (p_idx == 4'd15) state <= S_DONE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The outlier stream must hold a count before the outliers of every SM.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_PASS && step) |-> bank_valid[ps_bank]);

endmodule
