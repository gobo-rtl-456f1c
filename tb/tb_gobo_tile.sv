// tb_gobo_tile: end-to-end checks of one GOBO tile, and of a pair of tiles
// in 4-bit mode.
//
// Each scenario builds a random layer strip: n_sm submatrices of 16x16
// indexes, FP32 activations, centroids and outliers (some sharing a column,
// so the array must stall, and some sharing a block). The streams are fed
// with or without random gaps. The expected outputs come from a model that
// repeats the tile's arithmetic in the same order (per-PE per-index sums,
// outlier products in the cycle their activation is at PE15, then the
// centroid MACs), using the reference FP32 operations, so the comparison is
// bit exact. Without gaps the cycle count from start to done is checked:
// 16 to fill the first activation group, 16 per submatrix plus one per
// extra outlier of a shared column and 128 for phase 2 (8 centroids x 16
// PEs); a 4-bit pair adds one cycle to see the partner done and 16 for the
// pair addition.
module tb_gobo_tile;
  import tb_fp_ref_pkg::*;
  import gobo_pkg::*;

  localparam int MAX_SM = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_stall_events = 0, n_outliers_applied = 0;

  // DUT signals, two tiles
  logic        start;
  logic [15:0] n_sm;
  logic        wide;
  logic        done [2];
  logic        ovf  [2];
  logic        act_valid;
  fp32_t       act_data;
  logic        act_ready [2];
  logic        wblk_valid [2];
  logic [63:0] wblk_data [2];
  logic        wblk_ready [2];
  logic        ocf_valid [2];
  ocf_entry_t  ocf_data [2];
  logic        ocf_ready [2];
  logic [3:0]  pair_addr, rd_addr0, rd_addr1;
  fp32_t       rd_data [2];

  gobo_tile t0 (
    .clk, .rst_n, .start, .n_sm, .wide_mode(wide), .upper(1'b0), .done(done[0]), .overflow(ovf[0]),
    .act_valid(act_valid && (!wide || act_ready[1])), .act_data, .act_ready(act_ready[0]),
    .wblk_valid(wblk_valid[0]), .wblk_data(wblk_data[0]), .wblk_ready(wblk_ready[0]),
    .ocf_valid(ocf_valid[0]), .ocf_data(ocf_data[0]), .ocf_ready(ocf_ready[0]),
    .pair_done(done[1]), .pair_rd_addr(pair_addr), .pair_rd_data(rd_data[1]),
    .rd_addr(rd_addr0), .rd_data(rd_data[0])
  );
  gobo_tile t1 (
    .clk, .rst_n, .start(start && wide), .n_sm, .wide_mode(wide), .upper(1'b1), .done(done[1]), .overflow(ovf[1]),
    .act_valid(act_valid && wide && act_ready[0]), .act_data, .act_ready(act_ready[1]),
    .wblk_valid(wblk_valid[1]), .wblk_data(wblk_data[1]), .wblk_ready(wblk_ready[1]),
    .ocf_valid(ocf_valid[1]), .ocf_data(ocf_data[1]), .ocf_ready(ocf_ready[1]),
    .pair_done(1'b0), .pair_rd_addr(), .pair_rd_data('0),
    .rd_addr(rd_addr1), .rd_data(rd_data[1])
  );
  assign rd_addr1 = (wide && !done[0]) ? pair_addr : rd_addr0;

  // scenario data
  fp32_t       acts [MAX_SM*16];
  logic [3:0]  idx  [MAX_SM][16][16];   // [sm][block][pe]
  fp32_t       cent [16];
  int          ol_b [MAX_SM][$];
  int          ol_w [MAX_SM][$];
  fp32_t       ol_v [MAX_SM][$];

  // streams
  fp32_t            q_act [$];
  logic [63:0]      q_w   [2][$];
  ocf_entry_t       q_o   [2][$];
  bit gaps;

  always_ff @(posedge clk) begin
    if (act_valid && act_ready[0] && (!wide || act_ready[1])) void'(q_act.pop_front());
    for (int i = 0; i < 2; i++) begin
      if (wblk_valid[i] && wblk_ready[i]) void'(q_w[i].pop_front());
      if (ocf_valid[i] && ocf_ready[i]) void'(q_o[i].pop_front());
    end
  end
  always @(negedge clk) begin
    act_valid = q_act.size() > 0 && (!gaps || $urandom % 3 != 0);
    act_data  = q_act.size() > 0 ? q_act[0] : '0;
    for (int i = 0; i < 2; i++) begin
      wblk_valid[i] = q_w[i].size() > 0 && (!gaps || $urandom % 3 != 0);
      wblk_data[i]  = q_w[i].size() > 0 ? q_w[i][0] : '0;
      ocf_valid[i]  = q_o[i].size() > 0 && (!gaps || $urandom % 3 != 0);
      ocf_data[i]   = q_o[i].size() > 0 ? q_o[i][0] : '0;
    end
  end

  // mechanism counters (observed at the ports' effect: stalls are inferred
  // from the cycle count, outliers from the scenario)
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit is_outlier(int s, int b, int w);
    foreach (ol_b[s][k]) if (ol_b[s][k] == b && ol_w[s][k] == w) return 1;
    return 0;
  endfunction

  task automatic build(input int nsm, input bit w4, input int n_out, input bit colliding);
    for (int i = 0; i < nsm * 16; i++) acts[i] = rnd(3);
    for (int c = 0; c < 16; c++) cent[c] = rnd(5);
    for (int s = 0; s < nsm; s++) begin
      ol_b[s].delete(); ol_w[s].delete(); ol_v[s].delete();
      for (int b = 0; b < 16; b++)
        for (int p = 0; p < 16; p++)
          idx[s][b][p] = w4 ? 4'($urandom) : {1'b0, 3'($urandom)};
    end
    // random outliers, distinct positions, kept in block then weight order
    for (int s = 0; s < nsm; s++) begin
      int want;
      bit pos [16][16];
      foreach (pos[i, j]) pos[i][j] = 0;
      want = (s == 0) ? n_out : int'($urandom % (n_out + 1));
      if (colliding && s == 1) begin
        // three outliers in column 5 (W - B = 5) and two in block 7
        pos[0][5] = 1; pos[3][8] = 1; pos[10][15] = 1; pos[7][2] = 1; pos[7][12] = 1;
      end
      for (int k = 0; k < want; k++) pos[$urandom % 16][$urandom % 16] = 1;
      for (int b = 0; b < 16; b++)
        for (int w = 0; w < 16; w++)
          if (pos[b][w]) begin
            ol_b[s].push_back(b); ol_w[s].push_back(w); ol_v[s].push_back(rnd(2));
            idx[s][b][w] = '0;      // dummy index
          end
    end
  endtask

  task automatic make_streams(input int nsm, input bit w4);
    ocf_entry_t e;
    q_act.delete(); q_w[0].delete(); q_w[1].delete(); q_o[0].delete(); q_o[1].delete();
    for (int i = 0; i < nsm * 16; i++) q_act.push_back(acts[i]);
    for (int s = 0; s < nsm; s++)
      for (int b = 0; b < 16; b++) begin
        logic [63:0] word;
        for (int p = 0; p < 16; p++) word[p*4 +: 4] = idx[s][b][p];
        q_w[0].push_back(word);
        if (w4) q_w[1].push_back(word);
      end
    for (int s = 0; s < nsm; s++) begin
      e = '0; {e.blk, e.wofs} = 8'(ol_b[s].size());
      q_o[0].push_back(e);
      foreach (ol_b[s][k]) begin
        e.blk = 4'(ol_b[s][k]); e.wofs = 4'(ol_w[s][k]); e.value = ol_v[s][k];
        q_o[0].push_back(e);
      end
      if (w4) q_o[1].push_back('0);
    end
    for (int c = 0; c < 8; c++) begin
      e = '0; e.value = cent[c];
      q_o[0].push_back(e);
      if (w4) begin
        e.value = cent[8 + c];
        q_o[1].push_back(e);
      end
    end
  endtask

  // expected outputs and phase-1 stall count
  task automatic model(input int nsm, input bit w4, output fp32_t exp_out [16], output int stalls);
    fp32_t rf [2][16][8];
    fp32_t out [2][16];
    stalls = 0;
    foreach (rf[h, p, c]) rf[h][p][c] = '0;
    foreach (out[h, p]) out[h][p] = '0;
    for (int s = 0; s < nsm; s++)
      for (int t = 0; t < 16; t++) begin
        int col, hits;
        for (int p = 0; p < 16; p++) begin
          int a, h;
          a = s * 16 + ((p - t + 16) % 16);
          h = w4 ? int'(idx[s][t][p][3]) : 0;
          if (!is_outlier(s, t, p))
            rf[h][p][idx[s][t][p][2:0]] = add(rf[h][p][idx[s][t][p][2:0]], acts[a]);
        end
        col  = (15 - t + 16) % 16;
        hits = 0;
        foreach (ol_b[s][k])
          if (((ol_w[s][k] - ol_b[s][k] + 16) % 16) == col) begin
            out[0][ol_w[s][k]] = add(out[0][ol_w[s][k]], mul(acts[s * 16 + col], ol_v[s][k]));
            hits++;
            n_outliers_applied++;
          end
        if (hits > 1) stalls += hits - 1;
      end
    for (int h = 0; h < (w4 ? 2 : 1); h++)
      for (int c = 0; c < 8; c++)
        for (int p = 0; p < 16; p++)
          out[h][p] = add(out[h][p], mul(rf[h][p][c], cent[h * 8 + c]));
    for (int p = 0; p < 16; p++) exp_out[p] = w4 ? add(out[0][p], out[1][p]) : out[0][p];
    n_stall_events += stalls;
  endtask

  task automatic run(input int nsm, input bit w4, input int n_out, input bit colliding, input bit with_gaps);
    fp32_t exp_out [16];
    int stalls, cyc, expect_cyc;
    build(nsm, w4, n_out, colliding);
    model(nsm, w4, exp_out, stalls);
    gaps = with_gaps;
    @(negedge clk);
    wide = w4; n_sm = 16'(nsm); start = 1;
    @(posedge clk);
    make_streams(nsm, w4);   // data appear from the cycle after start
    #1 start = 0;
    cyc = 0;
    while (!done[0] || (w4 && !done[1])) begin
      @(posedge clk);
      cyc++;
      #1;
    end
    expect_cyc = 16 + 16 * nsm + stalls + 128 + (w4 ? 17 : 0);
    if (!with_gaps) begin
      checks++;
      if (cyc != expect_cyc) begin
        failures++;
        $display("FAIL cycles %0d expected %0d (n_sm=%0d wide=%0d stalls=%0d)", cyc, expect_cyc, nsm, w4, stalls);
      end
    end
    for (int p = 0; p < 16; p++) begin
      rd_addr0 = 4'(p);
      #1;
      checks++;
      if (rd_data[0] !== exp_out[p]) begin
        failures++;
        if (failures < 12) $display("FAIL out[%0d] = %h expected %h (n_sm=%0d wide=%0d gaps=%0d)",
                                    p, rd_data[0], exp_out[p], nsm, w4, with_gaps);
      end
    end
    checks++;
    if (ovf[0]) begin
      failures++;
      $display("FAIL unexpected overflow flag");
    end
  endtask

  initial begin
    start = 0; n_sm = '0; wide = 0; rd_addr0 = '0; gaps = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run(1, 0, 0, 0, 0);     // one SM, no outliers
    run(3, 0, 2, 0, 0);     // outliers
    run(4, 0, 3, 1, 0);     // column collisions -> stalls
    run(5, 0, 4, 1, 1);     // random stream gaps
    run(3, 1, 2, 0, 0);     // 4-bit mode, paired tiles
    run(4, 1, 3, 1, 1);     // 4-bit mode with collisions and gaps
    for (int i = 0; i < 4; i++) run(2 + i, i % 2, 3, i % 2, i > 1);
    checks++;
    if (n_stall_events == 0 || n_outliers_applied == 0) begin
      failures++;
      $display("FAIL mechanism not exercised: stalls=%0d outliers=%0d", n_stall_events, n_outliers_applied);
    end
    $display("stall cycles %0d, outliers applied %0d", n_stall_events, n_outliers_applied);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
