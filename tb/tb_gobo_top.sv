// tb_gobo_top: end-to-end test of the GOBO accelerator top level.
//
// The testbench writes a random quantized layer strip into the global
// buffer through the host port (per tile: weight-index blocks, outlier
// counts and outliers, centroids; shared: activations), starts groups, and
// reads every tile's 16 outputs through the host read port. The expected
// values come from a model that repeats the tile arithmetic in the same
// order with the reference FP32 operations, so they must match bit for bit.
// Covered: several tiles at once; two input words that reuse the same
// weights (different act_base); outliers, including several in one column
// (array stalls); the 4-bit mode with paired tiles; an SM with more
// outliers than the outlier slots (overflow flag); and a compressed layer
// through the decompression engine. The cycle count of each group is
// checked against 16 + 16 n_sm + 128 (+17 for pairs) plus the stall
// cycles. Each mechanism is counted and a mechanism that never happened
// counts as a failure.
// The top's size parameters are reduced to 4 tiles and small banks; the
// sampling and size constants below are written so that NT, AW and the
// instance parameters can be raised together toward the default size.
module tb_gobo_top;
  import tb_fp_ref_pkg::*;
  import gobo_pkg::*;

  localparam int NT   = 4;
  localparam int TW   = $clog2(NT + 1);
  localparam int AW   = 8;
  localparam int MAXS = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int ev_outlier = 0, ev_stall = 0, ev_pair = 0, ev_reuse = 0, ev_overflow = 0, ev_dc_outlier = 0,
      ev_swap = 0;

  logic host_we; logic [1:0] host_bank; logic [TW-1:0] host_tile;
  logic [31:0] host_addr; logic [63:0] host_wdata;
  logic start; logic [15:0] n_sm; logic [AW-1:0] act_base; logic wide_mode;
  logic done, overflow;
  logic [TW-1:0] rd_tile; logic [3:0] rd_addr; fp32_t rd_data;
  logic dc_qw_valid, dc_qw_ready, dc_ol_valid, dc_ol_ready, dc_out_valid, dc_out_last, dc_out_ready,
        dc_busy, dc_hdr_error;
  logic [47:0] dc_qw_data; ocf_entry_t dc_ol_data; fp32_t dc_out_data [16];

  gobo_top #(.NUM_TILES(NT), .WB_DEPTH(64), .OB_DEPTH(64), .AB_DEPTH(256)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- layer data ----------------
  fp32_t      acts [2][MAXS*16];        // two input words
  logic [3:0] idx  [NT][MAXS][16][16];   // [tile][sm][block][pe]
  fp32_t      cent [NT][16];
  int         ol_b [NT][MAXS][$];
  int         ol_w [NT][MAXS][$];
  fp32_t      ol_v [NT][MAXS][$];

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 12) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic wr(input int bank, input int t, input int a, input logic [63:0] d);
    host_we = 1; host_bank = 2'(bank); host_tile = TW'(t); host_addr = 32'(a); host_wdata = d;
    @(posedge clk);
    #1 host_we = 0;
  endtask

  // tiles whose data is loaded and whose outputs are checked (all of them
  // in the small configuration, a sample including whole pairs at full size)
  function automatic bit sampled(int t);
    return NT <= 8 || t < 4 || t >= NT - 4 || (t / 2) % 48 == 0;
  endfunction

  function automatic bit is_ol(int t, int s, int b, int w);
    foreach (ol_b[t][s][k]) if (ol_b[t][s][k] == b && ol_w[t][s][k] == w) return 1;
    return 0;
  endfunction

  // random strip for every tile; collide: tile 0 gets a column with 3 outliers
  task automatic build(input int nsm, input bit w4, input bit collide, input int many);
    for (int wd = 0; wd < 2; wd++)
      for (int i = 0; i < nsm * 16; i++) acts[wd][i] = rnd(3);
    for (int t = 0; t < NT; t++) begin
      for (int c = 0; c < 16; c++) cent[t][c] = rnd(5);
      for (int s = 0; s < nsm; s++) begin
        bit pos [16][16];
        foreach (pos[i, j]) pos[i][j] = 0;
        ol_b[t][s].delete(); ol_w[t][s].delete(); ol_v[t][s].delete();
        for (int b = 0; b < 16; b++)
          for (int p = 0; p < 16; p++)
            idx[t][s][b][p] = w4 ? 4'($urandom) : {1'b0, 3'($urandom)};
        // only lower tiles of a pair carry outliers
        if (!(w4 && t % 2 == 1)) begin
          if (collide && t == 0 && s == 0) begin pos[1][4] = 1; pos[6][9] = 1; pos[12][15] = 1; end
          // one outlier per SM in a column of its own (no stall)
          if (!(collide && t == 0 && s == 0)) pos[(t + s) % 16][(t + s) % 16] = 1;
          if (many > 0 && t == NT - 1 && s == 0)
            for (int k = 0; k < many; k++) pos[k % 16][(k * 5) % 16] = 1;
        end
        for (int b = 0; b < 16; b++)
          for (int w = 0; w < 16; w++)
            if (pos[b][w]) begin
              ol_b[t][s].push_back(b); ol_w[t][s].push_back(w); ol_v[t][s].push_back(rnd(2));
              idx[t][s][b][w] = '0;
            end
      end
    end
  endtask

  task automatic load(input int nsm, input bit w4);
    @(negedge clk);
    for (int wd = 0; wd < 2; wd++)
      for (int i = 0; i < nsm * 16; i++) wr(0, 0, wd * 64 + i, 64'(acts[wd][i]));
    for (int t = 0; t < NT; t++) begin
      int a = 0;
      if (!sampled(t)) begin
        // other tiles: outlier-free SMs, arbitrary indexes and centroids
        for (int s = 0; s < nsm; s++) wr(2, t, s, 64'd0);
        continue;
      end
      for (int s = 0; s < nsm; s++)
        for (int b = 0; b < 16; b++) begin
          logic [63:0] word;
          for (int p = 0; p < 16; p++) word[p*4 +: 4] = idx[(w4 && t % 2 == 1) ? t - 1 : t][s][b][p];
          wr(1, t, s * 16 + b, word);
        end
      for (int s = 0; s < nsm; s++) begin
        wr(2, t, a++, {24'd0, 8'(ol_b[t][s].size()), 32'd0});
        foreach (ol_b[t][s][k]) wr(2, t, a++, {24'd0, 4'(ol_b[t][s][k]), 4'(ol_w[t][s][k]), ol_v[t][s][k]});
      end
      for (int c = 0; c < 8; c++) wr(2, t, a++, {32'd0, cent[t][(w4 && t % 2 == 1) ? 8 + c : c]});
    end
  endtask

  // outputs of tile t (lower tile of a pair in 4-bit mode) and its stalls
  task automatic model(input int t, input int nsm, input bit w4, input int wd,
                       output fp32_t exp_out [16], output int stalls);
    fp32_t rf [2][16][8];
    fp32_t out [2][16];
    stalls = 0;
    foreach (rf[h, p, c]) rf[h][p][c] = '0;
    foreach (out[h, p]) out[h][p] = '0;
    for (int s = 0; s < nsm; s++)
      for (int tt = 0; tt < 16; tt++) begin
        int col, hits;
        for (int p = 0; p < 16; p++) begin
          int h;
          h = w4 ? int'(idx[t][s][tt][p][3]) : 0;
          if (!is_ol(t, s, tt, p))
            rf[h][p][idx[t][s][tt][p][2:0]] = add(rf[h][p][idx[t][s][tt][p][2:0]], acts[wd][s * 16 + (p - tt + 16) % 16]);
        end
        col = (15 - tt + 16) % 16;
        hits = 0;
        foreach (ol_b[t][s][k])
          if (((ol_w[t][s][k] - ol_b[t][s][k] + 16) % 16) == col) begin
            out[0][ol_w[t][s][k]] = add(out[0][ol_w[t][s][k]], mul(acts[wd][s * 16 + col], ol_v[t][s][k]));
            hits++;
          end
        if (hits > 1) stalls += hits - 1;
      end
    for (int h = 0; h < (w4 ? 2 : 1); h++)
      for (int c = 0; c < 8; c++)
        for (int p = 0; p < 16; p++)
          out[h][p] = add(out[h][p], mul(rf[h][p][c], cent[t + h][h * 8 + c]));
    for (int p = 0; p < 16; p++) exp_out[p] = w4 ? add(out[0][p], out[1][p]) : out[0][p];
  endtask

  task automatic run_group(input int nsm, input bit w4, input int wd, input bit expect_ovf);
    int cyc = 0, smax = 0, ssum = 0, base;
    fp32_t e [16];
    int st;
    @(negedge clk);
    start = 1; n_sm = 16'(nsm); wide_mode = w4; act_base = AW'(wd * 64);
    @(posedge clk);
    #1 start = 0;
    while (!done) begin
      @(posedge clk);
      cyc++;
      #1;
    end
    check(overflow == expect_ovf, "overflow flag");
    if (overflow) ev_overflow++;
    for (int t = 0; t < NT; t += (w4 ? 2 : 1)) begin
      // big tops: check a sample of tiles
      if (!sampled(t)) continue;
      model(t, nsm, w4, wd, e, st);
      if (!(expect_ovf && t == NT - 1)) begin
        if (st > smax) smax = st;
        ssum += st;
      end
      rd_tile = TW'(t);
      if (!(expect_ovf && t == NT - 1))
        for (int p = 0; p < 16; p++) begin
          rd_addr = 4'(p);
          #1;
          checks++;
          if (rd_data !== e[p]) begin
            failures++;
            if (failures < 12) $display("FAIL tile %0d out %0d = %h expected %h", t, p, rd_data, e[p]);
          end
        end
      foreach (ol_b[t][s]) if (s < nsm) ev_outlier += ol_b[t][s].size();
    end
    ev_stall += smax;
    ev_swap  += nsm - 1;
    if (w4) ev_pair++;
    base = 1 + 16 + 16 * nsm + 128 + (w4 ? 17 : 0);
    if (!expect_ovf) begin
      check(cyc >= base + smax && cyc <= base + ssum, "group cycle count");
      if (smax == ssum) check(cyc == base + smax, "exact group cycle count");
    end
    $display("group n_sm=%0d wide=%0d word=%0d: %0d cycles (no-outlier-stall time %0d)", nsm, w4, wd, cyc, base);
  endtask

  // ---------------- decompression engine ----------------
  logic [47:0] q_qw [$];
  ocf_entry_t  q_ol [$];
  fp32_t       expw [$];
  bit          expo [$];

  always_ff @(posedge clk) begin
    if (rst_n && dc_qw_valid && dc_qw_ready) void'(q_qw.pop_front());
    if (rst_n && dc_ol_valid && dc_ol_ready) void'(q_ol.pop_front());
  end
  always @(negedge clk) begin
    dc_qw_valid = q_qw.size() > 0;
    dc_qw_data  = q_qw.size() > 0 ? q_qw[0] : '0;
    dc_ol_valid = q_ol.size() > 0;
    dc_ol_data  = q_ol.size() > 0 ? q_ol[0] : '0;
  end

  task automatic run_decomp();
    fp32_t c8 [8];
    ocf_entry_t e;
    int got = 0;
    foreach (c8[c]) c8[c] = rnd(6);
    q_qw.push_back({16'd0, 16'd1, 16'd2});   // 32 x 16 layer: 2 SMs
    q_qw.push_back(48'd3);
    foreach (c8[c]) q_qw.push_back({16'd0, c8[c]});
    for (int s = 0; s < 2; s++) begin
      e = '0; {e.blk, e.wofs} = 8'(2);
      q_ol.push_back(e);
      for (int b = 0; b < 16; b++) begin
        logic [47:0] word;
        for (int w = 0; w < 16; w++) begin
          logic [2:0] ix;
          bit o;
          o  = (b == 3 + s && (w == 1 || w == 14));
          ix = o ? 3'd0 : 3'($urandom);
          word[w*3 +: 3] = ix;
          if (o) begin
            e.blk = 4'(b); e.wofs = 4'(w); e.value = rnd(9);
            q_ol.push_back(e);
            expw.push_back(e.value);
            expo.push_back(1);
          end else begin
            expw.push_back(c8[ix]);
            expo.push_back(0);
          end
        end
        q_qw.push_back(word);
      end
    end
    dc_out_ready = 1;
    while (got < 32) begin
      @(posedge clk);
      if (dc_out_valid) begin
        for (int l = 0; l < 16; l++) begin
          checks++;
          if (dc_out_data[l] !== expw[got * 16 + l]) begin
            failures++;
            if (failures < 12) $display("FAIL decompressed block %0d lane %0d", got, l);
          end
          if (dc_out_data[l] === expw[got * 16 + l] && expo[got * 16 + l]) ev_dc_outlier++;
        end
        got++;
      end
    end
    check(dc_out_last && !dc_hdr_error, "decompression last block / header");
  endtask

  initial begin
    host_we = 0; host_bank = 0; host_tile = 0; host_addr = 0; host_wdata = 0;
    start = 0; n_sm = 0; act_base = 0; wide_mode = 0; rd_tile = 0; rd_addr = 0;
    dc_out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 3-bit layer, two input words reuse the same weights
    build(3, 0, 1, 0);
    load(3, 0);
    run_group(3, 0, 0, 0);
    run_group(3, 0, 1, 0);
    ev_reuse++;
    // 4-bit layer on tile pairs
    build(2, 1, 0, 0);
    load(2, 1);
    run_group(2, 1, 0, 0);
    // more outliers in one SM than the outlier slots hold
    build(2, 0, 0, 20);
    load(2, 0);
    run_group(2, 0, 0, 1);
    // decompression engine
    run_decomp();
    $display("mechanisms: outliers=%0d stall_cycles=%0d buffer_swaps=%0d pair_groups=%0d weight_reuse=%0d overflow=%0d decomp_outliers=%0d",
             ev_outlier, ev_stall, ev_swap, ev_pair, ev_reuse, ev_overflow, ev_dc_outlier);
    check(ev_outlier > 0, "outliers exercised");
    check(ev_stall > 0, "column stall exercised");
    check(ev_swap > 0, "activation buffer swap exercised");
    check(ev_pair > 0, "4-bit pairing exercised");
    check(ev_reuse > 0, "weight reuse across words exercised");
    check(ev_overflow > 0, "outlier slot overflow exercised");
    check(ev_dc_outlier > 0, "decompression outlier overwrite exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
