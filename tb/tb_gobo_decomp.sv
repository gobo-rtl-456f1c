// tb_gobo_decomp: feeds GOBO containers (header, index blocks, outliers)
// to the decompression engine and checks every FP32 weight of every block
// against weights rebuilt independently from the container contents
// (centroid of the index, or the outlier value where there is one). Runs
// once with continuous streams and back-to-back output, checking the cycle
// count (one block per cycle plus one cycle per outlier), and once with
// random gaps on both input streams and random output back-pressure.
module tb_gobo_decomp;
  import tb_fp_ref_pkg::*;
  import gobo_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        qw_valid, qw_ready, ol_valid, ol_ready, out_valid, out_last, out_ready, busy, hdr_error;
  logic [47:0] qw_data;
  ocf_entry_t  ol_data;
  fp32_t       out_data [16];

  gobo_decomp #(.LANES(16)) dut (.*);

  logic [47:0] q_qw [$];
  ocf_entry_t  q_ol [$];
  fp32_t       expw [$];     // expected weights, 16 per block
  bit          gaps, bp;
  int          n_out_total;

  always_ff @(posedge clk) begin
    if (rst_n && qw_valid && qw_ready) void'(q_qw.pop_front());
    if (rst_n && ol_valid && ol_ready) void'(q_ol.pop_front());
  end
  always @(negedge clk) begin
    qw_valid  = q_qw.size() > 0 && (!gaps || $urandom % 4 != 0);
    qw_data   = q_qw.size() > 0 ? q_qw[0] : '0;
    ol_valid  = q_ol.size() > 0 && (!gaps || $urandom % 4 != 0);
    ol_data   = q_ol.size() > 0 ? q_ol[0] : '0;
    out_ready = !bp || $urandom % 3 != 0;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic build(input int rows16, input int cols16);
    fp32_t cent [8];
    ocf_entry_t e;
    q_qw.delete(); q_ol.delete(); expw.delete();
    n_out_total = 0;
    foreach (cent[c]) cent[c] = rnd(6);
    q_qw.push_back({16'd0, 16'(cols16), 16'(rows16)});
    q_qw.push_back(48'd3);
    foreach (cent[c]) q_qw.push_back({16'd0, cent[c]});
    for (int s = 0; s < rows16 * cols16; s++) begin
      bit    isol [16][16];
      fp32_t v    [16][16];
      int    n = 0;
      foreach (isol[b, w]) isol[b][w] = ($urandom % 40) == 0;
      if (s == 0) begin isol[2][3] = 1; isol[2][9] = 1; end   // two in one block
      foreach (isol[b, w]) if (isol[b][w]) begin n++; v[b][w] = rnd(8); end
      e = '0; {e.blk, e.wofs} = 8'(n);
      q_ol.push_back(e);
      n_out_total += n;
      for (int b = 0; b < 16; b++) begin
        logic [47:0] word;
        for (int w = 0; w < 16; w++) begin
          logic [2:0] ix;
          ix = isol[b][w] ? 3'd0 : 3'($urandom);
          word[w*3 +: 3] = ix;
          expw.push_back(isol[b][w] ? v[b][w] : cent[ix]);
          if (isol[b][w]) begin
            e.blk = 4'(b); e.wofs = 4'(w); e.value = v[b][w];
            q_ol.push_back(e);
          end
        end
        q_qw.push_back(word);
      end
    end
  endtask

  task automatic run(input int rows16, input int cols16, input bit g);
    int cyc = 0, nblk, got = 0, first = -1, last_seen = 0;
    build(rows16, cols16);
    nblk = rows16 * cols16 * 16;
    gaps = g; bp = g;
    @(negedge clk);
    rst_n = 0;
    @(posedge clk);
    #1 rst_n = 1;
    while (got < nblk && cyc < 50000) begin
      @(posedge clk);
      cyc++;
      if (out_valid && out_ready) begin
        if (first < 0) first = cyc;
        for (int l = 0; l < 16; l++) begin
          checks++;
          if (out_data[l] !== expw[got * 16 + l]) begin
            failures++;
            if (failures < 10) $display("FAIL block %0d lane %0d = %h expected %h", got, l, out_data[l], expw[got * 16 + l]);
          end
        end
        checks++;
        if (out_last != (got == nblk - 1)) begin
          failures++;
          $display("FAIL last flag at block %0d", got);
        end
        got++;
        last_seen = cyc;
      end
    end
    checks++;
    if (got != nblk) begin
      failures++;
      $display("FAIL only %0d of %0d blocks", got, nblk);
    end
    if (!g) begin
      // one block per cycle, plus one cycle per outlier
      checks++;
      if (last_seen - first + 1 != nblk + n_out_total) begin
        failures++;
        $display("FAIL %0d cycles for %0d blocks and %0d outliers", last_seen - first + 1, nblk, n_out_total);
      end
    end
    repeat (3) @(posedge clk);
    checks++;
    if (busy || hdr_error) begin
      failures++;
      $display("FAIL busy=%0d hdr_error=%0d after the layer", busy, hdr_error);
    end
    $display("layer %0dx%0d: %0d blocks, %0d outliers", rows16 * 16, cols16 * 16, nblk, n_out_total);
  endtask

  initial begin
    q_qw.delete(); q_ol.delete();
    gaps = 0; bp = 0;
    repeat (3) @(posedge clk);
    run(2, 3, 0);
    run(3, 2, 1);
    run(1, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
