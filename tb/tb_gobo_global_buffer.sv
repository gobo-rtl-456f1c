// tb_gobo_global_buffer: fills the banks through the host port, starts
// groups with different act_base and n_sm, and checks that each stream
// delivers exactly the expected words in order (activations from act_base,
// weight blocks and outlier/centroid entries from address 0 of each tile's
// banks), under random back-pressure, and at one word per cycle when the
// consumer is always ready. A second start replays the same weights.
module tb_gobo_global_buffer;
  import gobo_pkg::*;
  localparam int NT = 2, WD = 32, OD = 8, AD = 128;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic host_we; logic [1:0] host_bank; logic [1:0] host_tile;
  logic [31:0] host_addr; logic [63:0] host_wdata;
  logic start; logic [6:0] act_base; logic [15:0] n_sm;
  logic act_valid, act_ready; fp32_t act_data;
  logic wblk_valid [NT]; logic [63:0] wblk_data [NT]; logic wblk_ready [NT];
  logic ocf_valid [NT]; ocf_entry_t ocf_data [NT]; logic ocf_ready [NT];

  gobo_global_buffer #(.NUM_TILES(NT), .WB_DEPTH(WD), .OB_DEPTH(OD), .AB_DEPTH(AD)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] wval(int t, int a); return {32'(t + 7), 32'(a * 3 + 1)}; endfunction
  function automatic logic [39:0] oval(int t, int a); return {8'(a), 32'(t * 100 + a)}; endfunction

  task automatic wr(input int bank, input int t, input int a, input logic [63:0] d);
    @(negedge clk);
    host_we = 1; host_bank = 2'(bank); host_tile = 2'(t); host_addr = 32'(a); host_wdata = d;
    @(posedge clk);
    #1 host_we = 0;
  endtask

  task automatic check(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic group(input int base, input int nsm, input bit random_ready);
    int na = 0, nw [NT], no [NT], cyc = 0, last_a = 0;
    foreach (nw[t]) begin nw[t] = 0; no[t] = 0; end
    @(negedge clk);
    start = 1; act_base = 7'(base); n_sm = 16'(nsm);
    @(posedge clk);
    #1 start = 0;
    while (cyc < 400) begin
      @(negedge clk);
      act_ready = !random_ready || ($urandom % 2 == 0);
      foreach (wblk_ready[t]) wblk_ready[t] = !random_ready || ($urandom % 2 == 0);
      foreach (ocf_ready[t]) ocf_ready[t] = !random_ready || ($urandom % 2 == 0);
      if (act_valid && act_ready) begin
        check(act_data == 32'(1000 + base + na), "activation value");
        na++;
        last_a = cyc;
      end
      for (int t = 0; t < NT; t++) begin
        if (wblk_valid[t] && wblk_ready[t]) begin
          check(wblk_data[t] == wval(t, nw[t]), "weight block");
          nw[t]++;
        end
        if (ocf_valid[t] && ocf_ready[t]) begin
          check(ocf_data[t] == oval(t, no[t]), "outlier entry");
          no[t]++;
        end
      end
      @(posedge clk);
      cyc++;
    end
    check(na == nsm * 16, "activation count");
    for (int t = 0; t < NT; t++) begin
      check(nw[t] == nsm * 16, "weight count");
      check(no[t] == OD, "outlier entry count");
    end
    // with an always-ready consumer the activations arrive one per cycle
    if (!random_ready) check(last_a == nsm * 16, "one activation per cycle");
  endtask

  initial begin
    host_we = 0; host_bank = 0; host_tile = 0; host_addr = 0; host_wdata = 0;
    start = 0; act_base = 0; n_sm = 0; act_ready = 0;
    foreach (wblk_ready[t]) begin wblk_ready[t] = 0; ocf_ready[t] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < AD; a++) wr(0, 0, a, 64'(1000 + a));
    for (int t = 0; t < NT; t++) begin
      for (int a = 0; a < WD; a++) wr(1, t, a, wval(t, a));
      for (int a = 0; a < OD; a++) wr(2, t, a, 64'(oval(t, a)));
    end
    group(0, 2, 0);
    group(32, 2, 1);    // next word: other activations, same weights
    group(5, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
