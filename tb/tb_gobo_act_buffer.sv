// tb_gobo_act_buffer: loads groups of 16 activations, swaps, rotates, and
// checks that in the t-th cycle after a swap PE p sees activation
// (p - t) mod 16 of the group (the paper's dataflow), including the swap
// that takes the last activation straight from the load port, and that
// loading is refused while the staging buffer is full.
module tb_gobo_act_buffer;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, clr = 0, ld_valid = 0, rotate = 0, swap = 0;
  logic [31:0] ld_data;
  logic ld_ready, swap_ok;
  logic [31:0] pe_act [N];
  int checks = 0, failures = 0;
  int fill = 0;   // testbench's own count of staged activations

  gobo_act_buffer #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] val(input int g, input int i);
    return 32'(g * 256 + i + 1);
  endfunction

  initial begin
    ld_data = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // group 0: load 16, last one swaps directly
    for (int i = 0; i < N; i++) begin
      ld_valid <= 1; ld_data <= val(0, i);
      swap <= (i == N - 1);
      @(posedge clk);
    end
    ld_valid <= 0; swap <= 0;
    // groups 1..4: load next group while rotating current
    for (int g = 1; g <= 4; g++) begin
      for (int t = 0; t < N; t++) begin
        @(negedge clk);
        for (int p = 0; p < N; p++)
          check(pe_act[p] == val(g - 1, (p - t + N) % N), "rotation");
        // group 3 loads with gaps so staging is late and full-refusal is tested
        ld_valid = (g != 3) || (t % 2 == 0) || t == N - 1;
        ld_data  = val(g, fill);
        rotate   = (t != N - 1);
        swap     = (t == N - 1);
        if (g == 3 && t == N - 1) check(!swap_ok, "swap_ok low while staging incomplete");
        @(posedge clk);
        if (ld_valid && ld_ready) fill++;
        if (swap && swap_ok) fill = 0;
      end
      if (g == 3) begin
        // finish loading group 3, one refused load when full, then swap
        @(negedge clk);
        rotate = 0; swap = 0;
        while (fill != N) begin
          ld_valid = 1; ld_data = val(g, fill);
          @(posedge clk);
          fill++;
          #1;
        end
        ld_valid = 0;
        check(swap_ok, "swap_ok when full");
        check(!ld_ready, "ready low when full");
        @(negedge clk);
        swap = 1; ld_valid = 0;
        @(posedge clk);
        fill = 0;
        #1 swap = 0;
      end
    end
    @(negedge clk);
    for (int p = 0; p < N; p++) check(pe_act[p] == val(4, p), "last group");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
