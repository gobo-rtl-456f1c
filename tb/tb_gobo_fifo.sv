// tb_gobo_fifo: random push/pop traffic against a queue model; checks the
// head value, empty, full and count every cycle, and the clear input.
module tb_gobo_fifo;
  localparam int W = 40, D = 16;
  logic clk = 0, rst_n = 0, clr = 0, push = 0, pop = 0;
  logic [W-1:0] din, dout;
  logic full, empty;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];

  gobo_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 4000; i++) begin
      // choose traffic with phases biased toward filling or draining
      push <= ($urandom % 100) < ((i / 500) % 2 ? 30 : 80);
      pop  <= ($urandom % 100) < ((i / 500) % 2 ? 80 : 30);
      din  <= {8'($urandom), 32'($urandom)};
      @(negedge clk);
      check(empty == (q.size() == 0), "empty");
      check(full == (q.size() == D), "full");
      check(count == ($clog2(D)+1)'(q.size()), "count");
      if (q.size() > 0) check(dout == q[0], "head");
      begin
        bit acc_push, acc_pop;
        acc_push = push && q.size() < D;
        acc_pop  = pop && q.size() > 0;
        @(posedge clk);
        if (acc_pop) void'(q.pop_front());
        if (acc_push) q.push_back(din);
      end
    end
    // clear
    push <= 1; pop <= 0; din <= 40'h12_3456_789a;
    @(posedge clk);
    push <= 0; clr <= 1;
    @(posedge clk);
    clr <= 0;
    @(negedge clk);
    check(empty && count == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
