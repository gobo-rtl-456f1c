// tb_fp32_add: checks the FP32 adder against a double-precision reference
// rounded to FP32 (nearest even, subnormals flushed). Random operands with
// nearby and distant exponents, exact cancellations, carries, special
// values (zero, infinity, NaN) are covered.
module tb_fp32_add;
  import tb_fp_ref_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .y(y));

  task automatic chk(input logic [31:0] x, input logic [31:0] z, input logic [31:0] exp_y);
    a = x; b = z;
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL add %h + %h = %h, expected %h", x, z, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] x, z;
    // directed cases
    chk(32'h3f800000, 32'h3f800000, 32'h40000000);   // 1 + 1 = 2
    chk(32'h3f800000, 32'hbf800000, 32'h00000000);   // 1 - 1 = +0
    chk(32'h3fc00000, 32'hbf800000, 32'h3f000000);   // 1.5 - 1 = 0.5
    chk(32'h3f800000, 32'h33800000, 32'h3f800000);   // 1 + 2^-24: tie, to even
    chk(32'h3f800001, 32'h33800000, 32'h3f800002);   // tie, rounds up to even
    chk(32'h7f800000, 32'h3f800000, 32'h7f800000);   // inf + 1
    chk(32'h7f800000, 32'hff800000, 32'h7fc00000);   // inf - inf
    chk(32'h7f7fffff, 32'h7f7fffff, 32'h7f800000);   // overflow
    chk(32'h00000000, 32'hc0400000, 32'hc0400000);   // 0 + -3
    chk(32'h80000000, 32'h80000000, 32'h80000000);   // -0 + -0
    // random, nearby exponents (cancellation and carries)
    for (int i = 0; i < 20000; i++) begin
      x = rnd(4); z = rnd(4);
      chk(x, z, add(x, z));
    end
    // random, wider exponent spread (alignment and sticky)
    for (int i = 0; i < 20000; i++) begin
      x = rnd(20); z = rnd(20);
      chk(x, z, add(x, z));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
