// tb_fp32_mul: checks the FP32 multiplier against a double-precision
// reference rounded to FP32 (nearest even, subnormals flushed), with random
// operands and special values (zero, infinity, NaN, overflow, underflow).
module tb_fp32_mul;
  import tb_fp_ref_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a(a), .b(b), .y(y));

  task automatic chk(input logic [31:0] x, input logic [31:0] z, input logic [31:0] exp_y);
    a = x; b = z;
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL mul %h * %h = %h, expected %h", x, z, y, exp_y);
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
    chk(32'h40000000, 32'h40400000, 32'h40c00000);   // 2 * 3 = 6
    chk(32'hbf800000, 32'h3e800000, 32'hbe800000);   // -1 * 0.25
    chk(32'h00000000, 32'h40400000, 32'h00000000);   // 0 * 3
    chk(32'h80000000, 32'h40400000, 32'h80000000);   // -0 * 3
    chk(32'h7f800000, 32'h00000000, 32'h7fc00000);   // inf * 0
    chk(32'h7f800000, 32'hc0000000, 32'hff800000);   // inf * -2
    chk(32'h7f000000, 32'h7f000000, 32'h7f800000);   // overflow
    chk(32'h00800000, 32'h00800000, 32'h00000000);   // underflow, flushed
    chk(32'h7fc00000, 32'h3f800000, 32'h7fc00000);   // NaN
    for (int i = 0; i < 40000; i++) begin
      x = rnd(30); z = rnd(30);
      chk(x, z, mul(x, z));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
