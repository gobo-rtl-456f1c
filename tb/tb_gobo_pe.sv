// tb_gobo_pe: drives random activations and 3-bit indexes into one PE with
// random enables and checks all 8 register-file entries against per-index
// sums computed with the reference FP32 adder; also checks clear.
module tb_gobo_pe;
  import tb_fp_ref_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [31:0] act, rd_data;
  logic [2:0] widx, rd_addr;
  int checks = 0, failures = 0;
  logic [31:0] model [8];

  gobo_pe #(.RF_ENTRIES(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int i = 0; i < 8; i++) begin
      rd_addr = 3'(i);
      #1;
      checks++;
      if (rd_data !== model[i]) begin
        failures++;
        if (failures < 10) $display("FAIL entry %0d = %h expected %h", i, rd_data, model[i]);
      end
    end
  endtask

  initial begin
    act = '0; widx = '0; rd_addr = '0;
    foreach (model[i]) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      for (int i = 0; i < 400; i++) begin
        @(negedge clk);
        act  = rnd(3);
        widx = 3'($urandom);
        en   = ($urandom % 4) != 0;
        @(posedge clk);
        if (en) model[widx] = add(model[widx], act);
      end
      @(negedge clk);
      en = 0;
      check_all();
      // clear between output groups
      clr = 1;
      @(posedge clk);
      #1 clr = 0;
      foreach (model[i]) model[i] = '0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
