// tb_gobo_spu: drives the three SPU operations (centroid MAC through the
// 16:1 multiplexer, outlier MAC through the PE15 bypass, pair addition)
// with random operands and checks the 16 output entries against a model
// built from the reference FP32 multiplier and adder.
module tb_gobo_spu;
  import tb_fp_ref_pkg::*;
  import gobo_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0;
  spu_op_e op;
  logic [3:0] pe_sel, rd_addr;
  logic [31:0] pe_rf [16];
  logic [31:0] pe15_act, coef, pair_val, rd_data;
  int checks = 0, failures = 0;
  logic [31:0] model [16];

  gobo_spu #(.NPE_P(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int i = 0; i < 16; i++) begin
      rd_addr = 4'(i);
      #1;
      checks++;
      if (rd_data !== model[i]) begin
        failures++;
        if (failures < 10) $display("FAIL out %0d = %h expected %h", i, rd_data, model[i]);
      end
    end
  endtask

  initial begin
    op = SPU_NONE; pe_sel = '0; rd_addr = '0;
    pe15_act = '0; coef = '0; pair_val = '0;
    foreach (pe_rf[i]) pe_rf[i] = '0;
    foreach (model[i]) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      foreach (pe_rf[k]) pe_rf[k] = rnd(4);
      pe15_act = rnd(4);
      coef     = rnd(4);
      pair_val = rnd(6);
      pe_sel   = 4'($urandom);
      op       = spu_op_e'($urandom % 4);
      @(posedge clk);
      case (op)
        SPU_CENTROID: model[pe_sel] = add(model[pe_sel], mul(pe_rf[pe_sel], coef));
        SPU_OUTLIER:  model[pe_sel] = add(model[pe_sel], mul(pe15_act, coef));
        SPU_PAIR:     model[pe_sel] = add(model[pe_sel], pair_val);
        default: ;
      endcase
      if (i % 200 == 199) begin
        @(negedge clk);
        op = SPU_NONE;
        check_all();
      end
    end
    @(negedge clk);
    clr = 1;
    @(posedge clk);
    #1 clr = 0;
    foreach (model[i]) model[i] = '0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
