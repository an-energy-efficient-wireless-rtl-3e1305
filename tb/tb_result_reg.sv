// tb_result_reg: writes random codes to random slots of the result
// registers and checks that every slot holds its last written code, that
// the reset value is mid-scale and that nothing changes without wr_en.
module tb_result_reg;
  import cs_pkg::*;

  logic clk = 0, rst_n = 0, wr_en = 0;
  gain_e wr_sel = G_X1;
  logic [9:0] wr_data = '0;
  samples_t samples;
  int checks = 0, failures = 0;
  int model [5];

  result_reg dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    int got [5];
    got = '{int'(samples.x1), int'(samples.x4), int'(samples.x5), int'(samples.x6), int'(samples.x7)};
    for (int i = 0; i < 5; i++) begin
      checks++;
      if (got[i] != model[i]) begin
        failures++;
        if (failures < 10) $display("FAIL slot %0d exp %0d got %0d", i, model[i], got[i]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 5; i++) model[i] = 512;
    repeat (3) @(posedge clk);
    #1 check();
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      wr_en   = ($urandom % 3) != 0;
      wr_sel  = gain_e'($urandom % 5);
      wr_data = 10'($urandom);
      @(posedge clk);
      if (wr_en) model[int'(wr_sel)] = int'(wr_data);
      #1 check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
