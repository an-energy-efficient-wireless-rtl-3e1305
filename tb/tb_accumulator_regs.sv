// tb_accumulator_regs: random accumulate/load sequences over all rows,
// compared with an integer model that saturates at the 16-bit limits;
// the sat pulse must match the model. Large products are used in a second
// phase so that both limits are reached.
module tb_accumulator_regs;
  import cs_pkg::*;
  import tb_cs_ref_pkg::*;

  localparam int M = 128;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic [6:0] idx = '0;
  logic signed [10:0] prod = '0;
  logic signed [15:0] y [M];
  logic sat;
  int checks = 0, failures = 0, sats = 0;
  int model [M];

  accumulator_regs dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s, exp_sat;
    for (int j = 0; j < M; j++) model[j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30000; t++) begin
      @(negedge clk);
      en    = ($urandom % 4) != 0;
      first = (t < 10000) && (($urandom % 50) == 0);
      idx   = (t < 10000) ? 7'($urandom) : 7'($urandom % 4);
      prod  = (t < 10000) ? 11'(int'($urandom % 201) - 100)
                          : (((t / 3000) % 2 != 0) ? 11'sd512 - 11'($urandom % 8) : -11'sd512 + 11'($urandom % 8));
      @(posedge clk);
      exp_sat = 0;
      if (en) begin
        s = (first ? 0 : model[idx]) + int'(prod);
        model[idx] = sat16(s);
        exp_sat = int'(s != model[idx]);
      end
      #1;
      checks++;
      if (int'(y[idx]) != model[idx] || int'(sat) != exp_sat) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d idx=%0d exp %0d/%0d got %0d/%0d", t, idx, model[idx], exp_sat, y[idx], sat);
      end
      sats += exp_sat;
    end
    for (int j = 0; j < M; j++) begin
      checks++;
      if (int'(y[j]) != model[j]) failures++;
    end
    checks++;
    if (sats == 0) failures++;
    $display("saturations: %0d", sats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
