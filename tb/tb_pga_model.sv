// tb_pga_model: every gain setting with random inputs, plus the powered-down
// output.
module tb_pga_model;
  import cs_pkg::*;
  logic pwr_en;
  gain_e gain;
  logic signed [15:0] vin;
  logic signed [19:0] vout;
  int checks = 0, failures = 0;
  int gv [5] = '{1, 4, 5, 6, 7};

  pga_model dut (.*);

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      pwr_en = (t % 10) != 0;
      gain = gain_e'(t % 5);
      vin = 16'($urandom);
      #1;
      checks++;
      if (int'(vout) != (pwr_en ? gv[t % 5] * int'(vin) : 0)) begin
        failures++;
        if (failures < 10) $display("FAIL g=%0d vin=%0d vout=%0d", gv[t % 5], vin, vout);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
