// tb_sar_adc_model: conversions of random and extreme inputs; checks the
// code (floor(vin/16) + 512, clipped to 0..1023), that done comes exactly
// CONV_CYCLES+1 clocks after start, and that nothing completes when
// powered down.
module tb_sar_adc_model;
  import cs_pkg::*;
  import tb_cs_ref_pkg::*;
  localparam int CC = 100;
  logic clk = 0, rst_n = 0, pwr_en = 1, start = 0;
  logic signed [19:0] vin = '0;
  logic [9:0] code;
  logic done;
  int checks = 0, failures = 0;

  sar_adc_model #(.CONV_CYCLES(CC)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 15) $display("FAIL %s exp %0d got %0d", what, exp_v, got);
    end
  endtask

  initial begin
    int v, lat;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      v = (t == 0) ? 100000 : (t == 1) ? -100000 : (int'($urandom % 20000) - 10000);
      @(negedge clk); vin = 20'(v); start = 1;
      @(negedge clk); start = 0; vin = '0;
      lat = 1;
      while (!done && lat < 1000) begin @(negedge clk); lat++; end
      chk("latency", lat, CC + 1);
      chk("code", int'(code), adc(v, 1) + 512);
    end
    // powered down: no conversion completes
    @(negedge clk); start = 1; @(negedge clk); start = 0; pwr_en = 0;
    lat = 0;
    repeat (3 * CC) begin @(negedge clk); lat += int'(done); end
    chk("no done when gated", lat, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
