// tb_phi_decoder: exhaustive test of the element decoder. Every 14-bit input
// is applied; the decoded element must equal (number of ones) - 7 in
// sign-magnitude form, zero positive. The histogram must be symmetric and
// peak at zero (bell shape).
module tb_phi_decoder;
  import cs_pkg::*;

  logic [13:0] rnd;
  phi_t        phi;
  int checks = 0, failures = 0;
  int hist [15];

  phi_decoder dut (.rnd, .phi);

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_v, got;
    for (int i = 0; i < 15; i++) hist[i] = 0;
    for (int i = 0; i < (1 << 14); i++) begin
      rnd = 14'(i);
      #1;
      exp_v = $countones(rnd) - 7;
      got = phi.sign ? -int'(phi.mag) : int'(phi.mag);
      checks++;
      if (got != exp_v || (exp_v == 0 && phi.sign)) begin
        failures++;
        if (failures < 10) $display("FAIL rnd=%h exp %0d got sign=%b mag=%0d", rnd, exp_v, phi.sign, phi.mag);
      end
      hist[got + 7]++;
    end
    for (int v = 1; v <= 7; v++) begin
      checks++;
      if (hist[7 + v] != hist[7 - v] || hist[7 + v] > hist[7 + v - 1]) failures++;
    end
    $display("histogram -7..7: %p", hist);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
