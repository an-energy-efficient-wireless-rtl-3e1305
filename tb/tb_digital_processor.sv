// tb_digital_processor: random sample sets against every element value in
// both x1 modes. The expected product is worked out from the signed sample
// values with floor division for the halving (Table-I rule).
module tb_digital_processor;
  import cs_pkg::*;

  samples_t samples;
  phi_t phi;
  logic x1_bypass;
  logic signed [10:0] prod;
  int checks = 0, failures = 0;

  digital_processor dut (.*);

  function automatic int fl(int a, int d);
    return (a >= 0) ? a / d : -((-a + d - 1) / d);
  endfunction

  initial begin
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c [5];
    int a, e;
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < 5; i++) c[i] = (t < 2) ? (t == 0 ? 0 : 1023) : int'($urandom % 1024);
      samples = '{x1: 10'(c[0]), x4: 10'(c[1]), x5: 10'(c[2]), x6: 10'(c[3]), x7: 10'(c[4])};
      for (int i = 0; i < 5; i++) c[i] -= 512;
      for (int k = 0; k < 16; k++) begin
        phi = phi_t'(4'(k));
        x1_bypass = t[0];
        #1;
        case (k % 8)
          0: a = 0;
          1: a = x1_bypass ? c[0] : fl(c[1], 4);
          2: a = fl(c[1], 2);
          3: a = fl(c[3], 2);
          4: a = c[1];
          5: a = c[2];
          6: a = c[3];
          default: a = c[4];
        endcase
        e = (k >= 8) ? -a : a;
        checks++;
        if (int'(prod) != e) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d c=%p exp %0d got %0d", k, c, e, prod);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
