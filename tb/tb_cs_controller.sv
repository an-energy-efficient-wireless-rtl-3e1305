// tb_cs_controller: runs the sequencer with a stand-in ADC (done 10 clocks
// after start) through measurements of different M, N and x1 modes and
// checks, cycle by cycle: the order of gains converted per input (x1 first
// only in bypass mode, then x4..x7), power gates high at every conversion and
// low during accumulation, M accumulate cycles with rows 0..M-1 in order,
// acr_first on the first input only, meas_start/meas_done at the measurement
// boundaries with the right M, and one input every SAMPLE_DIV clocks.
module tb_cs_controller;
  import cs_pkg::*;

  localparam int DIV = 600;
  logic clk = 0, rst_n = 0, cs_en = 0, x1_bypass = 1;
  logic [1:0] m_sel = 0;
  logic [11:0] n = 1;
  logic pga_pwr_en, adc_pwr_en, adc_start, adc_done, rr_we, meas_start, phi_next;
  logic acr_en, acr_first, meas_done, sample_miss, x1_bypass_cur;
  gain_e pga_gain, rr_sel;
  logic [6:0] acr_idx;
  logic [7:0] m_cur;
  int checks = 0, failures = 0;

  cs_controller #(.SAMPLE_DIV(DIV)) dut (.*);

  always #5 clk = ~clk;

  // stand-in ADC
  int adc_cnt = -1;
  always_ff @(posedge clk) begin
    adc_done <= 1'b0;
    if (adc_start) adc_cnt <= 10;
    else if (adc_cnt > 0) adc_cnt <= adc_cnt - 1;
    else if (adc_cnt == 0) begin adc_done <= 1'b1; adc_cnt <= -1; end
  end

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
      if (failures < 15) $display("FAIL @%0t %s exp %0d got %0d", $time, what, exp_v, got);
    end
  endtask

  int cfg_m [4] = '{0, 1, 2, 3};
  int cfg_n [4] = '{3, 2, 4, 2};
  int cfg_b [4] = '{1, 0, 1, 0};
  int mvals [4] = '{64, 96, 128, 128};

  int chg = 0, meas = 0, inp = 0, rows = 0, expect_done = 0, gate_off = 0;
  int exp_m, exp_n, exp_b;
  int g_seen [$];
  longint t_first = -1, cyc = 0;

  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (sample_miss) chk("no missed sample", 1, 0);
    if (!pga_pwr_en && !adc_pwr_en) gate_off++;
    if (meas_start) begin
      chk("meas_start at input 0", inp, 0);
      exp_m = mvals[cfg_m[meas % 4]]; exp_n = cfg_n[meas % 4]; exp_b = cfg_b[meas % 4];
      chg = 1;
    end else if (chg != 0) begin
      // change the configuration during the measurement: must not affect it
      m_sel <= 2'(cfg_m[(meas + 1) % 4]); n <= 12'(cfg_n[(meas + 1) % 4]); x1_bypass <= cfg_b[(meas + 1) % 4][0];
      chg = 0;
    end
    if (adc_start) begin
      chk("pga power at conversion", int'(pga_pwr_en && adc_pwr_en), 1);
      if (g_seen.size() == 0) begin
        if (t_first >= 0) chk("input period", int'(cyc - t_first), DIV);
        t_first = cyc;
      end
    end
    if (rr_we) begin
      chk("write gain = pga gain", int'(rr_sel), int'(pga_gain));
      g_seen.push_back(int'(rr_sel));
    end
    if (acr_en) begin
      chk("phi_next with acr_en", int'(phi_next), 1);
      chk("power gated in DP", int'(pga_pwr_en || adc_pwr_en), 0);
      if (rows == 0) begin
        chk("conversions per input", g_seen.size(), (exp_b != 0) ? 5 : 4);
        for (int i = 0; i < g_seen.size(); i++) chk("gain order", g_seen[i], (exp_b != 0) ? i : i + 1);
      end
      chk("row", int'(acr_idx), rows);
      chk("x1 mode held", int'(x1_bypass_cur), exp_b);
      chk("first", int'(acr_first), int'(inp == 0));
      rows++;
      if (rows == exp_m) begin
        rows = 0; inp++; g_seen.delete();
        if (inp == exp_n) expect_done = 1;
      end
    end
    if (meas_done) begin
      chk("meas_done expected", expect_done, 1);
      chk("m_cur", int'(m_cur), exp_m);
      expect_done = 0; inp = 0; meas++;
    end else if (expect_done != 0 && !acr_en) begin
      chk("meas_done right after last row", 0, 1);
      expect_done = 0;
    end
  end

  initial begin
    m_sel = 2'(cfg_m[0]); n = 12'(cfg_n[0]); x1_bypass = cfg_b[0][0];
    repeat (3) @(posedge clk);
    rst_n = 1;
    cs_en = 1;
    wait (meas == 8);
    chk("measurements", meas, 8);
    checks++;
    if (gate_off < 1000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
