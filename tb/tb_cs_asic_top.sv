// tb_cs_asic_top: end-to-end test of the compressed-sensing core.
//
// The testbench plays the amplifier (vin), the microcontroller (key and
// configuration) and the transmitter (tx_ready, collecting the serial
// frames). A reference model regenerates the sampling matrices from the key
// and computes the expected y of every measurement from the inputs it fed
// in; every received frame is compared word by word. The plan of six
// measurements makes each mechanism of the design happen: all three M
// settings, both x1 modes, a key update (loaded mid-measurement, applied at
// the next one), the matrix shuffle, accumulator saturation and ADC clipping
// (a large input whose sign follows row 0 of the matrix), back-pressure on
// the serial output, and a frame overrun (transmitter stalled over a whole
// measurement, so the next frame is dropped). It also checks the measurement
// period (N input periods) and that the analog blocks sleep between inputs.
// SAMPLE_DIV and CONV_CYCLES are shortened; all sizes are the defaults.
module tb_cs_asic_top;
  import cs_pkg::*;
  import tb_cs_ref_pkg::*;

  localparam int DIV = 1000;
  localparam int CC  = 20;
  localparam int NMEAS = 6;
  int plan_msel [NMEAS] = '{0, 1, 2, 3, 2, 0};
  int plan_n    [NMEAS] = '{128, 192, 320, 128, 16, 16};
  int plan_byp  [NMEAS] = '{1, 0, 1, 0, 1, 0};
  int plan_big  [NMEAS] = '{0, 0, 1, 0, 0, 0};   // input follows row 0's sign
  int mval      [4]     = '{64, 96, 128, 128};
  localparam int DROP = 4;                         // frame lost to overrun

  logic clk = 0, rst_n = 0;
  logic signed [15:0] vin = '0;
  logic cs_en = 0, x1_bypass = 1, key_load = 0, tx_ready = 0;
  logic [1:0] m_sel = 0;
  logic [11:0] n = 1;
  logic [255:0] key = '0;
  logic tx_data, tx_valid, tx_sof, pga_pwr_en, adc_pwr_en, meas_done;
  logic [2:0] mat_idx;
  logic key_valid, key_updated, key_pending, acr_sat, tx_overrun, sample_miss;

  cs_asic_top #(.SAMPLE_DIV(DIV), .CONV_CYCLES(CC)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_keyupd = 0, n_sat = 0, n_clip = 0, n_stall = 0, n_ovr = 0, n_sleep = 0, n_frames = 0;
  int n_byp [2] = '{0, 0};
  int n_m [3] = '{0, 0, 0};
  int idx_seen [8] = '{0, 0, 0, 0, 0, 0, 0, 0};
  bit hold_tx = 0;
  bit done_all = 0;

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t %s exp %0d got %0d", $time, what, exp_v, got);
    end
  endtask

  // expected frames, in order
  int exp_q [$][$];

  // ---- transmitter side: random ready, frame collector
  int cur [$];
  int words [$];
  bit in_frame = 0;
  int nb = 0;
  logic [15:0] w;
  // sampled at the rising edge, where the core sees the same values
  always @(negedge clk) tx_ready <= hold_tx ? 1'b0 : (($urandom % 4) != 0);
  always @(posedge clk) if (rst_n) begin
    if (tx_valid && !tx_ready) n_stall++;
    if (!pga_pwr_en && !adc_pwr_en) n_sleep++;
    n_keyupd += int'(key_updated);
    n_sat += int'(acr_sat);
    n_ovr += int'(tx_overrun);
    if (sample_miss) chk("no missed input", 1, 0);
    if (tx_valid && tx_ready) begin
      if (tx_sof) begin
        if (in_frame) chk("frame complete before next sof", 0, 1);
        in_frame = 1; nb = 0; words.delete();
        if (exp_q.size() == 0) begin chk("frame expected", 0, 1); cur.delete(); end
        else cur = exp_q.pop_front();
      end
      if (in_frame) begin
        w = {w[14:0], tx_data};
        nb++;
        if (nb % 16 == 0) begin
          if (nb / 16 <= cur.size()) chk("y word", int'($signed(w)), cur[nb/16 - 1]);
          if (nb / 16 == cur.size()) begin in_frame = 0; n_frames++; end
        end
      end
    end
  end

  // clocks from an input's sample tick to the end of its accumulation
  function automatic int lat(int k);
    return ((plan_byp[k] != 0) ? 5 : 4) * (CC + 2) + mval[plan_msel[k]];
  endfunction

  // measurement period
  longint cyc = 0, last_done = -1;
  int done_cnt = 0;
  always @(posedge clk) begin
    cyc++;
    if (meas_done && rst_n) begin
      // N input periods, corrected for the different conversion and
      // accumulation time of consecutive measurements
      if (last_done >= 0 && done_cnt < NMEAS)
        chk("measurement period", int'(cyc - last_done),
            plan_n[done_cnt] * DIV + lat(done_cnt) - lat(done_cnt - 1));
      last_done = cyc;
      done_cnt++;
    end
  end

  initial begin
    phi_ref r;
    bit [255:0] k1, k2;
    int M, N, byp, idx, v, amp;
    int col [128];
    int y [128];
    r = new();
    k1 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    k2 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); key = k1; key_load = 1;
    @(negedge clk); key_load = 0;
    r.load_key(k1);
    m_sel = 2'(plan_msel[0]); n = 12'(plan_n[0]); x1_bypass = plan_byp[0][0];
    cs_en = 1;
    for (int k = 0; k < NMEAS; k++) begin
      M = mval[plan_msel[k]]; N = plan_n[k]; byp = plan_byp[k];
      n_byp[byp]++;
      n_m[plan_msel[k] > 2 ? 2 : plan_msel[k]]++;
      idx = r.start();
      for (int j = 0; j < M; j++) y[j] = 0;
      for (int i = 0; i < N; i++) begin
        for (int j = 0; j < M; j++) col[j] = r.next();
        if (plan_big[k] != 0) v = (col[0] >= 0) ? 1400 : -1400;
        else begin
          amp = 300 + (i % 5) * 100;
          v = int'($urandom % (2 * amp + 1)) - amp;
        end
        if (v * 7 / 16 > 511 || v * 7 / 16 < -512) n_clip++;
        vin = 16'(v);
        @(posedge pga_pwr_en);
        if (i == 0) begin
          #1;
          chk("matrix index", int'(mat_idx), idx);
          idx_seen[mat_idx]++;
          chk("key valid", int'(key_valid), 1);
          // configure the next measurement while this one runs
          if (k + 1 < NMEAS) begin
            m_sel = 2'(plan_msel[k+1]); n = 12'(plan_n[k+1]); x1_bypass = plan_byp[k+1][0];
          end
        end
        if (k == 1 && i == 10) begin
          @(negedge clk); key = k2; key_load = 1;
          @(negedge clk); key_load = 0;
          r.load_key(k2);
          chk("key pending", int'(key_pending), 1);
        end
        @(negedge pga_pwr_en);
        vin = 16'($urandom);  // ignored while the analog blocks sleep
        for (int j = 0; j < M; j++) y[j] = sat16(y[j] + product(v, col[j], byp[0]));
      end
      if (k != DROP) begin
        int fr [$];
        fr.delete();
        for (int j = 0; j < M; j++) fr.push_back(y[j]);
        exp_q.push_back(fr);
      end
      @(posedge meas_done);
      if (k == DROP - 1) hold_tx = 1;
      if (k == DROP) begin
        repeat (5) @(posedge clk);
        hold_tx = 0;
      end
    end
    cs_en = 0;
    // let the last frame drain
    repeat (20000) @(posedge clk);
    chk("frames received", n_frames, NMEAS - 1);
    chk("expected frames left", exp_q.size(), 0);
    chk("overruns", n_ovr, 1);
    $display("mechanisms: key_updates=%0d saturations=%0d adc_clips=%0d tx_stall_cycles=%0d overruns=%0d sleep_cycles=%0d",
             n_keyupd, n_sat, n_clip, n_stall, n_ovr, n_sleep);
    $display("            x1_bypass on/off=%0d/%0d  M=64/96/128: %0d/%0d/%0d  matrices used=%p",
             n_byp[1], n_byp[0], n_m[0], n_m[1], n_m[2], idx_seen);
    chk("key updates", n_keyupd, 2);
    begin
      automatic int distinct = 0;
      for (int i = 0; i < 8; i++) if (idx_seen[i] > 0) distinct++;
      checks++; if (distinct < 2) begin failures++; $display("FAIL shuffle never changed the matrix"); end
    end
    checks++; if (n_sat == 0) begin failures++; $display("FAIL no saturation"); end
    checks++; if (n_clip == 0) begin failures++; $display("FAIL no ADC clipping"); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no back-pressure"); end
    checks++; if (n_sleep == 0) begin failures++; $display("FAIL analog never gated"); end
    checks++; if (n_byp[0] == 0 || n_byp[1] == 0) begin failures++; $display("FAIL one x1 mode unused"); end
    checks++; if (n_m[0] == 0 || n_m[1] == 0 || n_m[2] == 0) begin failures++; $display("FAIL an M setting unused"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
