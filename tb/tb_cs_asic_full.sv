// tb_cs_asic_full: the core at its default sizes and timing, in the
// configuration of the paper's measurements: 500 input samples per second
// from a 4 MHz clock, M = 128, N = 1024 (compression ratio 8), x1 sampled
// directly. Two complete measurements at compression ratio 8 and one at
// ratio 4 (N = 512) are run and their serial frames are compared with the
// reference model; the measurement period must be N * 8000 clocks (one frame
// of 128 x 16 bits per 2.048 s at ratio 8).
module tb_cs_asic_full;
  import cs_pkg::*;
  import tb_cs_ref_pkg::*;

  localparam int DIV = 8000;   // default SAMPLE_DIV
  localparam int M = 128, NMEAS = 3;
  int plan_n [NMEAS] = '{1024, 1024, 512};

  logic clk = 0, rst_n = 0;
  logic signed [15:0] vin = '0;
  logic cs_en = 0, x1_bypass = 1, key_load = 0, tx_ready = 1;
  logic [1:0] m_sel = 2'd2;
  logic [11:0] n = 12'd1024;
  logic [255:0] key = '0;
  logic tx_data, tx_valid, tx_sof, pga_pwr_en, adc_pwr_en, meas_done;
  logic [2:0] mat_idx;
  logic key_valid, key_updated, key_pending, acr_sat, tx_overrun, sample_miss;

  cs_asic_top dut (.*);

  always #125 clk = ~clk;  // 4 MHz

  int checks = 0, failures = 0, n_frames = 0;

  initial begin
    repeat ((1024 + 1024 + 512) * DIV + 200000) @(posedge clk);
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

  int exp_q [$][$];
  int cur [$];
  bit in_frame = 0;
  int nb = 0;
  logic [15:0] w;
  always @(negedge clk) tx_ready <= ($urandom % 2) != 0;
  always @(posedge clk) if (rst_n) begin
    if (sample_miss) chk("no missed input", 1, 0);
    if (tx_overrun) chk("no overrun", 1, 0);
    if (tx_valid && tx_ready) begin
      if (tx_sof) begin
        in_frame = 1; nb = 0;
        if (exp_q.size() == 0) begin chk("frame expected", 0, 1); cur.delete(); end
        else cur = exp_q.pop_front();
      end
      if (in_frame) begin
        w = {w[14:0], tx_data};
        nb++;
        if (nb % 16 == 0) begin
          chk("y word", int'($signed(w)), cur[nb/16 - 1]);
          if (nb / 16 == cur.size()) begin in_frame = 0; n_frames++; end
        end
      end
    end
  end

  longint cyc = 0, last_done = -1;
  int done_cnt = 0;
  always @(posedge clk) begin
    cyc++;
    if (meas_done && rst_n) begin
      if (last_done >= 0) chk("measurement period", int'(cyc - last_done), plan_n[done_cnt] * DIV);
      last_done = cyc;
      done_cnt++;
    end
  end

  initial begin
    phi_ref r;
    bit [255:0] k1;
    int v, idx, N;
    int col [M];
    int y [M];
    int fr [$];
    real ph;
    r = new();
    k1 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); key = k1; key_load = 1;
    @(negedge clk); key_load = 0;
    r.load_key(k1);
    cs_en = 1;
    for (int k = 0; k < NMEAS; k++) begin
      idx = r.start();
      N = plan_n[k];
      for (int j = 0; j < M; j++) y[j] = 0;
      for (int i = 0; i < N; i++) begin
        for (int j = 0; j < M; j++) col[j] = r.next();
        // a 10 Hz and a 37 Hz tone plus noise, sampled at 500 S/s
        ph = 2.0 * 3.14159265 * real'(k * 1024 + i) / 500.0;
        v = int'(700.0 * $sin(10.0 * ph) + 300.0 * $sin(37.0 * ph)) + int'($urandom % 41) - 20;
        vin = 16'(v);
        @(posedge pga_pwr_en);
        if (i == 0) begin
          #1 chk("matrix index", int'(mat_idx), idx);
          if (k + 1 < NMEAS) n = 12'(plan_n[k + 1]);
        end
        @(negedge pga_pwr_en);
        for (int j = 0; j < M; j++) y[j] = sat16(y[j] + product(v, col[j], 1'b1));
      end
      fr.delete();
      for (int j = 0; j < M; j++) fr.push_back(y[j]);
      exp_q.push_back(fr);
      @(posedge meas_done);
    end
    repeat (10000) @(posedge clk);
    chk("frames", n_frames, NMEAS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
