// tb_phi_gen: checks the key-derived element stream and the matrix shuffle
// against the reference model: matrix index and the first elements of each
// measurement, a key loaded mid-measurement taking effect only at the next
// measurement start (key_updated pulse), repeatability after reset (the
// receiver must regenerate the same matrices) and that the shuffle visits
// more than one matrix.
module tb_phi_gen;
  import cs_pkg::*;
  import tb_cs_ref_pkg::*;

  logic clk = 0, rst_n = 0, key_load = 0, meas_start = 0, next = 0;
  logic [255:0] key = '0;
  phi_t phi;
  logic [2:0] mat_idx;
  logic key_valid, key_pending, key_updated;
  int checks = 0, failures = 0;
  int seen [8];
  int rec [64];

  phi_gen dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int val(phi_t p);
    return p.sign ? -int'(p.mag) : int'(p.mag);
  endfunction

  task automatic chk(string what, int got, int exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 15) $display("FAIL %s exp %0d got %0d", what, exp_v, got);
    end
  endtask

  task automatic do_key(bit [255:0] k);
    @(negedge clk); key = k; key_load = 1;
    @(negedge clk); key_load = 0;
  endtask

  // one measurement of len elements, optional key load in the middle
  task automatic measure(phi_ref r, int len, bit mid_load, bit [255:0] k2, bit exp_upd);
    int ei;
    @(negedge clk); meas_start = 1;
    ei = r.start();
    @(negedge clk); meas_start = 0;
    chk("key_updated", int'(key_updated), int'(exp_upd));
    chk("mat_idx", int'(mat_idx), ei);
    seen[mat_idx]++;
    for (int e = 0; e < len; e++) begin
      chk("elem", val(phi), r.next());
      if (e < 64) rec[e] = val(phi);
      if (mid_load && e == len / 2) begin
        key = k2; key_load = 1; next = 1;
        @(negedge clk); key_load = 0; next = 0;
        r.load_key(k2);
      end else begin
        next = 1;
        @(negedge clk); next = 0;
      end
      // idle cycles between elements must not advance
      if (e % 7 == 0) @(negedge clk);
    end
  endtask

  initial begin
    phi_ref r;
    bit [255:0] k1, k2;
    int first_run [64];
    k1 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    k2 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < 8; i++) seen[i] = 0;
    r = new();
    repeat (2) @(posedge clk);
    rst_n = 1;
    chk("key_valid at reset", int'(key_valid), 0);
    do_key(k1); r.load_key(k1);
    chk("key_pending", int'(key_pending), 1);
    measure(r, 200, 0, '0, 1);
    first_run = rec;
    chk("key_valid", int'(key_valid), 1);
    for (int m = 0; m < 12; m++) measure(r, 100, m == 5, k2, m == 6);
    checks++;
    begin
      automatic int distinct = 0;
      for (int i = 0; i < 8; i++) if (seen[i] > 0) distinct++;
      if (distinct < 2) failures++;
      $display("matrices used: %p", seen);
    end
    // repeatability: reset and redo the first measurement
    rst_n = 0; @(negedge clk); rst_n = 1;
    r = new();
    do_key(k1); r.load_key(k1);
    measure(r, 64, 0, '0, 1);
    for (int e = 0; e < 64; e++) chk("repeat", rec[e], first_run[e]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
