// tb_y_serializer: loads random vectors of M words, pulls the frame out
// with a random ready pattern and rebuilds the words (MSB first, sof on the
// first bit). Also checks that a frame needs exactly M*16 accepted bits and
// that a load during a frame is dropped with an overrun pulse.
module tb_y_serializer;
  import cs_pkg::*;

  localparam int MM = 128;
  logic clk = 0, rst_n = 0, load = 0, tx_ready = 0;
  logic [7:0] m = '0;
  logic signed [15:0] y [MM];
  logic tx_data, tx_valid, tx_sof, overrun;
  int checks = 0, failures = 0;

  y_serializer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
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

  // one frame of mm words; with ovr a second load arrives mid-frame and
  // must be dropped (the frame keeps its original words)
  task automatic run_frame(int mm, bit ovr);
    logic [15:0] sent [MM];
    logic [15:0] w;
    int nbits = 0, novr = 0;
    @(negedge clk);
    m = 8'(mm);
    for (int j = 0; j < MM; j++) begin
      y[j] = 16'($urandom);
      sent[j] = y[j];
    end
    load = 1;
    @(negedge clk);
    load = 0;
    for (int j = 0; j < MM; j++) y[j] = 16'($urandom);  // buffer must hold the copy
    w = '0;
    while (tx_valid) begin
      tx_ready = ($urandom % 2) != 0;
      load = ovr && nbits == 40 && tx_ready;
      #1;
      if (tx_ready) begin
        chk("sof", int'(tx_sof), int'(nbits == 0));
        w = {w[14:0], tx_data};
        nbits++;
        if (nbits % 16 == 0) chk("word", int'(w), int'(sent[nbits/16 - 1]));
      end
      @(negedge clk);
      novr += int'(overrun);
      load = 0;
    end
    @(negedge clk);
    novr += int'(overrun);
    chk("bits per frame", nbits, 16 * mm);
    chk("overrun", novr, int'(ovr));
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_frame(64, 0);
    run_frame(96, 0);
    run_frame(128, 1);
    run_frame(5, 0);
    run_frame(128, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
