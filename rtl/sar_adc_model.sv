// sar_adc_model: behavioural model of the 10-bit SAR ADC.
//
// This is a model of a mixed-signal block, not the chip's converter. start
// (one cycle, while powered) samples vin; CONV_CYCLES clocks later code holds
// the result and done pulses for one cycle. CONV_CYCLES = 100 matches the
// paper's 40 kS/s at a 4 MHz clock. The model is an ideal quantiser:
// code = clamp(floor(vin / 16) + 512, 0, 1023), vin being in units of 1/16
// LSB, i.e. offset-binary output with mid-scale as zero (the coding is this
// design's assumption). The successive-approximation search itself, noise and
// the paper's 9.3-bit effective resolution are not modelled. A start while a
// conversion is running is ignored.
module sar_adc_model
  import cs_pkg::*;
#(
  parameter int unsigned CONV_CYCLES = 100
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                pwr_en,
  input  logic                start,
  input  logic signed [19:0]  vin,
  output logic [ADC_BITS-1:0] code,
  output logic                done
);

  localparam int unsigned CW = $clog2(CONV_CYCLES + 1);

  logic signed [19:0]  held;
  logic [CW-1:0]       cnt;
  logic                running;
  logic signed [19:0]  q;

  always_comb begin
    q = (held >>> 4) + 20'sd512;
    if (q < 0) q = '0;
    else if (q > 20'sd1023) q = 20'sd1023;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held    <= '0;
      cnt     <= '0;
      running <= 1'b0;
      done    <= 1'b0;
      code    <= '0;
    end else begin
      done <= 1'b0;
      if (!pwr_en) begin
        running <= 1'b0;
      end else if (start && !running) begin
        held    <= vin;
        cnt     <= CW'(CONV_CYCLES - 1);
        running <= 1'b1;
      end else if (running) begin
        if (cnt == '0) begin
          running <= 1'b0;
          done    <= 1'b1;
          code    <= q[ADC_BITS-1:0];
        end else begin
          cnt <= cnt - 1'b1;
        end
      end
    end
  end

endmodule
