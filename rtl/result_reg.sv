// result_reg: the ADC result registers of one input sample.
//
// Each input sample x_i is converted up to five times: directly (x1, PGA
// bypassed) and at the PGA gains x4, x5, x6 and x7. Each code is written into
// its own slot when the conversion ends (wr_en for one cycle, wr_sel naming the
// slot) and held until the same slot is written for the next input sample;
// the digital processor reads all slots in parallel. The four PGA slots follow
// the paper's block diagram; the x1 slot serves the paper's default of
// sampling x1 directly. Reset loads mid-scale (code 512, a zero signal),
// which is this design's choice.
module result_reg
  import cs_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  gain_e               wr_sel,
  input  logic [ADC_BITS-1:0] wr_data,
  output samples_t            samples
);

  localparam logic [ADC_BITS-1:0] MID = ADC_BITS'(1 << (ADC_BITS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      samples <= '{x1: MID, x4: MID, x5: MID, x6: MID, x7: MID};
    end else if (wr_en) begin
      case (wr_sel)
        G_X1:    samples.x1 <= wr_data;
        G_X4:    samples.x4 <= wr_data;
        G_X5:    samples.x5 <= wr_data;
        G_X6:    samples.x6 <= wr_data;
        G_X7:    samples.x7 <= wr_data;
        default: ;
      endcase
    end
  end

endmodule
