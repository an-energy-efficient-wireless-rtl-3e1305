// accumulator_regs: the M measurement accumulators (ACR).
//
// Row j holds y_j = sum over i of Phi_ij * x_i for the measurement in
// progress. Each cycle with en high adds the digital processor's product to
// row idx; with first high (the first input sample of a measurement) the row
// is loaded with the product instead, which clears the ACR without a separate
// pass. The paper fixes 16-bit registers and up to M = 128 rows; what happens
// on overflow is not stated, and this design saturates at the 16-bit limits
// and pulses sat for one cycle when it does. The sums are visible in parallel
// on y; a row's new value shows there one cycle after its update.
module accumulator_regs
  import cs_pkg::*;
#(
  parameter int unsigned M_MAX = 128
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               en,
  input  logic [$clog2(M_MAX)-1:0]           idx,
  input  logic                               first,
  input  logic signed [PROD_BITS-1:0]        prod,
  output logic signed [ACC_BITS-1:0]         y [M_MAX],
  output logic                               sat
);

  localparam logic signed [ACC_BITS:0] MAXV = (ACC_BITS+1)'((1 << (ACC_BITS-1)) - 1);
  localparam logic signed [ACC_BITS:0] MINV = -(ACC_BITS+1)'(1 << (ACC_BITS-1));

  logic signed [ACC_BITS:0]   sum;
  logic signed [ACC_BITS-1:0] res;
  logic                       clip;

  always_comb begin
    sum  = (first ? '0 : (ACC_BITS+1)'(y[idx])) + (ACC_BITS+1)'(prod);
    clip = 1'b0;
    res  = sum[ACC_BITS-1:0];
    if (sum > MAXV) begin
      res  = MAXV[ACC_BITS-1:0];
      clip = 1'b1;
    end else if (sum < MINV) begin
      res  = MINV[ACC_BITS-1:0];
      clip = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < M_MAX; j++) y[j] <= '0;
      sat <= 1'b0;
    end else begin
      sat <= en & clip;
      if (en) y[idx] <= res;
    end
  end

endmodule
