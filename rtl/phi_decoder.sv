// phi_decoder: turns uniform random bits into one sampling-matrix element.
//
// The paper asks for 4-bit elements in {0, +-1/8, ..., +-7/8} that follow a
// Gaussian distribution but does not say how they are drawn. This decoder
// counts the ones among 14 random bits and subtracts 7, giving a binomial
// value in -7..+7 (mean 0, standard deviation about 1.87 steps), which is the
// simplest bell-shaped law over exactly these fifteen values. The result is
// returned in sign-magnitude form (cs_pkg::phi_t); zero is always positive.
// Purely combinational.
module phi_decoder
  import cs_pkg::*;
#(
  parameter int unsigned RAND_BITS = 14
) (
  input  logic [RAND_BITS-1:0] rnd,
  output phi_t                 phi
);

  localparam int unsigned HALF = RAND_BITS / 2;

  localparam int unsigned CW = $clog2(RAND_BITS + 1);

  logic [CW-1:0] ones;

  always_comb begin
    ones = '0;
    for (int i = 0; i < RAND_BITS; i++) ones += CW'(rnd[i]);
    if (ones >= CW'(HALF)) begin
      phi.sign = 1'b0;
      phi.mag  = 3'(ones - CW'(HALF));
    end else begin
      phi.sign = 1'b1;
      phi.mag  = 3'(CW'(HALF) - ones);
    end
  end

endmodule
