// digital_processor: multiplier-free product of one matrix element and x_i.
//
// The multiplication Phi_ij * x_i is split between the analog front end and
// this block, following the paper's Table I. The PGA has already produced the
// samples 4x, 5x, 6x and 7x (and x directly); for an element of magnitude
// k/8 the block selects and shifts:
//   k=0 -> 0          k=4 -> 4x        k=1 -> x (direct) or 4x >> 2
//   k=5 -> 5x         k=6 -> 6x        k=2 -> 4x >> 1
//   k=7 -> 7x                          k=3 -> 6x >> 1
// and negates the result for a negative element (two's complement). The
// common factor 1/8 is part of the front-end gain, so prod is Phi_ij*x_i*8 in
// x1-sample LSBs. x1_bypass chooses the direct x1 sample (the paper's
// default) or 4x >> 2 (its alternative).
// ADC codes arrive in offset binary (512 = zero); inverting the MSB makes them
// two's complement before the arithmetic shift. The code format is this
// design's assumption. Purely combinational, one product per clock.
module digital_processor
  import cs_pkg::*;
(
  input  samples_t                      samples,
  input  phi_t                          phi,
  input  logic                          x1_bypass,
  output logic signed [PROD_BITS-1:0]   prod
);

  function automatic logic signed [ADC_BITS-1:0] to_signed(logic [ADC_BITS-1:0] c);
    return {~c[ADC_BITS-1], c[ADC_BITS-2:0]};
  endfunction

  logic signed [ADC_BITS-1:0]  s1, s4, s5, s6, s7;
  logic signed [PROD_BITS-1:0] mag_val;

  always_comb begin
    s1 = to_signed(samples.x1);
    s4 = to_signed(samples.x4);
    s5 = to_signed(samples.x5);
    s6 = to_signed(samples.x6);
    s7 = to_signed(samples.x7);
    case (phi.mag)
      3'd0:    mag_val = '0;
      3'd1:    mag_val = x1_bypass ? PROD_BITS'(s1) : PROD_BITS'(s4 >>> 2);
      3'd2:    mag_val = PROD_BITS'(s4 >>> 1);
      3'd3:    mag_val = PROD_BITS'(s6 >>> 1);
      3'd4:    mag_val = PROD_BITS'(s4);
      3'd5:    mag_val = PROD_BITS'(s5);
      3'd6:    mag_val = PROD_BITS'(s6);
      default: mag_val = PROD_BITS'(s7);
    endcase
    prod = phi.sign ? -mag_val : mag_val;
  end

endmodule
