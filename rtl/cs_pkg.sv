// cs_pkg: types and constants shared by the compressed-sensing core.
//
// The sampling matrix Phi holds 4-bit elements from {0, +-1/8, ..., +-7/8}.
// They are kept in sign-magnitude form (phi_t): the magnitude k stands for
// k/8, the common factor 1/8 being folded into the front-end amplifier gain.
// The ADC is 10 bits wide and the measurement accumulators 16 bits, as in the
// paper. gain_e names the five conversions of one input sample: the direct
// (PGA bypassed) x1 sample and the four PGA gains x4..x7. The sign-magnitude
// encoding and the enum codes are this design's choices.
package cs_pkg;

  localparam int unsigned ADC_BITS  = 10;
  localparam int unsigned ACC_BITS  = 16;
  localparam int unsigned PROD_BITS = ADC_BITS + 1;  // room for -(-512)
  localparam int unsigned KEY_BITS  = 256;

  typedef struct packed {
    logic       sign;  // 1: negative
    logic [2:0] mag;   // element value = mag/8
  } phi_t;

  typedef enum logic [2:0] {
    G_X1 = 3'd0,  // PGA bypassed
    G_X4 = 3'd1,
    G_X5 = 3'd2,
    G_X6 = 3'd3,
    G_X7 = 3'd4
  } gain_e;

  // The five stored ADC codes of one input sample (offset binary).
  typedef struct packed {
    logic [ADC_BITS-1:0] x1;
    logic [ADC_BITS-1:0] x4;
    logic [ADC_BITS-1:0] x5;
    logic [ADC_BITS-1:0] x6;
    logic [ADC_BITS-1:0] x7;
  } samples_t;

  // Analog gain of each setting.
  function automatic int unsigned gain_value(gain_e g);
    case (g)
      G_X1:    return 1;
      G_X4:    return 4;
      G_X5:    return 5;
      G_X6:    return 6;
      G_X7:    return 7;
      default: return 0;
    endcase
  endfunction

  // One step of the 32-bit xorshift generator (shifts 13, 17, 5).
  function automatic logic [31:0] xorshift32(logic [31:0] s);
    logic [31:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

endpackage
