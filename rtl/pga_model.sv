// pga_model: behavioural model of the programmable gain amplifier.
//
// This is a model of an analog block, not synthesizable hardware of the
// chip. The PGA amplifies the filtered neural signal by 4, 5, 6 or 7 before
// the ADC, or is bypassed (gain 1) for the direct sample; these gains are the
// paper's. Voltages are carried as signed integers in units of 1/16 of an ADC
// LSB. The model is ideal: exact gain, no settling time, noise or
// nonlinearity; while powered down (pwr_en low) its output is 0.
module pga_model
  import cs_pkg::*;
(
  input  logic               pwr_en,
  input  gain_e              gain,
  input  logic signed [15:0] vin,
  output logic signed [19:0] vout
);

  always_comb begin
    if (!pwr_en) vout = '0;
    else begin
      case (gain)
        G_X1:    vout = 20'(vin);
        G_X4:    vout = 20'(vin) * 20'sd4;
        G_X5:    vout = 20'(vin) * 20'sd5;
        G_X6:    vout = 20'(vin) * 20'sd6;
        G_X7:    vout = 20'(vin) * 20'sd7;
        default: vout = '0;
      endcase
    end
  end

endmodule
