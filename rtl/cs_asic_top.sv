// cs_asic_top: compressed-sensing encryption core of the neural recorder.
//
// The filtered neural signal vin is compressed and enciphered in one step,
// y = Phi_S x: every N input samples produce M 16-bit measurements, and the
// sampling matrix Phi_S, regenerated from the secret key K_S, is the cipher
// key. Data path per input sample (see cs_controller for the sequence):
//   vin -> PGA (x1 bypass, x4, x5, x6, x7) -> 10-bit SAR ADC -> result
//   registers -> digital processor (select / >>1 / complement, no
//   multiplier) -> M accumulators -> serializer -> tx_* (to the transmitter)
// with phi_gen supplying one matrix element per clock. The PGA and ADC are
// behavioural models of analog parts; everything else is synthesizable.
//
// Interface: vin is the output of the amplifier and filters, in units of 1/16
// ADC LSB. key/key_load come from the microcontroller that runs the key
// exchange; a new key takes effect at the next measurement. cs_en, m_sel
// (0:64, 1:96, 2:128 rows), n (inputs per measurement; compression ratio
// n/M) and x1_bypass configure the core and are sampled at the start of each
// measurement. tx_data/tx_valid/tx_ready/tx_sof carry y_1..y_M, 16 bits each,
// MSB first. pga_pwr_en/adc_pwr_en are the power gates of the analog blocks.
// Timing at the defaults (4 MHz clock, SAMPLE_DIV 8000): one input every
// 2 ms (500 S/s); each input takes 4 or 5 conversions of CONV_CYCLES+2
// clocks plus M clocks of accumulation; a frame of M*16 bits follows every
// N inputs.
module cs_asic_top
  import cs_pkg::*;
#(
  parameter int unsigned M_MAX        = 128,
  parameter int unsigned N_W          = 12,
  parameter int unsigned SAMPLE_DIV   = 8000,
  parameter int unsigned CONV_CYCLES  = 100,
  parameter int unsigned NUM_MATRICES = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [15:0]       vin,
  input  logic                     cs_en,
  input  logic [1:0]               m_sel,
  input  logic [N_W-1:0]           n,
  input  logic                     x1_bypass,
  input  logic [KEY_BITS-1:0]      key,
  input  logic                     key_load,
  input  logic                     tx_ready,
  output logic                     tx_data,
  output logic                     tx_valid,
  output logic                     tx_sof,
  output logic                     pga_pwr_en,
  output logic                     adc_pwr_en,
  output logic                     meas_done,
  output logic [$clog2(NUM_MATRICES)-1:0] mat_idx,
  output logic                     key_valid,
  output logic                     key_updated,
  output logic                     key_pending,
  output logic                     acr_sat,
  output logic                     tx_overrun,
  output logic                     sample_miss
);

  gain_e                      pga_gain, rr_sel;
  logic signed [19:0]         pga_out;
  logic                       adc_start, adc_done, rr_we;
  logic [ADC_BITS-1:0]        adc_code;
  samples_t                   samples;
  phi_t                       phi;
  logic                       meas_start, phi_next, acr_en, acr_first;
  logic [$clog2(M_MAX)-1:0]   acr_idx;
  logic [$clog2(M_MAX):0]     m_cur;
  logic signed [PROD_BITS-1:0] prod;
  logic signed [ACC_BITS-1:0] y [M_MAX];
  logic                       x1_bypass_q;

  cs_controller #(
    .M_MAX(M_MAX), .N_W(N_W), .SAMPLE_DIV(SAMPLE_DIV)
  ) u_ctrl (
    .clk, .rst_n, .cs_en, .m_sel, .n,
    .x1_bypass,
    .pga_pwr_en, .adc_pwr_en, .pga_gain, .adc_start, .adc_done,
    .rr_we, .rr_sel, .meas_start, .phi_next, .acr_en, .acr_idx, .acr_first,
    .meas_done, .m_cur, .x1_bypass_cur(x1_bypass_q), .sample_miss
  );

  pga_model u_pga (
    .pwr_en(pga_pwr_en), .gain(pga_gain), .vin(vin), .vout(pga_out)
  );

  sar_adc_model #(.CONV_CYCLES(CONV_CYCLES)) u_adc (
    .clk, .rst_n, .pwr_en(adc_pwr_en), .start(adc_start), .vin(pga_out),
    .code(adc_code), .done(adc_done)
  );

  result_reg u_rr (
    .clk, .rst_n, .wr_en(rr_we), .wr_sel(rr_sel), .wr_data(adc_code), .samples
  );

  phi_gen #(.NUM_MATRICES(NUM_MATRICES)) u_phi (
    .clk, .rst_n, .key, .key_load, .meas_start, .next(phi_next),
    .phi, .mat_idx, .key_valid, .key_pending, .key_updated
  );

  digital_processor u_dp (
    .samples, .phi, .x1_bypass(x1_bypass_q), .prod
  );

  accumulator_regs #(.M_MAX(M_MAX)) u_acr (
    .clk, .rst_n, .en(acr_en), .idx(acr_idx), .first(acr_first), .prod,
    .y, .sat(acr_sat)
  );

  y_serializer #(.M_MAX(M_MAX)) u_ser (
    .clk, .rst_n, .load(meas_done), .m(m_cur), .y, .tx_ready,
    .tx_data, .tx_valid, .tx_sof, .overrun(tx_overrun)
  );

endmodule
