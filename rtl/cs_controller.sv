// cs_controller: sequencer of the compressed-sensing measurement.
//
// Each period of the input sample clock (SAMPLE_DIV system clocks) runs one
// input sample x_i through the chain:
//   CONV  PGA and ADC are powered up; the sample is converted at gain x1
//         (only when x1_bypass is set), then x4, x5, x6 and x7. Each
//         conversion is one adc_start pulse followed by a wait for adc_done,
//         whose code is written into the result register of that gain.
//   DP    PGA and ADC are powered down again. For j = 0 .. M-1, one per clock,
//         the digital processor multiplies the current matrix element with
//         x_i and the accumulator row j takes the product (acr_first on the
//         first input of a measurement); phi_next advances the generator.
//   DONE  after the N-th input, meas_done pulses for one cycle: the ACR then
//         holds y and the serializer captures it.
//   SLEEP until the next sample tick.
// M (from m_sel: 64, 96, 128), N and x1_bypass are sampled when a measurement starts,
// which is also when meas_start pulses so the matrix generator can apply a
// pending key and pick the next shuffled matrix. A tick that arrives before
// the previous input is finished is lost and pulses sample_miss.
// The sequence of gains, the power gating of PGA and ADC and the M choices
// follow the paper. Where the DP pass sits against the next input's
// conversions the paper's timing diagram leaves open; here it always follows
// the conversions of its own input, which needs no second register bank. The
// sample divider, the N encoding and sample_miss are this design's choices.
module cs_controller
  import cs_pkg::*;
#(
  parameter int unsigned M_MAX      = 128,
  parameter int unsigned N_W        = 12,
  parameter int unsigned SAMPLE_DIV = 8000,
  parameter int unsigned M_SET0     = 64,
  parameter int unsigned M_SET1     = 96,
  parameter int unsigned M_SET2     = 128
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cs_en,
  input  logic [1:0]               m_sel,
  input  logic [N_W-1:0]           n,
  input  logic                     x1_bypass,
  // analog front end
  output logic                     pga_pwr_en,
  output logic                     adc_pwr_en,
  output gain_e                    pga_gain,
  output logic                     adc_start,
  input  logic                     adc_done,
  // result registers
  output logic                     rr_we,
  output gain_e                    rr_sel,
  // matrix generator, DP and ACR
  output logic                     meas_start,
  output logic                     phi_next,
  output logic                     acr_en,
  output logic [$clog2(M_MAX)-1:0] acr_idx,
  output logic                     acr_first,
  output logic                     meas_done,
  output logic [$clog2(M_MAX):0]   m_cur,
  output logic                     x1_bypass_cur,
  output logic                     sample_miss
);

  localparam int unsigned MW   = $clog2(M_MAX) + 1;
  localparam int unsigned DIVW = (SAMPLE_DIV > 1) ? $clog2(SAMPLE_DIV) : 1;

  typedef enum logic [2:0] {S_SLEEP, S_CONV_START, S_CONV_WAIT, S_DP, S_DONE} state_e;

  state_e          state_q;
  gain_e           g_q;
  logic [DIVW-1:0] div_q;
  logic            tick;
  logic [N_W-1:0]  col_q, n_q;
  logic [MW-1:0]   m_q;
  logic [MW-2:0]   row_q;
  logic            byp_q;
  logic            byp_now;

  function automatic logic [MW-1:0] m_of(logic [1:0] s);
    case (s)
      2'd0:    return MW'(M_SET0);
      2'd1:    return MW'(M_SET1);
      default: return MW'(M_SET2);
    endcase
  endfunction

  // sample clock
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) div_q <= '0;
    else if (!cs_en || div_q == DIVW'(SAMPLE_DIV - 1)) div_q <= '0;
    else div_q <= div_q + 1'b1;
  end
  assign tick = cs_en && (div_q == DIVW'(SAMPLE_DIV - 1));

  // x1 mode of the input about to start: a new measurement takes the port
  assign byp_now = (col_q == '0) ? x1_bypass : byp_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_SLEEP;
      g_q         <= G_X4;
      col_q       <= '0;
      n_q         <= N_W'(1);
      m_q         <= MW'(M_SET2);
      row_q       <= '0;
      byp_q       <= 1'b1;
      sample_miss <= 1'b0;
    end else begin
      sample_miss <= tick && (state_q != S_SLEEP);
      case (state_q)
        S_SLEEP: begin
          if (!cs_en) col_q <= '0;
          if (tick) begin
            if (col_q == '0) begin
              m_q <= m_of(m_sel);
              n_q <= (n == '0) ? N_W'(1) : n;
              byp_q <= x1_bypass;
            end
            g_q     <= byp_now ? G_X1 : G_X4;
            state_q <= S_CONV_START;
          end
        end
        S_CONV_START: state_q <= S_CONV_WAIT;
        S_CONV_WAIT: begin
          if (adc_done) begin
            if (g_q == G_X7) begin
              row_q   <= '0;
              state_q <= S_DP;
            end else begin
              g_q     <= gain_e'(g_q + 3'd1);
              state_q <= S_CONV_START;
            end
          end
        end
        S_DP: begin
          if (MW'(row_q) == m_q - 1) begin
            if (col_q == n_q - 1) begin
              col_q   <= '0;
              state_q <= S_DONE;
            end else begin
              col_q   <= col_q + 1'b1;
              state_q <= S_SLEEP;
            end
          end else begin
            row_q <= row_q + 1'b1;
          end
        end
        S_DONE:  state_q <= S_SLEEP;
        default: state_q <= S_SLEEP;
      endcase
    end
  end

  always_comb begin
    pga_pwr_en = (state_q == S_CONV_START) || (state_q == S_CONV_WAIT);
    adc_pwr_en = pga_pwr_en;
    pga_gain   = g_q;
    adc_start  = (state_q == S_CONV_START);
    rr_we      = (state_q == S_CONV_WAIT) && adc_done;
    rr_sel     = g_q;
    meas_start = (state_q == S_SLEEP) && tick && (col_q == '0) && cs_en;
    phi_next   = (state_q == S_DP);
    acr_en     = (state_q == S_DP);
    acr_idx    = row_q;
    acr_first  = (col_q == '0);
    meas_done  = (state_q == S_DONE);
    m_cur      = m_q;
    x1_bypass_cur = byp_q;
  end

  // A conversion starts only with PGA and ADC powered; accumulation runs
  // only with them gated off; meas_done is a single-cycle pulse.
  a_start_powered: assert property (@(posedge clk) disable iff (!rst_n)
    adc_start |-> (pga_pwr_en && adc_pwr_en));
  a_dp_gated: assert property (@(posedge clk) disable iff (!rst_n)
    acr_en |-> !(pga_pwr_en || adc_pwr_en));
  a_done_pulse: assert property (@(posedge clk) disable iff (!rst_n)
    meas_done |=> !meas_done);

endmodule
