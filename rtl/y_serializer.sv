// y_serializer: sends the finished measurement vector off chip, one bit at a
// time.
//
// On load (one cycle, at the end of a measurement) the M sums are copied into
// a frame buffer, so the accumulators are free for the next measurement while
// the frame goes out. The frame is y_1 .. y_M, each 16 bits, most significant
// bit first. A bit is offered on tx_data with tx_valid high and leaves when
// tx_ready is high in the same cycle; tx_sof marks the first bit of a frame.
// A load that arrives while a frame is still being sent is dropped and
// reported by a one-cycle overrun pulse. The paper says only that the 16-bit
// measurements are sent off chip serially; buffer, bit order, handshake and
// overrun rule are this design's choices.
module y_serializer
  import cs_pkg::*;
#(
  parameter int unsigned M_MAX = 128
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        load,
  input  logic [$clog2(M_MAX):0]      m,
  input  logic signed [ACC_BITS-1:0]  y [M_MAX],
  input  logic                        tx_ready,
  output logic                        tx_data,
  output logic                        tx_valid,
  output logic                        tx_sof,
  output logic                        overrun
);

  localparam int unsigned BIT_W = $clog2(ACC_BITS);
  localparam int unsigned IDX_W = $clog2(M_MAX);

  logic [ACC_BITS-1:0]    buf_q [M_MAX];
  logic [IDX_W-1:0]       word_q;
  logic [BIT_W-1:0]       bit_q;
  logic [$clog2(M_MAX):0] m_q;
  logic                   first_q;
  logic                   busy;

  assign tx_valid = busy;
  assign tx_data  = buf_q[word_q][BIT_W'(ACC_BITS - 1) - bit_q];
  assign tx_sof   = busy & first_q;

  // Valid/ready rule: an offered bit stays, unchanged, until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (tx_valid && !tx_ready) |=> (tx_valid && $stable(tx_data) && $stable(tx_sof)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < M_MAX; j++) buf_q[j] <= '0;
      word_q  <= '0;
      bit_q   <= '0;
      m_q     <= '0;
      busy    <= 1'b0;
      first_q <= 1'b0;
      overrun <= 1'b0;
    end else begin
      overrun <= load & busy;
      if (load && !busy) begin
        for (int j = 0; j < M_MAX; j++) buf_q[j] <= y[j];
        word_q  <= '0;
        bit_q   <= '0;
        m_q     <= m;
        busy    <= (m != 0);
        first_q <= 1'b1;
      end else if (busy && tx_ready) begin
        first_q <= 1'b0;
        if (bit_q == BIT_W'(ACC_BITS - 1)) begin
          bit_q <= '0;
          if (($clog2(M_MAX)+1)'(word_q) == m_q - 1) begin
            busy <= 1'b0;
          end else begin
            word_q <= word_q + 1'b1;
          end
        end else begin
          bit_q <= bit_q + 1'b1;
        end
      end
    end
  end

endmodule
