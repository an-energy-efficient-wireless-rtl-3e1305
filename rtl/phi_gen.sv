// phi_gen: sampling-matrix generator (the "Phi_S Gen." block).
//
// The sampling matrix is the cipher key of the compressed-sensing encryption,
// so it is derived from the shared secret K_S and never stored: its elements
// are regenerated one per clock in the order the datapath uses them, column by
// column (the M elements Phi_i,1..Phi_i,M that multiply input sample x_i),
// for all N columns of a measurement.
//
// Matrix set. The 256-bit key is cut into NUM_MATRICES 32-bit words; word k
// seeds matrix k. Elements come from a 32-bit xorshift generator stepped once
// per element; 14 bits of its state go to phi_decoder.
//
// Shuffle. A second xorshift generator, seeded with the XOR of all key words,
// steps once per measurement; its low bits pick which matrix of the set is
// used, so consecutive measurements use a pseudo-random sequence of matrices.
//
// Key update. key_load stores a new key as pending; it takes effect at the
// next meas_start, so a measurement is never computed with two keys.
//
// Timing: meas_start (one cycle) reseeds; from the next cycle phi shows the
// first element, and each cycle with next high moves to the following one.
// The paper gives the block's purpose (derive a set of matrices from K_S,
// shuffle them locally, update the key in step with the receiver) and names an
// FSM and a decoder inside it; the generators, the seeding and the shuffle
// rule are this design's choices, which a receiver must reproduce exactly.
module phi_gen
  import cs_pkg::*;
#(
  parameter int unsigned NUM_MATRICES = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [KEY_BITS-1:0] key,
  input  logic                key_load,
  input  logic                meas_start,
  input  logic                next,
  output phi_t                phi,
  output logic [$clog2(NUM_MATRICES)-1:0] mat_idx,
  output logic                key_valid,
  output logic                key_pending,
  output logic                key_updated
);

  localparam int unsigned WORDS = KEY_BITS / 32;
  localparam int unsigned IDX_W = $clog2(NUM_MATRICES);

  logic [KEY_BITS-1:0] key_q, key_new_q;
  logic [31:0]         elem_q;     // element generator state
  logic [31:0]         shuf_q;     // shuffle generator state
  logic [31:0]         shuf_next;
  logic [31:0]         seed_word;
  logic [31:0]         fold;
  logic [KEY_BITS-1:0] key_use;    // key in force for the coming measurement
  logic [IDX_W-1:0]    idx_next;

  function automatic logic [31:0] nz(logic [31:0] s);
    return (s == '0) ? 32'd1 : s;
  endfunction

  always_comb begin
    key_use = key_pending ? key_new_q : key_q;
    fold    = '0;
    for (int w = 0; w < WORDS; w++) fold ^= key_use[w*32 +: 32];
    // On a key change the shuffle restarts from the new key's fold.
    shuf_next = xorshift32(key_pending ? nz(fold) : shuf_q);
    idx_next  = IDX_W'(shuf_next % NUM_MATRICES);
    seed_word = key_use[(int'(idx_next) % WORDS)*32 +: 32];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key_q       <= '0;
      key_new_q   <= '0;
      key_pending <= 1'b0;
      key_valid   <= 1'b0;
      key_updated <= 1'b0;
      elem_q      <= 32'd1;
      shuf_q      <= 32'd1;
      mat_idx     <= '0;
    end else begin
      key_updated <= 1'b0;
      if (meas_start) begin
        if (key_pending) begin
          key_q       <= key_new_q;
          key_valid   <= 1'b1;
          key_updated <= 1'b1;
        end
        shuf_q  <= shuf_next;
        mat_idx <= idx_next;
        elem_q  <= xorshift32(nz(seed_word));
      end else if (next) begin
        elem_q <= xorshift32(elem_q);
      end
      // A load in the same cycle as meas_start waits for the next measurement.
      if (key_load) begin
        key_new_q   <= key;
        key_pending <= 1'b1;
      end else if (meas_start) begin
        key_pending <= 1'b0;
      end
    end
  end

  phi_decoder u_dec (
    .rnd(elem_q[13:0]),
    .phi(phi)
  );

endmodule
