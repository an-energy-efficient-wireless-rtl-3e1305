// tb_cs_ref_pkg: reference model of the compressed-sensing core, written
// independently of the RTL for the testbenches.
//
// It computes in plain integers what the core should produce: the ADC codes
// of an input at each gain, the multiplier-free products of Table-I style
// (select, halve, negate), saturating 16-bit sums, and the key-derived
// element stream with its per-measurement matrix shuffle. A receiver would
// use the same rules to rebuild the sampling matrices.
package tb_cs_ref_pkg;

  function automatic int unsigned xs(int unsigned s);
    int unsigned t = s;
    t ^= t << 13;
    t ^= t >> 17;
    t ^= t << 5;
    return t;
  endfunction

  // element value in -7..7 for a generator state
  function automatic int elem_of(int unsigned s);
    int c = 0;
    for (int b = 0; b < 14; b++) if (((s >> b) & 1) != 0) c++;
    return c - 7;
  endfunction

  // signed ADC result (code - 512) for input v (1/16 LSB) at gain g
  function automatic int adc(int v, int g);
    int q = v * g;
    q = (q >= 0) ? q / 16 : -((-q + 15) / 16);  // floor division
    if (q < -512) q = -512;
    if (q > 511) q = 511;
    return q;
  endfunction

  function automatic int floor_div(int a, int d);
    return (a >= 0) ? a / d : -((-a + d - 1) / d);
  endfunction

  // product k/8 * x (times 8) as the core forms it
  function automatic int product(int v, int k, bit bypass);
    int m, a;
    m = (k < 0) ? -k : k;
    case (m)
      0: a = 0;
      1: a = bypass ? adc(v, 1) : floor_div(adc(v, 4), 4);
      2: a = floor_div(adc(v, 4), 2);
      3: a = floor_div(adc(v, 6), 2);
      4: a = adc(v, 4);
      5: a = adc(v, 5);
      6: a = adc(v, 6);
      default: a = adc(v, 7);
    endcase
    return (k < 0) ? -a : a;
  endfunction

  function automatic int sat16(int a);
    if (a > 32767) return 32767;
    if (a < -32768) return -32768;
    return a;
  endfunction

  class phi_ref;
    bit [255:0]  key_cur, key_new;
    bit          pending;
    int unsigned shuf = 1;
    int unsigned st = 1;
    int          idx;

    function void load_key(bit [255:0] k);
      key_new = k;
      pending = 1;
    endfunction

    // start of a measurement: returns the matrix index chosen
    function int start();
      int unsigned f, w;
      if (pending) begin
        key_cur = key_new;
        pending = 0;
        f = 0;
        for (int i = 0; i < 8; i++) f ^= key_cur[i*32 +: 32];
        shuf = (f == 0) ? 1 : f;
      end
      shuf = xs(shuf);
      idx = shuf % 8;
      w = key_cur[idx*32 +: 32];
      st = xs((w == 0) ? 1 : w);
      return idx;
    endfunction

    // current element, then advance
    function int next();
      int e = elem_of(st);
      st = xs(st);
      return e;
    endfunction
  endclass

endpackage
