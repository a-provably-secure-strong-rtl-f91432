// tb_ref_pkg -- golden software model of the lattice PUF used by the
// testbenches. It is written from the algorithm, not from the RTL: a
// bit-serial 256-bit LFSR (output X255, feedback X255^X253^X250^X245 into
// X0), bytes cut from the output stream earliest bit first as the most
// significant bit, key bytes s_i = W[8i+7:8i], y = b - sum a_i*s_i mod 256
// and r = 1 exactly when 64 < y <= 192.
package tb_ref_pkg;

  typedef logic [255:0]  lfsr_state_t;
  typedef logic [1279:0] key_t;

  // One serial step: returns the emitted bit and advances the state.
  function automatic logic ref_step(ref lfsr_state_t x);
    logic o, f;
    o = x[255];
    f = x[255] ^ x[253] ^ x[250] ^ x[245];
    x = {x[254:0], f};
    return o;
  endfunction

  function automatic logic [7:0] ref_byte(ref lfsr_state_t x);
    logic [7:0] v;
    for (int j = 0; j < 8; j++) v = {v[6:0], ref_step(x)};
    return v;
  endfunction

  // y = b - <a,s> mod 256 for the next 160-byte vector of the stream.
  function automatic logic [7:0] ref_y(ref lfsr_state_t x, input key_t key,
                                       input logic [7:0] b);
    logic [7:0] y;
    y = b;
    for (int i = 0; i < 160; i++) y = 8'(y - 8'(ref_byte(x) * key[8*i +: 8]));
    return y;
  endfunction

  // Inner product only, for building challenges: <a,s> mod 256.
  function automatic logic [7:0] ref_dot(ref lfsr_state_t x, input key_t key);
    return 8'(8'd0 - ref_y(x, key, 8'd0));
  endfunction

  function automatic logic ref_q(input logic [7:0] y);
    return (y >= 8'd65) && (y <= 8'd192);
  endfunction

  function automatic key_t rand_key();
    key_t k;
    for (int i = 0; i < 40; i++) k[32*i +: 32] = $urandom();
    return k;
  endfunction

  function automatic lfsr_state_t rand_state();
    lfsr_state_t s;
    for (int i = 0; i < 8; i++) s[32*i +: 32] = $urandom();
    return s;
  endfunction

endpackage
