// tb_bch_pkg -- software BCH encoder for the testbenches (the server's side
// of the fuzzy extractor). The generator polynomial g(x) of the
// narrow-sense, 11-error-correcting BCH(255,171) code is formed as the
// product of the distinct minimal polynomials of alpha^1 .. alpha^22 over
// GF(2^8) (field polynomial x^8+x^4+x^3+x^2+1); it has degree 84. A
// message m of 128 bits is encoded systematically into the shortened
// 212-bit block c = {m, (m(x) * x^84) mod g(x)}: bit i of the block is the
// coefficient of x^i.
package tb_bch_pkg;
  import lpuf_pkg::*;

  typedef logic [211:0] blk_t;
  typedef logic [84:0]  gen_t;   // coefficients of g(x), bit i = x^i

  function automatic gen_t bch_generator();
    gf_t g [85];
    gf_t t [85];
    bit  done [255];
    int  deg;
    foreach (g[i]) g[i] = '0;
    g[0] = 8'h01;
    deg = 0;
    foreach (done[i]) done[i] = 0;
    for (int j = 1; j <= 22; j++) begin
      int e;
      if (done[j]) continue;
      e = j;
      do begin
        // g(x) <- g(x) * (x + alpha^e)
        gf_t r;
        r = gf_alpha_pow(e);
        foreach (t[i]) t[i] = '0;
        for (int i = 0; i <= deg; i++) begin
          t[i + 1] ^= g[i];
          t[i]     ^= gf_mul(g[i], r);
        end
        g = t;
        deg++;
        done[e] = 1;
        e = (2 * e) % 255;
      end while (e != j);
    end
    begin
      gen_t out;
      for (int i = 0; i < 85; i++) begin
        if (g[i] > 1) $error("generator coefficient %0d not binary", i);
        out[i] = g[i][0];
      end
      if (deg != 84) $error("generator degree %0d", deg);
      return out;
    end
  endfunction

  function automatic blk_t bch_encode(input logic [127:0] m, input gen_t g);
    logic [83:0] rem;
    rem = '0;
    for (int k = 127; k >= 0; k--) begin
      logic fbk;
      fbk = m[k] ^ rem[83];
      rem = {rem[82:0], 1'b0} ^ (fbk ? g[83:0] : 84'd0);
    end
    return {m, rem};
  endfunction

endpackage
