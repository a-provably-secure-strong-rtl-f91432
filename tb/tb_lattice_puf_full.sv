// tb_lattice_puf_full -- one complete authentication with the lattice PUF at
// its default configuration (resource-efficient: P1 = 1, bit-serial LFSR,
// one MAC unit).
//
// Enrollment: the raw cells are read once through the one-time interface,
// the server takes them as the key source and builds repetition-code helper
// data; it draws m = 256 LWE error terms e_i from a rounded Gaussian of
// standard deviation alpha*q/sqrt(2*pi) = 2.25 (alpha = 2.2%, q = 256).
// The key s is the message of the fuzzy extractor's codeword: it is
// BCH-encoded in 10 blocks, repeated 3 times and XORed onto the enrolled
// cells to give the helper data.
// CRP generation: a 128-bit plaintext string r, a seed, and a binary matrix
// X (256 x 128); b'_j = <a'_j, s> + <x_j, e> + 128*r_j, with a'_j from the
// LFSR seeded with seed || t. Authentication: every cell is flipped with
// probability 5% (the design's raw bit error rate), the on-chip fuzzy
// extractor must rebuild s exactly, and s then drives 128 response bits. Every bit must
// equal the golden decryption, each must arrive 1280 + 1 clocks after its
// b' beat, the seed load must take 256 clocks, and the device is accepted
// when HD(r~, r) < 13 (about 10% of the string; the threshold is this
// test's choice).
module tb_lattice_puf_full;
  import tb_ref_pkg::*;
  import lpuf_pkg::*;
  import tb_bch_pkg::*;

  localparam int L  = 128;     // response bits per authentication
  localparam int M  = 256;     // LWE samples in the server's public key
  localparam int TH = 13;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               start, start_ready, b_valid, b_last, b_ready, r_valid, busy;
  logic [SEED_W-1:0]  seed_a [1];
  zq_t                b_in [1];
  logic [0:0]         r_out;
  logic [CNT_W-1:0]   t_out;
  logic [RAW_W-1:0]   pok_raw, helper;
  logic [KEY_W-1:0]   key;          // golden key (server side)
  logic               fe_start, fe_busy, key_valid, fe_fail;
  logic               enroll_req, fuse_blown, pok_out_valid, pok_out_bit, blow_fuse, pok_locked;

  lattice_puf dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // approximately standard normal: sum of 12 uniforms minus 6
  function automatic real gauss();
    real z;
    z = -6.0;
    for (int i = 0; i < 12; i++) z += real'($urandom % 1000000) / 1000000.0;
    return z;
  endfunction

  initial begin
    logic [RAW_W-1:0]   enrolled;
    logic [INNER_W-1:0] cw;
    int                 e [M];
    logic               r_plain [L], r_dev [L];
    logic [7:0]         ey [L];
    lfsr_state_t        st;
    int                 hd, n_dec_err, c0, nflip, nouter;

    start = 0; b_valid = 0; b_last = 0; enroll_req = 0; fuse_blown = 0; fe_start = 0;
    seed_a[0] = '0; b_in[0] = '0;
    for (int i = 0; i < RAW_W; i++) pok_raw[i] = 1'($urandom);
    helper = '0;
    key = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // enrollment readout
    @(negedge clk);
    enroll_req = 1;
    @(negedge clk);
    enroll_req = 0;
    for (int n = 0; n < RAW_W; n++) begin
      check(pok_out_valid, "readout valid");
      enrolled[n] = pok_out_bit;
      @(negedge clk);
    end
    check(!pok_out_valid && pok_locked && enrolled == pok_raw, "readout complete and locked");

    // server: key, helper data, error vector
    key = rand_key();
    begin
      gen_t g;
      g = bch_generator();
      for (int b = 0; b < BCH_BLKS; b++) cw[BCH_N*b +: BCH_N] = bch_encode(key[BCH_K*b +: BCH_K], g);
    end
    for (int i = 0; i < INNER_W; i++) helper[3*i +: 3] = enrolled[3*i +: 3] ^ {3{cw[i]}};
    foreach (e[i]) e[i] = int'($floor(2.25 * gauss() + 0.5));

    // server: CRP generation for counter value 0
    for (int k = 0; k < SEED_W / 32; k++) seed_a[0][32*k +: 32] = $urandom();
    st = {seed_a[0], CNT_W'(0)};

    // device: noisy power-up (every cell flips with probability 5%), then
    // key reconstruction
    nflip = 0;
    for (int i = 0; i < RAW_W; i++)
      if ($urandom % 100 < 5) begin pok_raw[i] = ~pok_raw[i]; nflip++; end
    @(negedge clk);
    nouter = 0;
    for (int i = 0; i < INNER_W; i++) if (dut.inner_code[i] != cw[i]) nouter++;
    fe_start = 1;
    @(negedge clk);
    fe_start = 0;
    c0 = 1;
    while (!key_valid) begin c0++; @(negedge clk); end
    check(dut.key == key && !fe_fail, "key rebuilt from the noisy cells");
    $display("key reconstruction: %0d of %0d cells flipped, %0d bit errors left for BCH, %0d clocks",
             nflip, RAW_W, nouter, c0);

    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    check(t_out == 0, "counter value 0 for the first challenge");
    c0 = 0;
    while (!b_ready) begin c0++; @(negedge clk); end
    check(c0 == 256, $sformatf("seed load took %0d clocks", c0));

    n_dec_err = 0;
    for (int j = 0; j < L; j++) begin
      lfsr_state_t m2;
      int          noise, lat;
      m2 = st;
      r_plain[j] = 1'($urandom);
      noise = 0;
      for (int i = 0; i < M; i++) if ($urandom % 2) noise += e[i];
      b_in[0] = 8'(int'(ref_dot(m2, key)) + noise + (r_plain[j] ? 128 : 0));
      ey[j] = ref_y(st, key, b_in[0]);
      b_valid = 1; b_last = (j == L - 1);
      @(negedge clk);
      b_valid = 0; b_last = 0;
      lat = 1;
      while (!r_valid) begin lat++; @(negedge clk); end
      check(lat == 1281, $sformatf("bit %0d after %0d clocks", j, lat));
      r_dev[j] = r_out[0];
      check(r_dev[j] == ref_q(ey[j]), $sformatf("bit %0d golden", j));
      if (r_dev[j] != r_plain[j]) n_dec_err++;
      @(negedge clk);
    end
    check(start_ready, "idle after the last bit");
    hd = n_dec_err;
    check(hd < TH, $sformatf("HD(r~, r) = %0d", hd));
    $display("authentication: HD(r~, r) = %0d of %0d, accepted = %0d", hd, L, hd < TH);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
