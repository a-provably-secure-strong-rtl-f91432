// tb_lattice_puf -- end-to-end test of the lattice PUF in its most
// latency-optimized configuration: P1 = 2 parallel datapaths, each with an
// LFSR unrolled to P2 = 128 bits per clock and 16 MAC units, so that a
// response bit per datapath takes 10 + 1 clocks and a seed loads in 2.
//
// Server side (in software): pick a key s, a plaintext string m, seeds and
// noise e; build b'_j = <a'_j, s> + e_j + 128*m_j where a'_j is the j-th
// 160-byte vector of the LFSR stream started from seed_a'[k] || (t + k).
// Device side: the design answers each beat with r_out, which must equal the
// golden decryption Q(b' - <a',s>) bit for bit, and must equal m whenever
// |e| < 64. Noise beyond the threshold is injected on purpose so that a
// decryption error (r differs from m, as the golden model predicts) is
// seen. Also checked: t_out is the counter value used (advancing by P1 per
// challenge), seed loading and response latency in clocks, b' stalls, the
// end of a challenge on b_last, key reconstruction (repetition code
// plus BCH, with errors that reach the BCH stage), the hold-off of
// challenges until the key is valid, and the one-time POK readout. Every mechanism is counted, and one that never
// happened counts as a failure.
module tb_lattice_puf;
  import tb_ref_pkg::*;
  import lpuf_pkg::*;
  import tb_bch_pkg::*;

  localparam int unsigned P1 = 2;
  localparam int unsigned P2 = 128;
  localparam int NCHAL = 3;      // challenges
  localparam int NBITS = 6;      // response beats per challenge
  localparam int LOAD_CLK = 256 / P2;
  localparam int RUN_CLK  = 1280 / P2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               start, start_ready, b_valid, b_last, b_ready, r_valid, busy;
  logic [SEED_W-1:0]  seed_a [P1];
  zq_t                b_in [P1];
  logic [P1-1:0]      r_out;
  logic [CNT_W-1:0]   t_out;
  logic [RAW_W-1:0]   pok_raw, helper;
  logic [KEY_W-1:0]   key;          // golden key (server side)
  logic               fe_start, fe_busy, key_valid, fe_fail;
  logic               enroll_req, fuse_blown, pok_out_valid, pok_out_bit, blow_fuse, pok_locked;

  lattice_puf #(.P1(P1), .P2(P2)) dut (.*);

  // mechanism counters
  int n_seed_load = 0, n_counter = 0, n_stall = 0, n_shared_seed = 0, n_last = 0;
  int n_parallel = 0, n_dec_err = 0, n_fe_fix = 0, n_readout = 0, n_refused = 0;
  int n_latency_ok = 0, n_bch_fix = 0, n_key_gate = 0;

  initial begin
    repeat (300000) @(posedge clk);
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

  initial begin
    lfsr_state_t st [P1];
    logic [INNER_W-1:0] cw;
    logic [CNT_W-1:0] t_exp;
    start = 0; b_valid = 0; b_last = 0; enroll_req = 0; fuse_blown = 0; fe_start = 0;
    foreach (seed_a[k]) seed_a[k] = '0;
    foreach (b_in[k]) b_in[k] = '0;
    for (int i = 0; i < RAW_W; i++) pok_raw[i] = 1'($urandom);
    key = rand_key();
    begin
      gen_t g;
      g = bch_generator();
      for (int b = 0; b < BCH_BLKS; b++) cw[BCH_N*b +: BCH_N] = bch_encode(key[BCH_K*b +: BCH_K], g);
    end
    for (int i = 0; i < INNER_W; i++) helper[3*i +: 3] = pok_raw[3*i +: 3] ^ {3{cw[i]}};
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- enrollment: one-time readout of the raw cells ----
    @(negedge clk);
    enroll_req = 1;
    @(negedge clk);
    enroll_req = 0;
    begin
      int n;
      n = 0;
      while (pok_out_valid) begin
        if (pok_out_bit != pok_raw[n]) begin check(0, "readout bit"); end
        n++;
        @(negedge clk);
      end
      check(n == RAW_W && pok_locked, "full readout then locked");
      if (n == RAW_W) n_readout++;
    end
    enroll_req = 1;
    repeat (2) @(negedge clk);
    enroll_req = 0;
    @(negedge clk);
    check(!pok_out_valid, "second readout refused");
    if (!pok_out_valid && pok_locked) n_refused++;

    // ---- key reconstruction: one flipped cell in every other group (the
    // repetition code fixes these) and two flipped cells in 5 groups of
    // every block (these reach the BCH decoder as bit errors) ----
    begin
      logic [RAW_W-1:0]   noisy;
      logic [INNER_W-1:0] expect_inner;
      noisy = pok_raw;
      expect_inner = cw;
      for (int i = 0; i < INNER_W; i += 2) noisy[3*i + (i % 3)] = ~noisy[3*i + (i % 3)];
      for (int b = 0; b < BCH_BLKS; b++)
        for (int e = 0; e < 5; e++) begin
          int i;
          i = BCH_N * b + 40 * e + 7;
          noisy[3*i +: 3] = pok_raw[3*i +: 3];
          noisy[3*i]      = ~noisy[3*i];
          noisy[3*i + 1]  = ~noisy[3*i + 1];
          expect_inner[i] = ~expect_inner[i];
        end
      pok_raw = noisy;
      @(negedge clk);
      check(dut.inner_code == expect_inner, "inner decoder output");
      if (dut.inner_code != cw && (dut.inner_code ^ cw) == (expect_inner ^ cw)) n_fe_fix++;
      // a challenge offered before the key exists is not taken
      start = 1;
      check(!start_ready, "no challenge before the key is valid");
      @(negedge clk);
      start = 0;
      check(!busy, "start ignored without a key");
      if (!busy) n_key_gate++;
      fe_start = 1;
      @(negedge clk);
      fe_start = 0;
      while (!key_valid) @(negedge clk);
      check(dut.key == key && !fe_fail, "BCH decoder rebuilt the key");
      if (dut.key == key && !fe_fail) n_bch_fix++;
    end

    // ---- challenges ----
    t_exp = '0;
    for (int ch = 0; ch < NCHAL; ch++) begin
      int c0;
      @(negedge clk);
      check(start_ready, "ready for a challenge");
      for (int k = 0; k < P1; k++) seed_a[k] = SEED_W'(rand_state());
      if (ch == 2) seed_a = '{default: seed_a[0]};   // same seed on both paths
      start = 1;
      @(negedge clk);
      start = 0;
      c0 = 0;
      check(t_out == t_exp, $sformatf("t_out=%0d expected %0d", t_out, t_exp));
      if (ch > 0 && t_out == t_exp) n_counter++;
      for (int k = 0; k < P1; k++) st[k] = {seed_a[k], CNT_W'(t_exp + CNT_W'(k))};
      while (!b_ready) begin c0++; @(negedge clk); end
      check(c0 == LOAD_CLK, $sformatf("seed load took %0d clocks", c0));
      n_seed_load++;
      for (int j = 0; j < NBITS; j++) begin
        logic [7:0] ey [P1];
        logic       msg [P1];
        int         e [P1], lat;
        for (int k = 0; k < P1; k++) begin
          lfsr_state_t m2;
          m2 = st[k];
          msg[k] = 1'($urandom);
          e[k] = (j == 3 && k == 0) ? 100 : int'($urandom % 81) - 40;
          b_in[k] = 8'(int'(ref_dot(m2, key)) + e[k] + (msg[k] ? 128 : 0));
          ey[k] = ref_y(st[k], key, b_in[k]);
        end
        if (j % 2 == 1) begin
          repeat (3) @(negedge clk);
          n_stall++;
        end
        b_valid = 1; b_last = (j == NBITS - 1);
        @(negedge clk);
        b_valid = 0; b_last = 0;
        lat = 1;
        while (!r_valid) begin lat++; @(negedge clk); end
        check(lat == RUN_CLK + 1, $sformatf("response after %0d clocks", lat));
        if (lat == RUN_CLK + 1) n_latency_ok++;
        for (int k = 0; k < P1; k++) begin
          check(r_out[k] == ref_q(ey[k]), $sformatf("ch %0d bit %0d path %0d: golden", ch, j, k));
          if (e[k] > -64 && e[k] < 64)
            check(r_out[k] == msg[k], $sformatf("ch %0d bit %0d path %0d: plaintext", ch, j, k));
          else if (r_out[k] != msg[k] && r_out[k] == ref_q(ey[k])) n_dec_err++;
        end
        if (j > 0) n_shared_seed++;
        if (P1 > 1) n_parallel++;
        @(negedge clk);
      end
      check(start_ready && !busy, "idle after b_last");
      n_last++;
      t_exp = t_exp + CNT_W'(P1);
    end

    check(n_seed_load > 0,  "mechanism: seed load");
    check(n_counter > 0,    "mechanism: counter advance");
    check(n_stall > 0,      "mechanism: b' stall");
    check(n_shared_seed > 0,"mechanism: multi-bit response from one seed");
    check(n_last > 0,       "mechanism: end of challenge");
    check(n_parallel > 0,   "mechanism: parallel datapaths");
    check(n_dec_err > 0,    "mechanism: decryption error beyond the threshold");
    check(n_fe_fix > 0,     "mechanism: repetition-code correction");
    check(n_readout > 0,    "mechanism: one-time readout");
    check(n_refused > 0,    "mechanism: readout refused after use");
    check(n_latency_ok > 0, "mechanism: response latency");
    check(n_bch_fix > 0,    "mechanism: BCH correction of the key");
    check(n_key_gate > 0,   "mechanism: challenge held off until the key is valid");
    $display("mechanisms: seed_load=%0d counter=%0d stall=%0d shared_seed=%0d last=%0d parallel=%0d dec_err=%0d fe_fix=%0d readout=%0d refused=%0d latency_ok=%0d bch_fix=%0d key_gate=%0d",
             n_seed_load, n_counter, n_stall, n_shared_seed, n_last, n_parallel,
             n_dec_err, n_fe_fix, n_readout, n_refused, n_latency_ok, n_bch_fix, n_key_gate);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
