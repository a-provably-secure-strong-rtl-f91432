// tb_dse_point -- one point (P1, P2) of the latency design space, run on the
// whole lattice_puf: used by tb_design_space.
//
// The point is taken through the same operation the latency table measures:
// one challenge that produces 128 response bits in total, i.e. 128/P1 b'
// beats, each answered by all P1 datapaths at once. The key is first
// rebuilt by the fuzzy extractor from noiseless cells (the helper data come
// from a random key through the [212,128] BCH encoder and the [3,1]
// repetition code). b' beats are offered back to back, so the b' handshake
// never stalls. Every response bit is compared with the golden model
// (tb_ref_pkg), and the last r_valid must appear after exactly
//   256/P2  (seed load)  +  (128/P1) x (1280/P2 + 2)  (per beat)
// clock edges, counting the edge that takes 'start' as the first.
// Ports: 'go' starts the run; 'done' rises at the end with the counts of
// checks and failures and the measured clock count.
module tb_dse_point
  import lpuf_pkg::*;
  import tb_ref_pkg::*;
  import tb_bch_pkg::*;
#(
  parameter int unsigned P1 = 1,
  parameter int unsigned P2 = 1
) (
  input  logic clk,
  input  logic go,
  output logic done,
  output int   checks,
  output int   failures,
  output int   clocks
);
  localparam int NB       = 128 / P1;          // beats for 128 response bits
  localparam int EXPECTED = 256 / P2 + NB * (1280 / P2 + 2);

  logic               rst_n = 0;
  logic               start, start_ready, b_valid, b_last, b_ready, r_valid, busy;
  logic [SEED_W-1:0]  seed_a [P1];
  zq_t                b_in [P1];
  logic [P1-1:0]      r_out;
  logic [CNT_W-1:0]   t_out;
  logic [RAW_W-1:0]   pok_raw, helper;
  logic               fe_start, fe_busy, key_valid, fe_fail;
  logic               enroll_req, fuse_blown, pok_out_valid, pok_out_bit, blow_fuse, pok_locked;

  lattice_puf #(.P1(P1), .P2(P2)) dut (.*);

  zq_t  bp   [NB][P1];     // b' of beat j, datapath k
  logic gold [NB][P1];     // golden response bits

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL [P1=%0d P2=%0d]: %s", P1, P2, what);
    end
  endtask

  initial begin
    key_t               key;
    logic [INNER_W-1:0] cw;
    lfsr_state_t        st;
    int                 nr, cyc;
    done = 0; checks = 0; failures = 0; clocks = 0;
    start = 0; b_valid = 0; b_last = 0; enroll_req = 0; fuse_blown = 0; fe_start = 0;
    foreach (b_in[k]) b_in[k] = '0;
    for (int i = 0; i < RAW_W; i += 32) pok_raw[i +: 32] = $urandom;
    key = rand_key();
    begin
      gen_t g;
      g = bch_generator();
      for (int b = 0; b < BCH_BLKS; b++) cw[BCH_N*b +: BCH_N] = bch_encode(key[BCH_K*b +: BCH_K], g);
    end
    for (int i = 0; i < INNER_W; i++) helper[3*i +: 3] = pok_raw[3*i +: 3] ^ {3{cw[i]}};
    // challenge built by the server: counter starts at 0 after reset
    for (int k = 0; k < int'(P1); k++) begin
      seed_a[k] = SEED_W'(rand_state());
      st = {seed_a[k], CNT_W'(k)};
      for (int j = 0; j < NB; j++) begin
        lfsr_state_t st_copy;
        int e;
        logic msg;
        st_copy = st;
        msg = 1'($urandom);
        e   = int'($urandom % 61) - 30;
        bp[j][k]   = 8'(int'(ref_dot(st_copy, key)) + e + (msg ? 128 : 0));
        gold[j][k] = ref_q(ref_y(st, key, bp[j][k]));
      end
    end
    wait (go);
    @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    fe_start = 1;
    @(negedge clk);
    fe_start = 0;
    while (!key_valid) @(negedge clk);
    check(!fe_fail && dut.key == key, "key rebuilt");
    check(start_ready, "ready once the key is valid");

    start = 1;
    @(negedge clk);                       // 'start' taken at the edge just passed
    start = 0;
    cyc = 1;                              // that edge is the first
    nr  = 0;
    fork
      begin : feed
        for (int j = 0; j < NB; j++) begin
          for (int k = 0; k < int'(P1); k++) b_in[k] = bp[j][k];
          b_valid = 1;
          b_last  = (j == NB - 1);
          while (!b_ready) @(negedge clk);
          @(negedge clk);                 // accepted at the posedge just passed
        end
        b_valid = 0;
        b_last  = 0;
      end
      begin : collect
        while (nr < NB) begin
          if (r_valid) begin
            for (int k = 0; k < int'(P1); k++)
              check(r_out[k] == gold[nr][k], $sformatf("beat %0d path %0d", nr, k));
            nr++;
          end
          if (nr < NB) begin
            @(negedge clk);
            cyc++;
          end
        end
      end
    join
    clocks = cyc;
    check(cyc == EXPECTED, $sformatf("128 bits took %0d clocks, expected %0d", cyc, EXPECTED));
    @(negedge clk);
    check(!busy && start_ready, "idle after the last beat");
    done = 1;
  end
endmodule
