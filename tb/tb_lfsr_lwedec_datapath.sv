// tb_lfsr_lwedec_datapath -- runs the LFSR-LWEDec datapath with P2 = 1, 4, 8,
// 16 and 128 side by side, each sequenced the way the controller does it:
// 256/P2 load clocks, an init with b', 1280/P2 step clocks. For every
// response bit y and r must equal the golden model's b' - <a',s> and Q(y),
// where a' is the next 160 bytes of the serial LFSR stream started from the
// seed word. Three response bits per seed check that consecutive vectors
// continue the same stream; the known-plaintext b' = <a',s> + e + 128*m with
// small e must decrypt to m.
module tb_lfsr_lwedec_datapath;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, done = 0;

  localparam int NCFG = 5;
  localparam int P2S [NCFG] = '{1, 4, 8, 16, 128};

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (done == NCFG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int unsigned P2 = P2S[g];
    localparam int LW = $clog2(256 / P2 + 1);
    localparam int RW = $clog2(1280 / P2 + 1);
    logic [255:0]    seed_word;
    logic            load, init, step;
    logic [LW-1:0]   load_idx;
    logic [RW-1:0]   run_idx;
    logic [7:0]      b, y;
    logic [1279:0]   key;
    logic            r;

    lfsr_lwedec_datapath #(.P2(P2)) dut (
      .clk, .rst_n, .seed_word, .load, .load_idx, .init, .b, .step,
      .run_idx, .key, .y, .r);

    initial begin
      lfsr_state_t m;
      logic [7:0]  dot, ey;
      logic        msg;
      int          e;
      load = 0; init = 0; step = 0; load_idx = '0; run_idx = '0; b = 0;
      seed_word = '0; key = '0;
      @(posedge rst_n);
      for (int trial = 0; trial < 3; trial++) begin
        seed_word = rand_state();
        key = rand_key();
        m = seed_word;
        @(negedge clk);
        for (int c = 0; c < 256 / P2; c++) begin
          load = 1; load_idx = LW'(c);
          @(negedge clk);
        end
        load = 0;
        for (int bit_i = 0; bit_i < 3; bit_i++) begin
          lfsr_state_t m2;
          m2 = m;
          dot = ref_dot(m2, key);
          msg = 1'($urandom);
          e = int'($urandom % 101) - 50;
          b = 8'(int'(dot) + e + (msg ? 128 : 0));
          ey = ref_y(m, key, b);
          init = 1;
          @(negedge clk);
          init = 0;
          for (int c = 0; c < 1280 / P2; c++) begin
            step = 1; run_idx = RW'(c);
            @(negedge clk);
          end
          step = 0;
          checks++;
          if (y != ey || r != ref_q(ey)) begin
            failures++;
            $display("FAIL P2=%0d trial %0d bit %0d: y=%0d expected %0d", P2, trial, bit_i, y, ey);
          end
          checks++;
          if (r != msg) begin
            failures++;
            $display("FAIL P2=%0d: plaintext %0b decrypted as %0b (e=%0d)", P2, msg, r, e);
          end
        end
      end
      done++;
    end
  end
endmodule
