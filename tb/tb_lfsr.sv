// tb_lfsr -- checks the LFSR in its bit-serial form (P2 = 1) and unrolled by
// 8 and by 128 against the serial golden model: after a seed load of 256/P2
// clocks the state must equal the seed word, and every later clock must
// emit the next P2 bits of the serial stream (dout[P2-1] first). Also checks
// that the state holds while neither load nor step is high.
module tb_lfsr;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  lfsr_state_t seed;
  logic        ld1, st1, ld8, st8, ld128, st128;
  logic [0:0]   lb1,  o1;
  logic [7:0]   lb8,  o8;
  logic [127:0] lb128, o128;

  lfsr #(.P2(1))   u1   (.clk, .rst_n, .load(ld1),   .load_bits(lb1),   .step(st1),   .dout(o1));
  lfsr #(.P2(8))   u8   (.clk, .rst_n, .load(ld8),   .load_bits(lb8),   .step(st8),   .dout(o8));
  lfsr #(.P2(128)) u128 (.clk, .rst_n, .load(ld128), .load_bits(lb128), .step(st128), .dout(o128));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    lfsr_state_t m;
    {ld1, st1, ld8, st8, ld128, st128} = '0;
    lb1 = '0; lb8 = '0; lb128 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      seed = rand_state();
      // load all three, each at its own rate
      for (int c = 0; c < 256; c++) begin
        @(negedge clk);
        ld1 = 1; lb1 = seed[255 - c];
        ld8 = (c < 32);  lb8 = seed[255 - 8*(c % 32) -: 8];
        ld128 = (c < 2); lb128 = seed[255 - 128*(c % 2) -: 128];
      end
      @(negedge clk);
      {ld1, ld8, ld128} = '0;
      check(u1.x == seed && u8.x == seed && u128.x == seed, "state after load");
      // idle clocks: no change
      repeat (3) @(negedge clk);
      check(u1.x == seed && u8.x == seed, "state held while idle");
      // serial P2=1: 600 steps
      m = seed;
      for (int c = 0; c < 600; c++) begin
        check(o1[0] == ref_step(m), $sformatf("serial bit %0d", c));
        st1 = 1; @(negedge clk); st1 = 0;
      end
      // P2=8: 100 clocks
      m = seed;
      for (int c = 0; c < 100; c++) begin
        logic [7:0] e;
        for (int j = 7; j >= 0; j--) e[j] = ref_step(m);
        check(o8 == e, $sformatf("x8 clock %0d: %h vs %h", c, o8, e));
        st8 = 1; @(negedge clk); st8 = 0;
      end
      // P2=128: 20 clocks
      m = seed;
      for (int c = 0; c < 20; c++) begin
        logic [127:0] e;
        for (int j = 127; j >= 0; j--) e[j] = ref_step(m);
        check(o128 == e, $sformatf("x128 clock %0d", c));
        st128 = 1; @(negedge clk); st128 = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
