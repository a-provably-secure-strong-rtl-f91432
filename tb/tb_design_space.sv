// tb_design_space -- the latency design space of the lattice PUF, sampled.
// Each tb_dse_point instance builds the complete design at one (P1, P2)
// point: P1 parallel LFSR-LWEDec datapaths, each with an LFSR producing P2
// bits per clock and max(1, P2/8) MAC units. It rebuilds the key, produces
// 128 response bits (128/P1 beats of b'), checks each bit against the golden
// model and checks the clock count against 256/P2 + (128/P1)(1280/P2 + 2).
// The points cover both parallelisation directions and their mix:
// P2 in {4, 8, 32, 128} with P1 = 1, P1 in {2, 4, 8} at small and medium
// P2, and the two equal-latency designs (2, 128) and (8, 32). (1, 1) is run by
// tb_lattice_puf_full. All points run side by side on one clock; the
// measured clock counts are printed, and a watchdog ends a stuck run.
module tb_design_space;
  logic clk;
  logic go;
  initial begin clk = 0; go = 0; end
  always #5 clk = ~clk;

  localparam int NP = 9;
  localparam int P1S [NP] = '{1, 1, 1, 1, 2, 4, 8, 2, 8};
  localparam int P2S [NP] = '{4, 8, 32, 128, 1, 16, 4, 128, 32};

  logic [NP-1:0] done;
  int   chk  [NP];
  int   fl   [NP];
  int   clks [NP];

  for (genvar i = 0; i < NP; i++) begin : g_pt
    tb_dse_point #(.P1(P1S[i]), .P2(P2S[i])) pt (
      .clk, .go, .done(done[i]), .checks(chk[i]), .failures(fl[i]), .clocks(clks[i]));
  end

  function automatic void report(input int extra);
    int checks, failures;
    checks = 0; failures = extra;
    for (int i = 0; i < NP; i++) begin checks += chk[i]; failures += fl[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL: watchdog");
    for (int i = 0; i < NP; i++)
      $display("P1=%0d P2=%0d: done=%0d checks=%0d failures=%0d", P1S[i], P2S[i], done[i], chk[i], fl[i]);
    report(1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    go <= 1;
    wait (&done);
    for (int i = 0; i < NP; i++)
      $display("P1=%0d P2=%0d: 128 bits in %0d clocks (%0.1f us at 33.3 MHz), checks=%0d failures=%0d",
               P1S[i], P2S[i], clks[i], real'(clks[i]) / 33.3, chk[i], fl[i]);
    report(0);
    $finish;
  end
endmodule
