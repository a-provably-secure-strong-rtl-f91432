// tb_fe_configs -- key reconstruction at each raw-BER operating point of the
// concatenated code: 1% (outer [236,128] t=14, no inner code, 2,360 cells),
// 5% ([212,128] t=11 with [3,1] repetition, 6,360 cells; the default),
// 10% ([220,128] t=12 with [5,1], 11,000 cells) and 15% ([244,128] t=15 with
// [7,1], 17,080 cells). Each point is a tb_fe_point instance, i.e. the
// repetition decoder and the BCH decoder built at that point's sizes, with
// random keys, helper data and cell errors up to each code's limit. The
// points run side by side on one clock; a watchdog ends the test if any of
// them stalls.
module tb_fe_configs;
  logic clk;
  logic go;
  initial begin clk = 0; go = 0; end
  always #5 clk = ~clk;

  localparam int NP = 4;
  logic done [NP];
  int   chk  [NP];
  int   fl   [NP];

  tb_fe_point #(.N(236), .K(128), .T(14), .REP(1)) p01 (.clk, .go, .done(done[0]), .checks(chk[0]), .failures(fl[0]));
  tb_fe_point #(.N(212), .K(128), .T(11), .REP(3)) p05 (.clk, .go, .done(done[1]), .checks(chk[1]), .failures(fl[1]));
  tb_fe_point #(.N(220), .K(128), .T(12), .REP(5)) p10 (.clk, .go, .done(done[2]), .checks(chk[2]), .failures(fl[2]));
  tb_fe_point #(.N(244), .K(128), .T(15), .REP(7)) p15 (.clk, .go, .done(done[3]), .checks(chk[3]), .failures(fl[3]));

  function automatic void report(input int extra);
    int checks, failures;
    checks = 0; failures = extra;
    for (int i = 0; i < NP; i++) begin checks += chk[i]; failures += fl[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endfunction

  initial begin
    repeat (60000) @(posedge clk);
    $display("FAIL: watchdog");
    report(1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    go <= 1;
    wait (done[0] && done[1] && done[2] && done[3]);
    for (int i = 0; i < NP; i++) $display("point %0d: checks=%0d failures=%0d", i, chk[i], fl[i]);
    report(0);
    $finish;
  end
endmodule
