// tb_challenge_counter -- the counter starts at 0 after reset, advances by
// STEP on each incr pulse only, and wraps modulo 2^W. Tested with a 128-bit
// counter of step 1 and an 8-bit counter of step 2.
module tb_challenge_counter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         incr;
  logic [127:0] t1;
  logic [7:0]   t2;
  logic [127:0] m1;
  logic [7:0]   m2;

  challenge_counter #(.W(128), .STEP(1)) c1 (.clk, .rst_n, .incr, .t(t1));
  challenge_counter #(.W(8),   .STEP(2)) c2 (.clk, .rst_n, .incr, .t(t2));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    incr = 0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    checks++; if (t1 != 0 || t2 != 0) failures++;
    rst_n = 1;
    m1 = 0; m2 = 0;
    for (int c = 0; c < 1000; c++) begin
      incr = ($urandom % 3) == 0;
      if (incr) begin m1 = m1 + 1; m2 = m2 + 2; end
      @(negedge clk);
      checks++;
      if (t1 != m1 || t2 != m2) begin
        failures++;
        if (failures < 10) $display("FAIL t1=%0d m1=%0d t2=%0d m2=%0d", t1, m1, t2, m2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
