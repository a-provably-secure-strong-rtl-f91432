// tb_lwedec -- checks the LWE decryption block with one MAC unit (serial,
// 160 clocks) and with 16 MAC units (10 clocks of 16 byte pairs). Random
// ciphertexts (a, b) and keys s; the expected y = b - <a,s> mod 256 and
// r = Q(y) come from the golden model. Also checks that the result is
// ready exactly one clock after the last enabled clock.
module tb_lwedec;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       init, en;
  logic [7:0] b;
  logic [7:0] a1 [1], s1 [1], a16 [16], s16 [16];
  logic [7:0] y1, y16;
  logic       r1, r16;

  lwedec #(.NMAC(1))  d1  (.clk, .rst_n, .init, .b, .en, .a_bytes(a1),  .s_bytes(s1),  .y(y1),  .r(r1));
  lwedec #(.NMAC(16)) d16 (.clk, .rst_n, .init, .b, .en, .a_bytes(a16), .s_bytes(s16), .y(y16), .r(r16));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
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
    logic [7:0] a [160], s [160];
    logic [7:0] ey;
    init = 0; en = 0; b = 0;
    foreach (a1[i]) begin a1[i] = 0; s1[i] = 0; end
    foreach (a16[i]) begin a16[i] = 0; s16[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 60; trial++) begin
      ey = 8'($urandom);
      for (int i = 0; i < 160; i++) begin a[i] = 8'($urandom); s[i] = 8'($urandom); end
      // force some trials onto the quantizer boundaries
      b = ey;
      for (int i = 0; i < 160; i++) ey = 8'(ey - a[i] * s[i]);
      if (trial % 6 == 1) begin b = 8'(b + 8'd64 - ey);  ey = 8'd64;  end
      if (trial % 6 == 2) begin b = 8'(b + 8'd65 - ey);  ey = 8'd65;  end
      if (trial % 6 == 3) begin b = 8'(b + 8'd192 - ey); ey = 8'd192; end
      if (trial % 6 == 4) begin b = 8'(b + 8'd193 - ey); ey = 8'd193; end
      @(negedge clk);
      init = 1;
      @(negedge clk);
      init = 0;
      // serial unit: 160 clocks; wide unit: first 10 of them
      for (int c = 0; c < 160; c++) begin
        en = 1;
        a1[0] = a[c]; s1[0] = s[c];
        if (c < 10) for (int m = 0; m < 16; m++) begin
          a16[m] = a[16*c + m]; s16[m] = s[16*c + m];
        end else for (int m = 0; m < 16; m++) begin
          a16[m] = 0; s16[m] = 0;   // zero products keep the sum
        end
        @(negedge clk);
        if (c == 9) check(y16 == ey && r16 == ref_q(ey),
                          $sformatf("16-MAC y=%0d expected %0d", y16, ey));
      end
      en = 0;
      check(y1 == ey && r1 == ref_q(ey), $sformatf("1-MAC y=%0d expected %0d", y1, ey));
      check(y16 == ey, "16-MAC result held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
