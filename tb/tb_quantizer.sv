// tb_quantizer -- exhaustive test of Q(y) over all 256 inputs against the
// decision rule "1 when y is nearer q/2 = 128 than 0 modulo 256, with ties
// at q/4 and 3q/4 resolved as the design's intervals say": r = 1 exactly for
// y in (64, 192].
module tb_quantizer;
  int checks = 0, failures = 0;
  logic [7:0] y;
  logic       r;

  quantizer dut (.y, .r);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      logic expect_r;
      int   d0, dh;
      y = 8'(v);
      #1;
      d0 = (v <= 128) ? v : 256 - v;     // distance to 0 mod 256
      dh = (v >= 128) ? v - 128 : 128 - v; // distance to 128
      expect_r = (dh < d0) || (v == 192);
      checks++;
      if (r !== expect_r) begin
        failures++;
        $display("FAIL y=%0d r=%0b expected %0b", v, r, expect_r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
