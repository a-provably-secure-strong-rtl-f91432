// tb_mod_mac -- random test of the modulo-256 MAC unit. A software
// accumulator starts from the init value and subtracts a*s mod 256 for every
// enabled clock; the unit's accumulator must match it after each clock,
// and must hold while en is low.
module tb_mod_mac;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       init, en;
  logic [7:0] init_val, a_i, s_i, acc;
  int         model;

  mod_mac #(.W(8)) dut (.clk, .rst_n, .init, .init_val, .en, .a_i, .s_i, .acc);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    init = 0; en = 0; init_val = 0; a_i = 0; s_i = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 50; trial++) begin
      @(negedge clk);
      init = 1; init_val = 8'($urandom); model = int'(init_val);
      @(negedge clk);
      init = 0;
      checks++; if (acc != 8'(model)) failures++;
      for (int i = 0; i < 160; i++) begin
        en = ($urandom % 4) != 0;
        a_i = 8'($urandom); s_i = 8'($urandom);
        if (en) model = (model - int'(a_i) * int'(s_i)) & 255;
        @(negedge clk);
        checks++;
        if (acc != 8'(model)) begin
          failures++;
          if (failures < 10) $display("FAIL acc=%0d model=%0d", acc, model);
        end
      end
      en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
