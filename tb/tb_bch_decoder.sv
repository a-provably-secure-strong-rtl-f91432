// tb_bch_decoder -- checks the BCH key decoder at full size (10 blocks of
// 212 bits, 11 errors correctable per block). For each run a random 1,280-bit
// key is encoded block by block with the software encoder, a random number
// of bit errors from 0 to 11 is put into every block (11 in at least one),
// and the decoder must return the key with fail low. A further run puts 14
// errors into one block, beyond the code's reach, and fail must rise. The
// decoding time must be the documented 2N + 2T + 2 clocks per block.
module tb_bch_decoder;
  import lpuf_pkg::*;
  import tb_bch_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic            start, busy, key_valid, fail;
  logic [2119:0]   code;
  logic [1279:0]   key;

  bch_decoder dut (.clk, .rst_n, .start, .code, .busy, .key_valid, .fail, .key);

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
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic blk_t add_errors(input blk_t c, input int n);
    bit used [212];
    foreach (used[i]) used[i] = 0;
    for (int e = 0; e < n; e++) begin
      int p;
      do p = $urandom % 212; while (used[p]);
      used[p] = 1;
      c[p] = ~c[p];
    end
    return c;
  endfunction

  initial begin
    gen_t g;
    logic [1279:0] k;
    g = bch_generator();
    start = 0; code = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 7; run++) begin
      int cyc;
      k = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
           $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
           $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
           $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
           $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      for (int b = 0; b < 10; b++) begin
        int ne;
        ne = (run == 6) ? ((b == 4) ? 14 : 3) : ((b == run) ? 11 : int'($urandom % 12));
        code[212*b +: 212] = add_errors(bch_encode(k[128*b +: 128], g), ne);
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      check(busy && !key_valid, "busy after start");
      while (!key_valid) begin cyc++; @(negedge clk); end
      check(cyc == 10 * (2 * 212 + 22 + 2) + 1, $sformatf("decode took %0d clocks", cyc));
      if (run < 6) begin
        check(!fail, $sformatf("run %0d: fail flagged", run));
        for (int b = 0; b < 10; b++)
          check(key[128*b +: 128] == k[128*b +: 128], $sformatf("run %0d block %0d key", run, b));
      end else begin
        check(fail, "14 errors must be flagged");
        for (int b = 0; b < 10; b++)
          if (b != 4) check(key[128*b +: 128] == k[128*b +: 128], $sformatf("block %0d beside the bad one", b));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
