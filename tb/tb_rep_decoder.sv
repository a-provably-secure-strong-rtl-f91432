// tb_rep_decoder -- code-offset repetition decoding at the full size
// (2,120 groups of 3). Helper data are built from random enrollment bits w
// and a random codeword c as h = w XOR rep(c); the reconstruction input is w
// with at most one flipped cell per group, and must decode to c. A second
// pattern flips two cells in chosen groups, which must then decode wrongly
// (the code corrects one error only).
module tb_rep_decoder;
  localparam int N = 2120;
  int checks = 0, failures = 0;

  logic [3*N-1:0] raw, helper, w;
  logic [N-1:0]   code, c;

  rep_decoder #(.REP(3), .N_OUT(N)) dut (.raw, .helper, .code);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 20; trial++) begin
      int two_err [$];
      two_err.delete();
      for (int i = 0; i < 3 * N; i++) w[i] = 1'($urandom);
      for (int i = 0; i < N; i++) c[i] = 1'($urandom);
      for (int i = 0; i < N; i++) helper[3*i +: 3] = w[3*i +: 3] ^ {3{c[i]}};
      raw = w;
      for (int i = 0; i < N; i++) begin
        int k;
        k = $urandom % 4;               // 3 means no error in this group
        if (k < 3) raw[3*i + k] = ~raw[3*i + k];
      end
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (code[i] != c[i]) begin
          failures++;
          if (failures < 10) $display("FAIL group %0d", i);
        end
      end
      // two errors in a few groups
      for (int j = 0; j < 8; j++) begin
        int i;
        i = $urandom % N;
        raw[3*i +: 3] = w[3*i +: 3];
        raw[3*i]     = ~raw[3*i];
        raw[3*i + 2] = ~raw[3*i + 2];
        two_err.push_back(i);
      end
      #1;
      foreach (two_err[j]) begin
        checks++;
        if (code[two_err[j]] == c[two_err[j]]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
