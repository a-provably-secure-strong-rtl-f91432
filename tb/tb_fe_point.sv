// tb_fe_point -- one operating point of the fuzzy extractor's key
// reconstruction, run end to end: rep_decoder #(REP) feeding
// bch_decoder #(N, K, T, 10 blocks). Used by tb_fe_configs for every
// raw-BER point of the concatenated code table.
//
// Playing the enrolling server, it draws a random 1,280-bit key, encodes each
// 128-bit slice with the shortened BCH code (generator g(x) = product of the
// distinct minimal polynomials of alpha^1 .. alpha^2T over GF(2^8), field
// polynomial x^8+x^4+x^3+x^2+1, systematic: message in the top K bits),
// repeats every code bit REP times, draws random power-up bits w and forms
// the helper data h = w XOR rep(c). It then corrupts w: in each block some
// groups get a majority of their cells flipped (a bit error that reaches
// the BCH stage, up to T per block, exactly T in one block), and other groups
// get fewer than half their cells flipped (absorbed by the majority vote).
// The decoder must return the key with fail low, in exactly
// 10 x (2N + 2T + 2) + 1 clocks. A last run puts T + 3 bit errors into one
// block and expects fail. Ports: 'go' starts the runs, 'done' rises at the
// end with the counts of checks and failures.
module tb_fe_point
  import lpuf_pkg::*;
#(
  parameter int unsigned N   = 212,
  parameter int unsigned K   = 128,
  parameter int unsigned T   = 11,
  parameter int unsigned REP = 3
) (
  input  logic clk,
  input  logic go,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int unsigned BLKS = KEY_W / K;
  localparam int unsigned D    = N - K;          // parity bits = deg g(x)
  localparam int unsigned NB   = BLKS * N;       // inner code bits
  localparam int unsigned NC   = REP * NB;       // raw cells
  localparam int          RUNS = 4;

  logic            rst_n = 0;
  logic            start = 0;
  logic [NC-1:0]   raw, helper;
  logic [NB-1:0]   inner;
  logic            busy, key_valid, fail;
  logic [KEY_W-1:0] key;

  rep_decoder #(.REP(REP), .N_OUT(NB)) u_rep (.raw(raw), .helper(helper), .code(inner));
  bch_decoder #(.N(N), .K(K), .T(T), .BLKS(BLKS)) u_bch (
    .clk, .rst_n, .start, .code(inner), .busy, .key_valid, .fail, .key);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL [N=%0d T=%0d REP=%0d]: %s", N, T, REP, what);
    end
  endtask

  function automatic logic [D:0] generator();
    gf_t g [D+1];
    gf_t t [D+1];
    bit  seen [255];
    int  deg;
    logic [D:0] out;
    foreach (g[i]) g[i] = '0;
    g[0] = 8'h01;
    deg  = 0;
    foreach (seen[i]) seen[i] = 0;
    for (int j = 1; j <= int'(2 * T); j++) begin
      int e;
      if (seen[j]) continue;
      e = j;
      do begin
        gf_t r;
        r = gf_alpha_pow(e);
        foreach (t[i]) t[i] = '0;
        for (int i = 0; i <= deg && i < int'(D); i++) t[i + 1] ^= g[i];
        for (int i = 0; i <= deg; i++) t[i] ^= gf_mul(g[i], r);
        g = t;
        deg++;
        seen[e] = 1;
        e = (2 * e) % 255;
      end while (e != j);
    end
    if (deg != int'(D)) $error("generator degree %0d, expected %0d", deg, D);
    for (int i = 0; i <= int'(D); i++) out[i] = g[i][0];
    return out;
  endfunction

  // g_low: g(x) without its leading x^D term
  function automatic logic [N-1:0] encode(input logic [K-1:0] m, input logic [D-1:0] g_low);
    logic [D-1:0] rem;
    rem = '0;
    for (int k = int'(K) - 1; k >= 0; k--) begin
      logic fbk;
      fbk = m[k] ^ rem[D-1];
      rem = {rem[D-2:0], 1'b0} ^ (fbk ? g_low : '0);
    end
    return {m, rem};
  endfunction

  // flip 'nf' distinct cells of group 'grp' in w
  task automatic flip_cells(inout logic [NC-1:0] w, input int grp, input int nf);
    bit used [REP];
    foreach (used[i]) used[i] = 0;
    for (int f = 0; f < nf; f++) begin
      int c;
      do c = int'($urandom % REP); while (used[c]);
      used[c] = 1;
      w[int'(REP) * grp + c] = ~w[int'(REP) * grp + c];
    end
  endtask

  initial begin
    logic [D:0]       g;
    logic [KEY_W-1:0] k;
    logic [NB-1:0]    c;
    logic [NC-1:0]    w;
    done = 0; checks = 0; failures = 0;
    g = generator();
    wait (go);
    @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < RUNS; run++) begin
      int cyc, bad;
      for (int i = 0; i < KEY_W; i += 32) k[i +: 32] = $urandom;
      for (int b = 0; b < int'(BLKS); b++) c[N*b +: N] = encode(k[K*b +: K], g[D-1:0]);
      for (int i = 0; i < int'(NC); i += 32) w[i +: 32] = $urandom;
      for (int i = 0; i < int'(NB); i++)
        for (int j = 0; j < int'(REP); j++) helper[int'(REP)*i + j] = w[int'(REP)*i + j] ^ c[i];
      bad = (run == RUNS - 1) ? int'($urandom % BLKS) : -1;
      for (int b = 0; b < int'(BLKS); b++) begin
        bit hit [N];
        int ne;
        foreach (hit[i]) hit[i] = 0;
        if (b == bad)                    ne = int'(T) + 3;
        else if (b == run % int'(BLKS))  ne = int'(T);
        else                             ne = int'($urandom % (T + 1));
        for (int e = 0; e < ne; e++) begin
          int p;
          do p = int'($urandom % N); while (hit[p]);
          hit[p] = 1;
          flip_cells(w, N * b + p, int'(REP) / 2 + 1);
        end
        // correctable cell errors in a quarter of the remaining groups
        if (REP > 1)
          for (int p = 0; p < int'(N); p++)
            if (!hit[p] && ($urandom % 4 == 0))
              flip_cells(w, N * b + p, 1 + int'($urandom % (REP > 1 ? REP / 2 : 1)));
      end
      raw = w;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      check(busy && !key_valid, "busy after start");
      while (!key_valid) begin cyc++; @(negedge clk); end
      check(cyc == int'(BLKS * (2 * N + 2 * T + 2) + 1), $sformatf("decode took %0d clocks", cyc));
      if (bad < 0) begin
        check(!fail, $sformatf("run %0d: fail raised", run));
        check(key == k, $sformatf("run %0d: key", run));
      end else begin
        check(fail, "T+3 errors in one block must raise fail");
        for (int b = 0; b < int'(BLKS); b++)
          if (b != bad) check(key[K*b +: K] == k[K*b +: K], $sformatf("block %0d beside the bad one", b));
      end
    end
    done = 1;
  end
endmodule
