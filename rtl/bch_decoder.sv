// bch_decoder -- outer stage of the fuzzy extractor's key reconstruction:
// decodes BLKS blocks of a shortened binary BCH code and assembles the key.
//
// Code: the narrow-sense BCH(255,171) code over GF(2^8) that corrects
// T = 11 errors, shortened to N = 212 bits with K = 128 message bits (84
// parity bits), used 10 times for the 1,280-bit key. Bit i of a block is the
// coefficient of x^i of the received polynomial; the code is systematic
// with the message in bits [211:84] (coefficients x^84..x^211), so the key
// bits of block b are key[128b+127 : 128b] = corrected block bits [211:84].
// GF(2^8) is built on x^8 + x^4 + x^3 + x^2 + 1 (see lpuf_pkg).
//
// Each block goes through three sequential phases:
//   syndromes  N clocks, Horner's rule from the highest bit down:
//              S_j <- S_j * alpha^j + r_i for j = 1..2T;
//   key eq.    2T clocks of inversion-free Berlekamp-Massey, one iteration
//              per clock, giving the error-locator polynomial Lambda(x);
//   Chien      N clocks: at clock i the sum of Lambda_j * alpha^(-ij) is
//              formed; a zero marks an error at bit i, which is flipped.
// A block whose number of roots in the first N positions differs from the
// locator's degree has more errors than the code corrects; 'fail' is then
// raised (sticky until the next start) and the block is passed through
// uncorrected. Timing: 2N + 2T + 2 clocks per block, about 4,500 clocks for
// the 10 blocks; 'key_valid' rises when all blocks are stored and stays
// high until the next 'start'.
// The design gives only the code sizes ([212,128] outer code correcting 11
// errors, 10 blocks); the field polynomial, the systematic bit placement and
// this decoder architecture are this implementation's choices.
module bch_decoder
  import lpuf_pkg::*;
#(
  parameter int unsigned N    = BCH_N,
  parameter int unsigned K    = BCH_K,
  parameter int unsigned T    = BCH_T,
  parameter int unsigned BLKS = BCH_BLKS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [BLKS*N-1:0] code,
  output logic              busy,
  output logic              key_valid,
  output logic              fail,
  output logic [BLKS*K-1:0] key
);

  localparam int unsigned NS = 2 * T;
  localparam int unsigned CW = $clog2(N + NS + 1);
  localparam int unsigned BW = $clog2(BLKS + 1);
  localparam int unsigned PW = $clog2(N);      // bit position within a block

  // Constant multipliers: alpha^j (j = 1..2T) for the syndromes and
  // alpha^(-j) (j = 0..T) for the Chien search, fixed at elaboration.
  function automatic logic [NS-1:0][7:0] syn_mul_table();
    for (int j = 0; j < int'(NS); j++) syn_mul_table[j] = gf_alpha_pow(j + 1);
  endfunction
  function automatic logic [T:0][7:0] chien_mul_table();
    for (int j = 0; j <= int'(T); j++) chien_mul_table[j] = gf_alpha_pow(255 - j);
  endfunction
  localparam logic [NS-1:0][7:0] SYN_MUL   = syn_mul_table();
  localparam logic [T:0][7:0]    CHIEN_MUL = chien_mul_table();

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_SYN, S_BM, S_CHIEN, S_STORE} state_t;

  state_t        state;
  logic [N-1:0]  word;
  gf_t           syn [NS];
  gf_t           lam [T+1];
  gf_t           bb  [T+1];
  gf_t           cr  [T+1];
  gf_t           gam;
  int unsigned   len;          // current LFSR length L of Berlekamp-Massey
  int unsigned   nroots;
  logic [CW-1:0] cnt;
  logic [PW-1:0] pos;          // cnt as a bit position (cnt < N in S_SYN, S_CHIEN)
  logic [BW-1:0] blk;

  // ---- combinational helpers ----
  gf_t delta;
  gf_t lam_next [T+1];
  gf_t chien_sum;

  always_comb begin
    delta = '0;
    for (int i = 0; i <= int'(T); i++)
      if (i <= int'(cnt)) delta ^= gf_mul(lam[i], syn[int'(cnt) - i]);
    for (int i = 0; i <= int'(T); i++)
      lam_next[i] = gf_mul(gam, lam[i]) ^ ((i > 0) ? gf_mul(delta, bb[i-1]) : gf_t'(0));
    chien_sum = '0;
    for (int j = 0; j <= int'(T); j++) chien_sum ^= cr[j];
  end

  assign busy = (state != S_IDLE);
  assign pos  = cnt[PW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      word      <= '0;
      gam       <= '0;
      len       <= 0;
      nroots    <= 0;
      cnt       <= '0;
      blk       <= '0;
      key_valid <= 1'b0;
      fail      <= 1'b0;
      key       <= '0;
      for (int j = 0; j < int'(NS); j++) syn[j] <= '0;
      for (int i = 0; i <= int'(T); i++) begin
        lam[i] <= '0; bb[i] <= '0; cr[i] <= '0;
      end
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state     <= S_LOAD;
          blk       <= '0;
          key_valid <= 1'b0;
          fail      <= 1'b0;
        end
        S_LOAD: begin
          word <= code[int'(blk) * N +: N];
          for (int j = 0; j < int'(NS); j++) syn[j] <= '0;
          cnt   <= CW'(N - 1);
          state <= S_SYN;
        end
        S_SYN: begin
          for (int j = 0; j < int'(NS); j++)
            syn[j] <= gf_mul(syn[j], SYN_MUL[j]) ^ gf_t'(word[pos]);
          if (cnt == 0) begin
            state <= S_BM;
            for (int i = 0; i <= int'(T); i++) begin
              lam[i] <= (i == 0) ? gf_t'(1) : gf_t'(0);
              bb[i]  <= (i == 0) ? gf_t'(1) : gf_t'(0);
            end
            gam <= gf_t'(1);
            len <= 0;
          end else cnt <= cnt - 1'b1;
        end
        S_BM: begin
          for (int i = 0; i <= int'(T); i++) lam[i] <= lam_next[i];
          if (delta != 0 && 2 * len <= int'(cnt)) begin
            for (int i = 0; i <= int'(T); i++) bb[i] <= lam[i];
            len <= int'(cnt) + 1 - len;
            gam <= delta;
          end else begin
            for (int i = 0; i <= int'(T); i++) bb[i] <= (i > 0) ? bb[i-1] : gf_t'(0);
          end
          if (cnt == CW'(NS - 1)) begin
            state  <= S_CHIEN;
            cnt    <= '0;
            nroots <= 0;
            for (int i = 0; i <= int'(T); i++) cr[i] <= lam_next[i];
          end else cnt <= cnt + 1'b1;
        end
        S_CHIEN: begin
          if (chien_sum == 0) begin
            word[pos] <= ~word[pos];
            nroots    <= nroots + 1;
          end
          for (int j = 0; j <= int'(T); j++)
            cr[j] <= gf_mul(cr[j], CHIEN_MUL[j]);
          if (cnt == CW'(N - 1)) state <= S_STORE;
          else cnt <= cnt + 1'b1;
        end
        S_STORE: begin
          key[int'(blk) * K +: K] <= word[N-1 -: K];
          if (len > T || nroots != len) fail <= 1'b1;
          if (blk == BW'(BLKS - 1)) begin
            state     <= S_IDLE;
            key_valid <= 1'b1;
          end else begin
            blk   <= blk + 1'b1;
            state <= S_LOAD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
