// rep_decoder -- inner stage of the fuzzy extractor's key reconstruction:
// code-offset decoding of a [REP,1] repetition code.
//
// At enrollment the helper data were formed as h = w XOR rep(c), with w the
// raw power-up bits and c the outer (BCH) codeword bits repeated REP times.
// At reconstruction each group of REP bits of (w~ XOR h) is reduced to one bit
// by majority vote, which corrects up to (REP-1)/2 flipped cells per group.
// The result is the noisy outer codeword (10 x 212 bits for the [3,1]
// code), which goes to the BCH decoder. Group i is raw bits
// [REP*i+REP-1 : REP*i]. Purely combinational.
// The design gives the code sizes ([3,1,1] inner, [212,128,11] outer,
// 6,360 cells); the code-offset helper-data form and the bit grouping are
// this implementation's choices.
module rep_decoder
  import lpuf_pkg::*;
#(
  parameter int unsigned REP   = REP_N,
  parameter int unsigned N_OUT = INNER_W
) (
  input  logic [REP*N_OUT-1:0] raw,
  input  logic [REP*N_OUT-1:0] helper,
  output logic [N_OUT-1:0]     code
);

  logic [REP*N_OUT-1:0] y;
  assign y = raw ^ helper;

  function automatic logic majority(input logic [REP-1:0] v);
    int unsigned ones;
    ones = 0;
    for (int j = 0; j < int'(REP); j++) ones += int'(v[j]);
    return ones > REP / 2;
  endfunction

  for (genvar i = 0; i < int'(N_OUT); i++) begin : g_grp
    assign code[i] = majority(y[REP * i +: REP]);
  end

  initial assert (REP % 2 == 1) else $error("rep_decoder: REP must be odd");

endmodule
