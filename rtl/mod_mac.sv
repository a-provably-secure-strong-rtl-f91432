// mod_mac -- modulo-q multiply-accumulate unit of the LWE decryption block.
//
// The accumulator holds a running value of b - <a,s> in Z_q. 'init' loads
// init_val (the ciphertext scalar b for the first MAC unit, 0 for the
// others); each cycle with 'en' high adds the product of a key byte s_i and
// the negated ciphertext element -a_i. Because q = 2^LOGQ, modulo arithmetic
// is ordinary arithmetic truncated to LOGQ bits, so no reduction logic is
// needed. init has priority over en. The accumulator is visible on 'acc'
// one clock after the operation. Reset to zero is this implementation's
// choice.
module mod_mac
  import lpuf_pkg::*;
#(
  parameter int unsigned W = LOGQ
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         init,
  input  logic [W-1:0] init_val,
  input  logic         en,
  input  logic [W-1:0] a_i,
  input  logic [W-1:0] s_i,
  output logic [W-1:0] acc
);

  logic [W-1:0] neg_a;
  logic [W-1:0] prod;

  assign neg_a = W'(-a_i);
  assign prod  = W'(neg_a * s_i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    acc <= '0;
    else if (init) acc <= init_val;
    else if (en)   acc <= W'(acc + prod);
  end

endmodule
