// challenge_counter -- self-incrementing public counter t.
//
// The counter value is concatenated below the challenger's seed to form the
// LFSR seed (seed_a' || t), so an attacker cannot hold a' fixed while
// sweeping b' (the active attack that would otherwise recover s by Gaussian
// elimination). Each 'incr' pulse, given once per challenge when its seed is
// loaded, advances t by STEP; with P1 parallel datapaths STEP = P1, because
// datapath k uses t + k and no counter value may be used twice. The value
// is public and is visible on 't'. The design only asks for a counter
// incremented on each response generation; its width, its reset to zero and
// the step size are this implementation's choices. A deployed part would
// keep t in non-volatile storage so that a power cycle cannot rewind it.
module challenge_counter
  import lpuf_pkg::*;
#(
  parameter int unsigned W    = CNT_W,
  parameter int unsigned STEP = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         incr,
  output logic [W-1:0] t
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    t <= '0;
    else if (incr) t <= t + W'(STEP);
  end

endmodule
