// lfsr -- 256-bit Fibonacci LFSR that expands the challenge seed into the
// ciphertext vector a', producing P2 output bits per clock.
//
// Bit-serial form (P2 = 1): every step shifts the register up by one place
// (X[i] <= X[i-1]), loads the feedback X255 ^ X253 ^ X250 ^ X245 into X0 and
// presents X255 as the output bit. Unrolled form (P2 > 1): one clock does the
// work of P2 serial steps. The feedback bits of the P2 consecutive steps are
// computed from the current state (X_in^k = X[255-d] ^ X[253-d] ^ X[250-d] ^
// X[245-d] with d = P2-1-k), the register shifts by P2 places
// (X[i] <= X[i-P2]), X_in^k lands in X[k], and the outputs are
// dout[k] = X[256-P2+k]. dout[P2-1] is therefore the bit a serial LFSR
// emits first. For P2 = 8 this is exactly the unrolled LFSR of the design
// (X_in^7 = X255^X253^X250^X245 ... X_in^0 = X248^X246^X243^X238,
// X_out^7 = X255 ... X_out^0 = X248). Unrolling by more than TAP3+1 = 246
// would need feedback bits that are produced in the same clock, so P2 is
// limited to that; the design space uses P2 up to 128.
//
// Interface: 'load' shifts P2 seed bits in (load_bits[P2-1] first in time),
// so 256/P2 load clocks leave the register equal to the 256-bit seed word
// sent most-significant bit first. 'step' advances the generator by P2 bits.
// load has priority over step. dout is combinational from the register and
// is valid in the cycle before the step that consumes it.
// The taps follow the design; the serial load port, the reset value of zero
// and the load/step priority are this implementation's choices. An all-zero
// seed word keeps the register at zero, as in any XOR-feedback LFSR.
module lfsr
  import lpuf_pkg::*;
#(
  parameter int unsigned P2 = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [P2-1:0] load_bits,
  input  logic          step,
  output logic [P2-1:0] dout
);

  logic [LFSR_W-1:0] x;
  logic [P2-1:0]     fb;

  always_comb begin
    for (int k = 0; k < int'(P2); k++) begin
      fb[k] = x[TAP0 - (P2 - 1 - k)] ^ x[TAP1 - (P2 - 1 - k)]
            ^ x[TAP2 - (P2 - 1 - k)] ^ x[TAP3 - (P2 - 1 - k)];
    end
  end

  assign dout = x[LFSR_W-1 -: P2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    x <= '0;
    else if (load) x <= {x[LFSR_W-1-P2:0], load_bits};
    else if (step) x <= {x[LFSR_W-1-P2:0], fb};
  end

  initial begin
    assert (P2 >= 1 && P2 <= TAP3 + 1)
      else $error("lfsr: P2 = %0d cannot be unrolled with these taps", P2);
    assert (LFSR_W % P2 == 0)
      else $error("lfsr: P2 = %0d must divide the register length", P2);
  end

endmodule
