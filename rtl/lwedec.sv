// lwedec -- LWE decryption block: NMAC modulo-q MAC units, a partial-sum
// adder and the quantizer.
//
// The block computes y = b - <a,s> (mod q) and r = Q(y). With NMAC = 1 it is
// the single serial MAC of the resource-efficient design (n = 160 MAC
// operations per response bit). With NMAC > 1 the n products are split over
// NMAC units: on 'init' unit 0 loads b and the others load 0; each 'en'
// cycle unit m accumulates s_m * (-a_m) for its own pair of bytes; the
// partial sums are added modulo q into y. The adder is combinational, so y
// and r reflect the accumulators one clock after the last 'en'. The way the
// partial sums are combined (one combinational modulo-q sum) is this
// implementation's choice.
module lwedec
  import lpuf_pkg::*;
#(
  parameter int unsigned NMAC = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic init,
  input  zq_t  b,
  input  logic en,
  input  zq_t  a_bytes [NMAC],
  input  zq_t  s_bytes [NMAC],
  output zq_t  y,
  output logic r
);

  zq_t acc [NMAC];

  for (genvar m = 0; m < int'(NMAC); m++) begin : g_mac
    mod_mac #(.W(LOGQ)) u_mac (
      .clk     (clk),
      .rst_n   (rst_n),
      .init    (init),
      .init_val(m == 0 ? b : zq_t'(0)),
      .en      (en),
      .a_i     (a_bytes[m]),
      .s_i     (s_bytes[m]),
      .acc     (acc[m])
    );
  end

  always_comb begin
    y = '0;
    for (int m = 0; m < int'(NMAC); m++) y = zq_t'(y + acc[m]);
  end

  quantizer u_q (.y(y), .r(r));

endmodule
