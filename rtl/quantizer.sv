// quantizer -- maps the decryption value y = b - <a,s> (mod q) to the
// response bit: r = 0 for y in [0, q/4] or (3q/4, q-1], r = 1 for y in
// (q/4, 3q/4]. With q = 256 this is r = 1 exactly for 65 <= y <= 192.
// Purely combinational; the thresholds are those of the design.
module quantizer
  import lpuf_pkg::*;
(
  input  zq_t  y,
  output logic r
);

  assign r = quantize(y);

endmodule
