// lfsr_lwedec_datapath -- one LFSR-LWEDec response path: an LFSR of P2 output
// bits per clock feeding an LWEDec block of NMAC = max(1, P2/8) MAC units.
//
// Seed load: while 'load' is high the LFSR takes P2 bits per clock of the
// 256-bit seed word (seed_a' || t), chunk 'load_idx' counted from the most
// significant end; 256/P2 clocks load the whole word.
// Response: 'init' loads b' into MAC unit 0 (the other units clear). Then the
// controller holds 'step' high for 1280/P2 clocks, numbered by 'run_idx'.
// Every clock the LFSR emits P2 bits. For P2 < 8 the bits are gathered in a
// small shift register and every 8/P2-th clock one byte a_i is complete and
// the single MAC unit fires; for P2 >= 8 every clock delivers NMAC bytes and
// all NMAC units fire. The LFSR bit stream is cut into bytes in stream
// order and each byte is read with its earliest bit as the most significant
// bit (this matches the unrolled LFSR's outputs X_out^7..X_out^0 read as one
// byte); the e-th byte of the stream is a_e, paired with key byte
// s_e = key[8e+7 : 8e] (the key bits W are little-endian within each s_i,
// as the design defines). After the last step y = b' - <a',s> and r = Q(y)
// are valid until the next init. The LFSR keeps its state between response
// bits, so the vectors a'_1, a'_2, ... of an L-bit challenge come from one
// shared seed. The byte order of the stream and the use of a run index from
// the controller are this implementation's choices.
module lfsr_lwedec_datapath
  import lpuf_pkg::*;
#(
  parameter int unsigned P2 = 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [LFSR_W-1:0]                 seed_word,
  input  logic                              load,
  input  logic [$clog2(LFSR_W/P2+1)-1:0]    load_idx,
  input  logic                              init,
  input  zq_t                               b,
  input  logic                              step,
  input  logic [$clog2(N_DIM*LOGQ/P2+1)-1:0] run_idx,
  input  logic [KEY_W-1:0]                  key,
  output zq_t                               y,
  output logic                              r
);

  localparam int unsigned NMAC  = (P2 >= LOGQ) ? P2 / LOGQ : 1;
  localparam int unsigned SUBS  = (P2 >= LOGQ) ? 1 : LOGQ / P2; // clocks per byte
  localparam int unsigned AW    = NMAC * LOGQ;                  // bits per MAC firing

  logic [P2-1:0] lbits, dout;
  logic [AW-1:0] a_full;
  logic          mac_en;
  int unsigned   group;
  zq_t           a_bytes [NMAC];
  zq_t           s_bytes [NMAC];

  assign lbits = seed_word[LFSR_W - 1 - int'(load_idx) * P2 -: P2];

  lfsr #(.P2(P2)) u_lfsr (
    .clk      (clk),
    .rst_n    (rst_n),
    .load     (load),
    .load_bits(lbits),
    .step     (step),
    .dout     (dout)
  );

  if (P2 >= LOGQ) begin : g_wide
    assign a_full = dout;
    assign mac_en = step;
    assign group  = int'(run_idx);
  end else begin : g_narrow
    logic [LOGQ-P2-1:0] abuf;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)    abuf <= '0;
      else if (step) abuf <= a_full[LOGQ-P2-1:0];
    end
    assign a_full = {abuf, dout};
    assign mac_en = step && ((int'(run_idx) % SUBS) == SUBS - 1);
    assign group  = int'(run_idx) / SUBS;
  end

  always_comb begin
    for (int m = 0; m < int'(NMAC); m++) begin
      a_bytes[m] = a_full[AW - 1 - m * LOGQ -: LOGQ];
      s_bytes[m] = key[(group * NMAC + m) * LOGQ +: LOGQ];
    end
  end

  lwedec #(.NMAC(NMAC)) u_dec (
    .clk    (clk),
    .rst_n  (rst_n),
    .init   (init),
    .b      (b),
    .en     (mac_en),
    .a_bytes(a_bytes),
    .s_bytes(s_bytes),
    .y      (y),
    .r      (r)
  );

  initial begin
    assert (P2 inside {1, 2, 4, 8, 16, 32, 64, 128})
      else $error("lfsr_lwedec_datapath: P2 = %0d not supported", P2);
  end

endmodule
