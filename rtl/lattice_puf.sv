// lattice_puf -- top level of the LWE-based strong PUF.
//
// A challenge is a short seed seed_a' (per datapath) and a string of 8-bit
// values b'. On 'start' the seeds are captured together with the public
// counter value t, and the counter advances. Each of the P1 LFSR-LWEDec
// datapaths then loads seed_a'[k] || (t + k) into its LFSR and, for every
// b'[k] beat accepted on the b valid/ready handshake, expands the LFSR into
// the next 160-element vector a' and returns r[k] = Q(b'[k] - <a',s>) with
// r_valid. A beat with b_last set ends the challenge. With the default
// P1 = 1, P2 = 1 this is the resource-efficient design: a bit-serial LFSR, a
// single MAC, 256 clocks to load the seed and 1280 + 2 clocks per response
// bit. P2 in {2,...,128} gives the unrolled LFSR with max(1, P2/8) MAC units
// (1280/P2 + 2 clocks per bit); P1 > 1 replicates the datapath, all sharing
// the key. The counter is outside the challenger's control, so a' can never
// be held fixed while b' is swept.
//
// Key path: the secret s (1280 bits) is rebuilt on chip by the fuzzy
// extractor. 'fe_start' runs it on the current pok_raw and helper inputs:
// majority decoding of the [3,1] repetition code on pok_raw XOR helper
// (combinational), then the BCH decoder over the 10 shortened [212,128]
// blocks (about 4,500 clocks). Challenges are accepted only while
// key_valid is high; fe_fail reports a block with more than 11 errors.
// The SRAM cells themselves are outside this logic: their power-up values
// arrive on 'pok_raw', and the helper data on 'helper'. The one-time
// enrollment interface streams pok_raw out once and then locks.
// Seed and counter widths (128 + 128 bits), the handshake and the port
// layout are this implementation's choices; the datapath follows the design.
module lattice_puf
  import lpuf_pkg::*;
#(
  parameter int unsigned P1 = 1,
  parameter int unsigned P2 = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // challenge
  input  logic                start,
  output logic                start_ready,
  input  logic [SEED_W-1:0]   seed_a [P1],
  input  logic                b_valid,
  input  logic                b_last,
  output logic                b_ready,
  input  zq_t                 b_in [P1],
  // response
  output logic                r_valid,
  output logic [P1-1:0]       r_out,
  output logic [CNT_W-1:0]    t_out,
  output logic                busy,
  // key reconstruction
  input  logic [RAW_W-1:0]    pok_raw,
  input  logic [RAW_W-1:0]    helper,
  input  logic                fe_start,
  output logic                fe_busy,
  output logic                key_valid,
  output logic                fe_fail,
  // one-time enrollment readout
  input  logic                enroll_req,
  input  logic                fuse_blown,
  output logic                pok_out_valid,
  output logic                pok_out_bit,
  output logic                blow_fuse,
  output logic                pok_locked
);

  logic                               cap_seed, incr, load, init, step;
  logic [$clog2(LFSR_W/P2+1)-1:0]     load_idx;
  logic [$clog2(N_DIM*LOGQ/P2+1)-1:0] run_idx;
  logic [CNT_W-1:0]                   t_cur, t_reg;
  logic [SEED_W-1:0]                  seed_reg [P1];
  logic [INNER_W-1:0]                 inner_code;
  logic [KEY_W-1:0]                   key;
  logic                               ctrl_ready;

  lpuf_controller #(.P2(P2)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start && key_valid),
    .start_ready(ctrl_ready),
    .b_valid    (b_valid),
    .b_last     (b_last),
    .b_ready    (b_ready),
    .cap_seed   (cap_seed),
    .incr       (incr),
    .load       (load),
    .load_idx   (load_idx),
    .init       (init),
    .step       (step),
    .run_idx    (run_idx),
    .r_valid    (r_valid),
    .busy       (busy)
  );

  challenge_counter #(.W(CNT_W), .STEP(P1)) u_cnt (
    .clk  (clk),
    .rst_n(rst_n),
    .incr (incr),
    .t    (t_cur)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_reg <= '0;
      for (int k = 0; k < int'(P1); k++) seed_reg[k] <= '0;
    end else if (cap_seed) begin
      t_reg <= t_cur;
      for (int k = 0; k < int'(P1); k++) seed_reg[k] <= seed_a[k];
    end
  end
  assign t_out       = t_reg;
  assign start_ready = ctrl_ready && key_valid;

  for (genvar k = 0; k < int'(P1); k++) begin : g_dp
    logic [LFSR_W-1:0] seed_word;
    assign seed_word = {seed_reg[k], CNT_W'(t_reg + CNT_W'(k))};

    lfsr_lwedec_datapath #(.P2(P2)) u_dp (
      .clk      (clk),
      .rst_n    (rst_n),
      .seed_word(seed_word),
      .load     (load),
      .load_idx (load_idx),
      .init     (init),
      .b        (b_in[k]),
      .step     (step),
      .run_idx  (run_idx),
      .key      (key),
      .y        (),
      .r        (r_out[k])
    );
  end

  rep_decoder #(.REP(REP_N), .N_OUT(INNER_W)) u_rep (
    .raw   (pok_raw),
    .helper(helper),
    .code  (inner_code)
  );

  bch_decoder #(.N(BCH_N), .K(BCH_K), .T(BCH_T), .BLKS(BCH_BLKS)) u_bch (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (fe_start),
    .code     (inner_code),
    .busy     (fe_busy),
    .key_valid(key_valid),
    .fail     (fe_fail),
    .key      (key)
  );

  pok_readout #(.N(RAW_W)) u_rd (
    .clk       (clk),
    .rst_n     (rst_n),
    .pok_raw   (pok_raw),
    .fuse_blown(fuse_blown),
    .enroll_req(enroll_req),
    .out_valid (pok_out_valid),
    .out_bit   (pok_out_bit),
    .blow_fuse (blow_fuse),
    .locked    (pok_locked)
  );

endmodule
