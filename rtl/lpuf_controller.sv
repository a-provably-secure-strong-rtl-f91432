// lpuf_controller -- sequencer of the lattice PUF.
//
// One challenge is a seed (seed_a' for each of the P1 datapaths) followed by
// a stream of b' values, one per response bit per datapath. The controller
// walks through:
//   IDLE   start_ready high; 'start' captures the seeds and the counter
//          value t ('cap_seed') and advances the counter ('incr').
//   LOAD   256/P2 clocks shifting seed_a' || t into the LFSRs ('load',
//          'load_idx'); 256 clocks for the bit-serial LFSR.
//   WAIT_B b_ready high; a b_valid beat loads b' into the MAC units
//          ('init') and records b_last.
//   RUN    1280/P2 clocks of LFSR steps and MAC operations ('step',
//          'run_idx'): 160 MACs x 8 clocks for the bit-serial design.
//   RESP   one clock with r_valid high; then WAIT_B, or IDLE after the beat
//          that carried b_last.
// Every response bit therefore takes 1280/P2 + 2 clocks once b' is waiting,
// and a challenge adds 256/P2 + 1 clocks of seed loading. The design names a
// controller but does not describe it; this state machine, its valid/ready
// handshake on b' and its cycle counts are this implementation's own.
// Handshake rule checked here: once b_valid is raised it stays high until
// b_ready accepts it.
module lpuf_controller
  import lpuf_pkg::*;
#(
  parameter int unsigned P2 = 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  output logic                               start_ready,
  input  logic                               b_valid,
  input  logic                               b_last,
  output logic                               b_ready,
  output logic                               cap_seed,
  output logic                               incr,
  output logic                               load,
  output logic [$clog2(LFSR_W/P2+1)-1:0]     load_idx,
  output logic                               init,
  output logic                               step,
  output logic [$clog2(N_DIM*LOGQ/P2+1)-1:0] run_idx,
  output logic                               r_valid,
  output logic                               busy
);

  localparam int unsigned LOAD_CYC = LFSR_W / P2;
  localparam int unsigned RUN_CYC  = N_DIM * LOGQ / P2;
  localparam int unsigned IW       = $clog2(RUN_CYC + LOAD_CYC + 1);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_WAIT_B, S_RUN, S_RESP} state_t;

  state_t        state;
  logic [IW-1:0] idx;
  logic          last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      idx    <= '0;
      last_q <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_LOAD;
          idx   <= '0;
        end
        S_LOAD: begin
          if (idx == IW'(LOAD_CYC - 1)) begin
            state <= S_WAIT_B;
            idx   <= '0;
          end else idx <= idx + 1'b1;
        end
        S_WAIT_B: if (b_valid) begin
          state  <= S_RUN;
          idx    <= '0;
          last_q <= b_last;
        end
        S_RUN: begin
          if (idx == IW'(RUN_CYC - 1)) begin
            state <= S_RESP;
            idx   <= '0;
          end else idx <= idx + 1'b1;
        end
        S_RESP: state <= last_q ? S_IDLE : S_WAIT_B;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    start_ready = (state == S_IDLE);
    cap_seed    = start_ready && start;
    incr        = cap_seed;
    load        = (state == S_LOAD);
    load_idx    = load ? $bits(load_idx)'(idx) : '0;
    b_ready     = (state == S_WAIT_B);
    init        = b_ready && b_valid;
    step        = (state == S_RUN);
    run_idx     = step ? $bits(run_idx)'(idx) : '0;
    r_valid     = (state == S_RESP);
    busy        = (state != S_IDLE);
  end

  // b' handshake: a raised b_valid is held until it is accepted.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             (b_valid && !b_ready) |=> b_valid)
    else $error("lpuf_controller: b_valid dropped before b_ready");
  a_excl: assert property (@(posedge clk) disable iff (!rst_n) !(load && step))
    else $error("lpuf_controller: load and step together");

endmodule
