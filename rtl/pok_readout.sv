// pok_readout -- one-time enrollment interface for the raw POK bits.
//
// At enrollment the server needs the power-up values of the SRAM cells once,
// to build the helper data and to learn the key. After that no path may
// reveal them. A pulse on 'enroll_req' while the interface is open streams
// the N raw bits out serially, bit 0 first, one per clock with 'out_valid'
// high (N clocks). On the last bit 'blow_fuse' pulses for one clock so that
// an external one-time-programmable fuse can be burned, and the interface
// locks itself. It stays locked while 'fuse_blown' (the fuse's read-back)
// is high, and until the next reset in any case. Outside a readout
// 'out_bit' is held at 0. The design states only that the bits leave through
// a one-time interface; the serial format and the fuse handshake are this
// implementation's choices, and the fuse itself is outside this logic.
module pok_readout
  import lpuf_pkg::*;
#(
  parameter int unsigned N = RAW_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] pok_raw,
  input  logic         fuse_blown,
  input  logic         enroll_req,
  output logic         out_valid,
  output logic         out_bit,
  output logic         blow_fuse,
  output logic         locked
);

  localparam int unsigned IW = $clog2(N + 1);

  logic          active, done;
  logic [IW-1:0] idx;

  assign locked = done || fuse_blown;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      done   <= 1'b0;
      idx    <= '0;
    end else if (active) begin
      if (idx == IW'(N - 1)) begin
        active <= 1'b0;
        done   <= 1'b1;
        idx    <= '0;
      end else idx <= idx + 1'b1;
    end else if (enroll_req && !locked) begin
      active <= 1'b1;
      idx    <= '0;
    end
  end

  assign out_valid = active;
  assign out_bit   = active ? pok_raw[idx] : 1'b0;
  assign blow_fuse = active && (idx == IW'(N - 1));

endmodule
