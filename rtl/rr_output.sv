// rr_output - arbiter output logic (turn hit / turn miss).
//
// Each device has one token bit (its turn) and one request bit. The grant,
// or acknowledge, of device i is token[i] AND req[i]: a 1 is a "turn hit"
// and connects the device to the shared bus, a 0 is a "turn miss". The
// AND-per-device structure is the one the arbitration description gives.
// `granted` is the OR of all grants; it is this design's own addition and
// feeds the update and state blocks (the grant feedback path of the block
// diagram).
//
// Interface: token[N-1:0] (one-hot, from the state register), req[N-1:0]
// in; gnt[N-1:0], granted out.
// Timing: purely combinational. With registered token and requests launched
// from the same clock, gnt only changes after a clock edge; a device that
// drops its request loses its grant in the same cycle.
module rr_output #(
  parameter int unsigned N = 6
) (
  input  logic [N-1:0] token,
  input  logic [N-1:0] req,
  output logic [N-1:0] gnt,
  output logic         granted
);

  always_comb begin
    gnt     = token & req;
    granted = |gnt;
  end

endmodule
