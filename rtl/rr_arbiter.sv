// rr_arbiter - reconfigurable round-robin arbiter (top level).
//
// N devices share one bus. Each has a request line and a grant line. A
// one-hot token register gives exactly one device its turn; a device is
// granted (turn hit) when it holds the turn and requests. When the holder
// drops its request, or its time slice runs out, the token moves on the
// next clock edge to the nearest requesting device after it in cyclic
// order, wrapping from device N-1 to device 0. With no requests the token
// stays and no grant is given (idle). All devices have equal priority and
// none can be starved as long as holders eventually release the bus or a
// time slice is set.
//
// Structure, after the paper's block diagram: the update block computes
// the next token from the token, the requests and the fed-back grant; the
// state block registers it (and counts the slice); the output block ANDs
// token and requests into the grants. N = 6 is the configuration the paper
// presents (req0..req5, gnt0..gnt5) and can be set anywhere from 2 up; the
// paper reports 4 to 12. SLICE_CYCLES (0 = no limit) and the packing of
// the pins into vectors are this design's choices.
//
// Interface: clk; rst (synchronous, active high; token on device 0);
// req[N-1:0]; gnt[N-1:0].
// Timing: gnt = token & req, token registered. A device whose turn it is
// is granted in the cycle it requests; otherwise it is granted in the cycle
// after the token reaches it. A hand-over after a voluntary release costs
// one cycle without a grant; a hand-over at the end of a slice costs none.
module rr_arbiter #(
  parameter int unsigned N            = 6,
  parameter int unsigned SLICE_CYCLES = 0
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [N-1:0] req,
  output logic [N-1:0] gnt
);

  logic [N-1:0] token;
  logic [N-1:0] next_token;
  logic         granted;
  logic         slice_done;

  rr_update #(.N(N)) u_update (
    .token      (token),
    .req        (req),
    .granted    (granted),
    .slice_done (slice_done),
    .next_token (next_token)
  );

  rr_state #(.N(N), .SLICE_CYCLES(SLICE_CYCLES)) u_state (
    .clk        (clk),
    .rst        (rst),
    .next_token (next_token),
    .granted    (granted),
    .token      (token),
    .slice_done (slice_done)
  );

  rr_output #(.N(N)) u_output (
    .token   (token),
    .req     (req),
    .gnt     (gnt),
    .granted (granted)
  );

  // Rules of the arbiter: one turn at a time, at most one grant, and a
  // grant only to a requesting device.
  a_token_onehot : assert property (@(posedge clk) disable iff (rst) $onehot(token));
  a_gnt_onehot0  : assert property (@(posedge clk) disable iff (rst) $onehot0(gnt));
  a_gnt_req      : assert property (@(posedge clk) disable iff (rst) (gnt & ~req) == '0);

endmodule
