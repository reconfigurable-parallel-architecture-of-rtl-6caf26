// rr_update - arbiter update / increment block.
//
// Decides where the token (turn) goes at the next clock edge:
//   * the holder keeps it while it is granted and its time slice has not
//     run out;
//   * otherwise the token moves to the nearest requesting device after the
//     holder in cyclic order (i+1, i+2, ..., wrapping from device N-1 to
//     device 0), skipping devices that do not request, so no cycle is lost
//     at the end of a round. The holder itself is the last candidate, so a
//     lone requester whose slice ran out gets a new slice at once;
//   * with no request at all the token stays put (idle).
// The cyclic i+1 search follows the paper; skipping idle devices in one
// step (rather than stepping one device per clock) follows its stated
// requirement to skip non-requesting candidates without losing cycles. The
// exact tie to the holder and the idle behaviour are this design's choices.
//
// Interface: token[N-1:0] one-hot, req[N-1:0], granted (holder has a turn
// hit), slice_done (holder's slice ends at this edge) in; next_token out.
// Timing: combinational, one level of search logic between the token
// register and its own input.
module rr_update #(
  parameter int unsigned N = 6
) (
  input  logic [N-1:0] token,
  input  logic [N-1:0] req,
  input  logic         granted,
  input  logic         slice_done,
  output logic [N-1:0] next_token
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] holder;   // index of the token bit
  logic          found;
  int unsigned   idx;

  always_comb begin
    holder = '0;
    for (int unsigned i = 0; i < N; i++) begin
      if (token[i]) holder = IW'(i);
    end
  end

  always_comb begin
    next_token = token;
    found      = 1'b0;
    idx        = 0;
    if (!granted || slice_done) begin
      // Offsets 1..N: the devices after the holder, the holder last.
      for (int unsigned off = 1; off <= N; off++) begin
        idx = int'(holder) + off;
        if (idx >= N) idx = idx - N;
        if (!found && req[idx]) begin
          next_token      = '0;
          next_token[idx] = 1'b1;
          found           = 1'b1;
        end
      end
    end
  end

endmodule
