// rr_arbiter_model - cycle-level reference model of the round-robin arbiter,
// for testbenches only (behavioural, not synthesizable in intent).
//
// Written from the arbitration rules, independently of the RTL: the turn is
// kept as a device number and a count of granted cycles. The expected grant
// is "the device whose turn it is, if it requests". At a clock edge the turn
// stays while the holder requests and its slice lasts; otherwise the model
// walks (turn+1) mod N, (turn+2) mod N, ... and takes the first requester,
// the holder itself last. It also counts the events the testbench must see:
// slice expiries, hand-overs that wrap from a high to a low device number,
// hand-overs that skip idle devices, and re-grants of a lone holder.
module rr_arbiter_model #(
  parameter int unsigned N            = 6,
  parameter int unsigned SLICE_CYCLES = 0
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [N-1:0] req,
  output logic [N-1:0] exp_gnt,
  output int           n_slice_out,
  output int           n_wrap,
  output int           n_skip,
  output int           n_regrant,
  output int           n_zero_gap
);

  int turn;
  int used;

  initial begin
    turn = 0; used = 0;
    n_slice_out = 0; n_wrap = 0; n_skip = 0; n_regrant = 0; n_zero_gap = 0;
  end

  always_comb begin
    exp_gnt = '0;
    if (req[turn]) exp_gnt[turn] = 1'b1;
  end

  always @(posedge clk) begin
    int  j, cand, old;
    bit  expired;
    if (rst) begin
      turn = 0;
      used = 0;
    end else if (req[turn] && (SLICE_CYCLES == 0 || used + 1 < SLICE_CYCLES)) begin
      used = used + 1;
    end else begin
      expired = req[turn];
      if (expired) n_slice_out++;
      old  = turn;
      cand = -1;
      for (j = 1; j <= N; j++) begin
        if (cand < 0 && req[(old + j) % N]) cand = (old + j) % N;
      end
      if (cand >= 0) begin
        turn = cand;
        if (cand == old)        n_regrant++;
        else begin
          if (cand < old)       n_wrap++;
          if ((cand - old + N) % N > 1) n_skip++;
          if (expired)          n_zero_gap++;
        end
      end
      used = 0;
    end
  end

endmodule
