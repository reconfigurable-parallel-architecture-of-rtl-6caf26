// rr_state - arbiter state / register block.
//
// Holds the one-hot turn register: the bit of the device whose turn it is
// is 1, all others 0. It loads the update block's next_token on every
// rising clock edge. It also counts the cycles the current holder has been
// granted; with SLICE_CYCLES > 0, slice_done rises in the last granted
// cycle of the slice so that the update block passes the token on at that
// edge ("time slice run out"). SLICE_CYCLES = 0 gives no limit: a holder
// keeps the bus for as long as it requests; slice_done is then constant 0
// and no counter is built. The counter restarts whenever the holder is not
// granted or the token moves.
// The turn register, the time slice and the reset come from the paper; the
// slice length, the synchronous reset and the reset value (token on device
// 0) are this design's choices.
//
// Interface: clk, rst (synchronous, active high), next_token[N-1:0],
// granted in; token[N-1:0], slice_done out.
// Timing: token and counter change on the rising edge of clk.
module rr_state #(
  parameter int unsigned N            = 6,
  parameter int unsigned SLICE_CYCLES = 0
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [N-1:0] next_token,
  input  logic         granted,
  output logic [N-1:0] token,
  output logic         slice_done
);

  localparam int unsigned CW = (SLICE_CYCLES > 1) ? $clog2(SLICE_CYCLES) : 1;
  localparam logic [N-1:0] TOKEN_RESET = N'(1);

  logic [CW-1:0] count;  // granted cycles of the current slice, minus one

  always_ff @(posedge clk) begin
    if (rst) token <= TOKEN_RESET;
    else     token <= next_token;
  end

  always_comb begin
    slice_done = (SLICE_CYCLES != 0) && granted &&
                 (32'(count) == SLICE_CYCLES - 1);
  end

  always_ff @(posedge clk) begin
    if (rst || SLICE_CYCLES == 0 || !granted || slice_done ||
        next_token != token)                                  count <= '0;
    else                                                       count <= count + 1'b1;
  end

endmodule
