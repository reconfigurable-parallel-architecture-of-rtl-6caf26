// tb_rr_state - test of the arbiter state register and time-slice counter.
//
// Two instances, N = 6: one with SLICE_CYCLES = 3, one with no slice (0).
// Checks: reset puts the token on device 0; the token takes next_token at
// every rising edge; with a slice of 3, a holder that stays granted sees
// slice_done in its 3rd, 6th, ... granted cycle; the count restarts when
// the grant drops or the token moves; with no slice, slice_done never
// rises. The random phase compares with a cycle count kept in the
// testbench.
module tb_rr_state;

  localparam int unsigned N = 6;
  localparam int unsigned S = 3;

  logic         clk = 1'b0;
  logic         rst;
  logic [N-1:0] next_token;
  logic         granted;
  logic [N-1:0] token, token0;
  logic         slice_done, slice_done0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  rr_state #(.N(N), .SLICE_CYCLES(S)) dut (
    .clk(clk), .rst(rst), .next_token(next_token), .granted(granted),
    .token(token), .slice_done(slice_done)
  );
  rr_state #(.N(N), .SLICE_CYCLES(0)) dut0 (
    .clk(clk), .rst(rst), .next_token(next_token), .granted(granted),
    .token(token0), .slice_done(slice_done0)
  );

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("%0t: %s failed (token=%b slice_done=%b)", $time, what, token, slice_done);
    end
  endtask

  initial begin
    logic [N-1:0] exp_token;
    int           run;      // granted cycles of the current slice so far
    int           pulses;

    rst = 1; granted = 0; next_token = 6'b010000;
    @(negedge clk); @(negedge clk);
    check("reset token", token == 6'b000001 && token0 == 6'b000001);
    check("reset slice_done", !slice_done && !slice_done0);

    // Holder 0 granted for 7 cycles with the token held.
    rst = 0; next_token = 6'b000001; granted = 1;
    pulses = 0;
    for (int c = 1; c <= 7; c++) begin
      #1;
      check("slice_done in cycle", slice_done == (c % S == 0));
      check("no slice when SLICE_CYCLES=0", !slice_done0);
      if (slice_done) pulses++;
      @(negedge clk);
    end
    check("two slice ends in 7 cycles", pulses == 2);

    // A dropped grant restarts the count.
    granted = 0; @(negedge clk);
    granted = 1; #1; check("restart after drop (1)", !slice_done); @(negedge clk);
    #1; check("restart after drop (2)", !slice_done); @(negedge clk);
    #1; check("restart after drop (3)", slice_done);  @(negedge clk);

    // Random phase.
    exp_token = token;
    run = 0;
    for (int c = 0; c < 2000; c++) begin
      next_token = N'(1) << $urandom_range(N - 1);
      if ($urandom_range(3) != 0) next_token = token;
      granted = ($urandom_range(4) != 0);
      rst     = ($urandom_range(199) == 0);
      #1;
      check("random slice_done", slice_done == (granted && run == S - 1));
      @(posedge clk);
      if (rst) begin exp_token = 6'b000001; run = 0; end
      else begin
        if (!granted || slice_done || next_token != exp_token) run = 0;
        else                                                    run++;
        exp_token = next_token;
      end
      @(negedge clk);
      check("random token", token == exp_token && token0 == exp_token);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10_000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
