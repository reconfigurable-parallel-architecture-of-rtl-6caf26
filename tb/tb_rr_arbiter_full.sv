// tb_rr_arbiter_full - rr_arbiter at its default configuration (6 devices,
// no time-slice limit), run through the scenario of the paper's timing
// diagram: reset held with every request low, which must give no grant
// (idle); then six devices requesting at random, each keeping its request
// until it has been granted for 1..4 cycles. Every grant is compared with
// rr_arbiter_model each cycle; each device must be served, no request may
// wait longer than the round-robin bound, and hand-overs that wrap from
// device 5 to device 0 and that skip idle devices must both occur.
module tb_rr_arbiter_full;

  localparam int unsigned N          = 6;
  localparam int unsigned MAX_HOLD   = 4;
  localparam int unsigned WAIT_BOUND = (N - 1) * (MAX_HOLD + 1) + 2;

  logic         clk = 1'b0;
  logic         rst;
  logic [N-1:0] req, gnt, exp_gnt, prev_gnt;
  int           n_slice_out, n_wrap, n_skip, n_regrant, n_zero_gap;
  int checks = 0, failures = 0;
  int served [N];
  int held   [N];
  int hold_len [N];
  int waited [N];
  int n_term = 0, n_idle = 0;

  always #5 clk = ~clk;

  rr_arbiter dut (.clk(clk), .rst(rst), .req(req), .gnt(gnt));

  rr_arbiter_model #(.N(N), .SLICE_CYCLES(0)) model (
    .clk(clk), .rst(rst), .req(req), .exp_gnt(exp_gnt),
    .n_slice_out(n_slice_out), .n_wrap(n_wrap), .n_skip(n_skip),
    .n_regrant(n_regrant), .n_zero_gap(n_zero_gap)
  );

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("%0t: %s (req=%b gnt=%b expected %b)", $time, what, req, gnt, exp_gnt);
    end
  endtask

  initial begin
    int unsigned seed_dummy;
    seed_dummy = $urandom(5);
    rst = 1; req = '0; prev_gnt = '0;
    for (int i = 0; i < N; i++) begin served[i] = 0; held[i] = 0; hold_len[i] = 1; waited[i] = 0; end
    repeat (4) begin
      @(negedge clk); #1;
      check("idle during reset", gnt == '0);
    end
    @(negedge clk);
    rst = 0;
    for (int cyc = 0; cyc < 1000; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        if (req[i]) begin
          if (prev_gnt[i]) begin
            held[i]++;
            if (held[i] >= hold_len[i]) begin req[i] = 1'b0; n_term++; end
          end
        end else if ($urandom_range((cyc % 200 < 150) ? 2 : 15) == 0) begin
          req[i] = 1'b1; held[i] = 0; waited[i] = 0;
          hold_len[i] = $urandom_range(MAX_HOLD, 1);
        end
      end
      #1;
      check("grant", gnt == exp_gnt);
      for (int i = 0; i < N; i++) begin
        if (gnt[i]) served[i]++;
        if (req[i] && !gnt[i]) begin
          waited[i]++;
          check("wait bound", waited[i] < WAIT_BOUND);
        end else waited[i] = 0;
      end
      if (req == '0) n_idle++;
      prev_gnt = gnt;
    end
    for (int i = 0; i < N; i++) begin
      $display("device %0d granted %0d cycles", i, served[i]);
      check("device served", served[i] > 0);
    end
    $display("releases %0d, idle cycles %0d, wraps %0d, skips %0d", n_term, n_idle, n_wrap, n_skip);
    check("release by request happened", n_term > 0);
    check("idle happened", n_idle > 0);
    check("wrap 5 -> 0 happened", n_wrap > 0);
    check("skip of idle devices happened", n_skip > 0);
    check("no slice expiry without a slice", n_slice_out == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
