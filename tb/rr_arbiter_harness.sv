// rr_arbiter_harness - drives one rr_arbiter instance with modelled devices
// and compares every grant with rr_arbiter_model.
//
// Each device idles, raises its request at random, waits for its grant and
// keeps requesting until it has been granted for a random number of cycles
// (1..MAX_HOLD), then drops the request (termination by request). A waiting
// device occasionally withdraws. The load alternates between heavy and
// light phases so that idle cycles also occur, and a reset is pulsed once
// in mid-run. Requests change on the falling clock edge; grants are checked
// shortly after. It also checks that no request waits longer than the
// round-robin bound (N-1)*(L+1)+2 cycles, L being the longest possible turn.
module rr_arbiter_harness #(
  parameter int unsigned N            = 6,
  parameter int unsigned SLICE_CYCLES = 0,
  parameter int unsigned MAX_HOLD     = 4,
  parameter int unsigned CYCLES       = 2000,
  parameter int unsigned SEED         = 1
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_hit,
  output int   n_miss,
  output int   n_term_req,
  output int   n_idle,
  output int   n_reset,
  output int   n_slice_out,
  output int   n_wrap,
  output int   n_skip,
  output int   n_regrant,
  output int   n_zero_gap
);

  localparam int unsigned TURN_MAX =
      (SLICE_CYCLES != 0 && SLICE_CYCLES < MAX_HOLD) ? SLICE_CYCLES : MAX_HOLD;
  localparam int unsigned WAIT_BOUND = (N - 1) * (TURN_MAX + 1) + 2;

  logic         rst;
  logic [N-1:0] req;
  logic [N-1:0] gnt;
  logic [N-1:0] exp_gnt;
  logic [N-1:0] prev_gnt;

  int hold_len [N];
  int held     [N];
  int waited   [N];

  rr_arbiter #(.N(N), .SLICE_CYCLES(SLICE_CYCLES)) dut (
    .clk (clk), .rst (rst), .req (req), .gnt (gnt)
  );

  rr_arbiter_model #(.N(N), .SLICE_CYCLES(SLICE_CYCLES)) model (
    .clk (clk), .rst (rst), .req (req), .exp_gnt (exp_gnt),
    .n_slice_out (n_slice_out), .n_wrap (n_wrap), .n_skip (n_skip),
    .n_regrant (n_regrant), .n_zero_gap (n_zero_gap)
  );

  initial begin
    int unsigned seed_dummy;
    int unsigned p;
    done = 0; checks = 0; failures = 0;
    n_hit = 0; n_miss = 0; n_term_req = 0; n_idle = 0; n_reset = 0;
    rst = 1; req = '0; prev_gnt = '0;
    for (int i = 0; i < N; i++) begin hold_len[i] = 1; held[i] = 0; waited[i] = 0; end
    seed_dummy = $urandom(SEED);

    // Reset: no request, no grant.
    repeat (3) begin
      @(negedge clk);
      #1;
      checks++;
      if (gnt !== '0) begin
        failures++;
        $display("N=%0d S=%0d: grant %b during reset", N, SLICE_CYCLES, gnt);
      end
    end
    @(negedge clk);
    rst = 0;

    for (int cyc = 0; cyc < CYCLES; cyc++) begin
      @(negedge clk);
      // Device behaviour, based on what each saw in the cycle that ended.
      p = ((cyc / 100) % 2 == 0) ? 2 : 12;   // heavy / light phase
      for (int i = 0; i < N; i++) begin
        if (req[i]) begin
          if (prev_gnt[i]) begin
            held[i]++;
            if (held[i] >= hold_len[i]) begin
              req[i] = 1'b0;
              n_term_req++;
            end
          end else if ($urandom_range(63) == 0) begin
            req[i] = 1'b0;                     // withdraw while waiting
          end
        end else if ($urandom_range(p - 1) == 0) begin
          req[i]      = 1'b1;
          held[i]     = 0;
          waited[i]   = 0;
          hold_len[i] = $urandom_range(MAX_HOLD, 1);
        end
      end
      // One reset pulse in mid-run.
      if (cyc == CYCLES / 2) begin
        rst = 1;
        req = '0;
        n_reset++;
      end else begin
        rst = 0;
      end
      #1;
      checks++;
      if (gnt !== exp_gnt) begin
        failures++;
        if (failures < 10)
          $display("N=%0d S=%0d cycle %0d: req=%b gnt=%b expected %b",
                   N, SLICE_CYCLES, cyc, req, gnt, exp_gnt);
      end
      if (gnt != '0) n_hit++;
      for (int i = 0; i < N; i++) begin
        if (req[i] && !gnt[i]) begin
          n_miss++;
          waited[i]++;
          if (waited[i] == WAIT_BOUND) begin
            failures++;
            $display("N=%0d S=%0d: device %0d waited %0d cycles", N, SLICE_CYCLES, i, WAIT_BOUND);
          end
        end else begin
          waited[i] = 0;
        end
      end
      if (req == '0) n_idle++;
      prev_gnt = gnt;
    end
    done = 1;
  end

endmodule
