// tb_rr_arbiter - end-to-end test of rr_arbiter in the device counts the
// paper reports (4, 6, 8, 10 and 12), with and without a time slice.
//
// Each configuration runs in its own rr_arbiter_harness: random device
// traffic, every grant compared with the reference model each cycle, and a
// bound on every device's waiting time. Afterwards each mechanism of the
// arbiter must have happened at least once: turn hit, turn miss,
// termination by request, idle, reset, time slice run out, cyclic wrap
// from the last device to the first, skipping of idle devices, re-grant of
// a lone requester, and a hand-over without a lost cycle.
module tb_rr_arbiter;

  localparam int NCFG = 5;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [NCFG-1:0] done;
  int cks [NCFG], fls [NCFG];
  int hit [NCFG], miss [NCFG], term [NCFG], idle [NCFG], rsts [NCFG];
  int slc [NCFG], wrp [NCFG], skp [NCFG], rgr [NCFG], zgp [NCFG];

  // N and SLICE_CYCLES of each configuration.
  localparam int CFG_N [NCFG] = '{4, 6, 8, 10, 12};
  localparam int CFG_S [NCFG] = '{3, 0, 3, 2, 0};

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    rr_arbiter_harness #(
      .N (CFG_N[g]), .SLICE_CYCLES (CFG_S[g]), .MAX_HOLD (6),
      .CYCLES (3000), .SEED (17 + g)
    ) h (
      .clk (clk), .done (done[g]), .checks (cks[g]), .failures (fls[g]),
      .n_hit (hit[g]), .n_miss (miss[g]), .n_term_req (term[g]),
      .n_idle (idle[g]), .n_reset (rsts[g]), .n_slice_out (slc[g]),
      .n_wrap (wrp[g]), .n_skip (skp[g]), .n_regrant (rgr[g]),
      .n_zero_gap (zgp[g])
    );
  end

  int checks = 0;
  int failures = 0;

  task automatic need(input string what, input int count);
    checks++;
    $display("  %-28s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("  mechanism never happened: %s", what);
    end
  endtask

  initial begin
    int s_hit, s_miss, s_term, s_idle, s_rst, s_slc, s_wrp, s_skp, s_rgr, s_zgp;
    wait (&done);
    s_hit = 0; s_miss = 0; s_term = 0; s_idle = 0; s_rst = 0;
    s_slc = 0; s_wrp = 0; s_skp = 0; s_rgr = 0; s_zgp = 0;
    for (int g = 0; g < NCFG; g++) begin
      checks   += cks[g];
      failures += fls[g];
      $display("N=%0d SLICE_CYCLES=%0d: %0d checks, %0d failures",
               CFG_N[g], CFG_S[g], cks[g], fls[g]);
      // Every configuration must hand the bus around and wrap.
      checks++;
      if (hit[g] == 0 || wrp[g] == 0 || term[g] == 0) begin
        failures++;
        $display("  configuration N=%0d saw no grant, wrap or release", CFG_N[g]);
      end
      s_hit += hit[g]; s_miss += miss[g]; s_term += term[g]; s_idle += idle[g];
      s_rst += rsts[g]; s_slc += slc[g]; s_wrp += wrp[g]; s_skp += skp[g];
      s_rgr += rgr[g]; s_zgp += zgp[g];
    end
    $display("mechanisms:");
    need("turn hit (cycles)",          s_hit);
    need("turn miss (device-cycles)",  s_miss);
    need("termination by request",     s_term);
    need("idle (cycles)",              s_idle);
    need("reset during operation",     s_rst);
    need("time slice run out",         s_slc);
    need("wrap last -> first",         s_wrp);
    need("skip of idle devices",       s_skp);
    need("re-grant of lone requester", s_rgr);
    need("hand-over, no lost cycle",   s_zgp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
