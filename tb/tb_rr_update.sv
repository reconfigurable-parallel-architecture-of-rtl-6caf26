// tb_rr_update - test of the arbiter update (next token) logic.
//
// For N = 6 it goes through every token position, every request pattern
// and both values of `granted` and `slice_done` (768 combinations, with
// granted forced consistent with token & req). The expected next token is
// found by rotating the request vector so that the device after the holder
// comes first and taking the lowest set bit, rotated back; the holder is
// kept while it is granted and its slice has not ended, and with no request
// the token stays.
module tb_rr_update;

  localparam int unsigned N = 6;

  logic [N-1:0] token, req, next_token, expected;
  logic         granted, slice_done;
  int checks = 0, failures = 0;

  rr_update #(.N(N)) dut (
    .token(token), .req(req), .granted(granted),
    .slice_done(slice_done), .next_token(next_token)
  );

  function automatic logic [N-1:0] ref_next(int unsigned pos, logic [N-1:0] r,
                                            logic g, logic sd);
    logic [2*N-1:0] dbl;
    logic [N-1:0]   rot;
    int unsigned    k;
    if (g && !sd) return N'(1) << pos;
    if (r == '0)  return N'(1) << pos;
    dbl = {r, r} >> ((pos + 1) % N);     // bit 0 = device pos+1
    rot = dbl[N-1:0];
    k = 0;
    while (!rot[k]) k++;
    return N'(1) << ((pos + 1 + k) % N);
  endfunction

  initial begin
    for (int unsigned pos = 0; pos < N; pos++) begin
      for (int r = 0; r < (1 << N); r++) begin
        for (int sd = 0; sd < 2; sd++) begin
          token      = N'(1) << pos;
          req        = N'(r);
          granted    = req[pos];
          slice_done = sd[0] & granted;
          #1;
          expected = ref_next(pos, req, granted, slice_done);
          checks++;
          if (next_token !== expected) begin
            failures++;
            if (failures < 10)
              $display("token=%b req=%b granted=%b slice_done=%b: next=%b, expected %b",
                       token, req, granted, slice_done, next_token, expected);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000;
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
