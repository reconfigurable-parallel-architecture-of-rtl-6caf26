// tb_rr_output - exhaustive test of the arbiter output logic.
//
// For N = 6 every token value (each one-hot position, plus all-zero and a
// two-hot pattern) is combined with all 64 request patterns. The expected
// grant is built bit by bit: device i is acknowledged exactly when its
// token bit and its request bit are both 1; `granted` must be 1 exactly when
// some device is acknowledged.
module tb_rr_output;

  localparam int unsigned N = 6;

  logic [N-1:0] token, req, gnt, exp_gnt;
  logic         granted;
  int checks = 0, failures = 0;

  rr_output #(.N(N)) dut (.token(token), .req(req), .gnt(gnt), .granted(granted));

  initial begin
    logic [N-1:0] tokens [N+2];
    for (int t = 0; t < N; t++) tokens[t] = N'(1) << t;
    tokens[N]   = '0;
    tokens[N+1] = 6'b100001;
    for (int t = 0; t < N + 2; t++) begin
      for (int r = 0; r < (1 << N); r++) begin
        token = tokens[t];
        req   = N'(r);
        #1;
        for (int i = 0; i < N; i++) exp_gnt[i] = (token[i] == 1'b1) && (req[i] == 1'b1);
        checks++;
        if (gnt !== exp_gnt || granted !== (exp_gnt != 0)) begin
          failures++;
          $display("token=%b req=%b: gnt=%b granted=%b, expected %b", token, req, gnt, granted, exp_gnt);
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
