// lamp_decision_tb: self-checking test of the decision circuit.
// Checks the worked example (Q1 with 6 of 12 ones, Q2 with 8: Q1 is kept, Y = 0), the
// reverse order, a tie, and all pairs of crowded 12-bit vectors, where the vector with
// fewer 1s must be chosen (Q1 on a tie); then random unsorted pairs against
// Y = 1 exactly when some coordinate has Q1 = 1 and Q2 = 0.
module lamp_decision_tb;
  localparam int N = 12;
  logic [N-1:0] q1, q2, q;
  logic y;
  int checks = 0, failures = 0;

  lamp_decision #(.N(N)) dut (.q1, .q2, .y, .q);

  function automatic logic [N-1:0] thermo(input int k);  // k ones at the left end
    logic [N-1:0] r = '0;
    for (int i = 0; i < k; i++) r[N-1-i] = 1'b1;
    return r;
  endfunction

  task automatic check(input string what, input logic goty, input logic [N-1:0] gotq,
                       input logic expy, input logic [N-1:0] expq);
    checks++;
    if (goty !== expy || gotq !== expq) begin
      failures++;
      $display("FAIL %s: q1=%b q2=%b got y=%b q=%b expected y=%b q=%b",
               what, q1, q2, goty, gotq, expy, expq);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    q1 = 12'b111111000000; q2 = 12'b111111110000; #1;
    check("example", y, q, 1'b0, 12'b111111000000);
    q1 = 12'b111111110000; q2 = 12'b111111000000; #1;
    check("reverse", y, q, 1'b1, 12'b111111000000);
    for (int i = 0; i <= N; i++) begin
      for (int j = 0; j <= N; j++) begin
        q1 = thermo(i); q2 = thermo(j); #1;
        check("crowded", y, q, (i > j), (i > j) ? thermo(j) : thermo(i));
      end
    end
    for (int t = 0; t < 1000; t++) begin
      logic ey;
      q1 = N'($urandom); q2 = N'($urandom); #1;
      ey = 1'b0;
      for (int i = 0; i < N; i++) if (q1[i] && !q2[i]) ey = 1'b1;
      check("random", y, q, ey, ey ? q2 : q1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
