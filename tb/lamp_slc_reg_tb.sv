// lamp_slc_reg_tb: self-checking test of the shift-left compaction register.
// Loads a vector, compacts it in a single clock and checks that the register then holds
// a left-aligned run of as many 1s as were loaded, and that the index of its rightmost 1
// equals that number. Starts with the worked example (Q = 110000111001 gives 6 of 12,
// 111111000000), then all-zero, all-one and 1000 random vectors; checks clear, hold and
// that compacting an already crowded vector leaves it unchanged.
module lamp_slc_reg_tb;
  localparam int N = 12;
  logic clk = 0, rst_n = 0, clr = 0, load = 0, compact = 0;
  logic [N-1:0] d, q;
  logic [$clog2(N+1)-1:0] ones;
  int checks = 0, failures = 0;

  lamp_slc_reg #(.N(N)) dut (.clk, .rst_n, .clr, .load, .compact, .d, .q, .ones);

  always #5 clk = ~clk;

  function automatic int popc(input logic [N-1:0] v);
    int c = 0;
    for (int i = 0; i < N; i++) c += int'(v[i]);
    return c;
  endfunction
  function automatic logic [N-1:0] thermo(input int k);
    logic [N-1:0] r = '0;
    for (int i = 0; i < k; i++) r[N-1-i] = 1'b1;
    return r;
  endfunction

  task automatic check(input string what, input logic [N-1:0] gotq, input int goto,
                       input logic [N-1:0] expq, input int expo);
    checks++;
    if (gotq !== expq || goto != expo) begin
      failures++;
      $display("FAIL %s: got q=%b ones=%0d expected q=%b ones=%0d", what, gotq, goto, expq, expo);
    end
  endtask

  task automatic load_and_compact(input logic [N-1:0] v);
    @(negedge clk); d = v; load = 1; compact = 0;
    @(negedge clk); load = 0;
    check("loaded", q, int'(ones), v, popc(v));
    compact = 1;
    @(negedge clk); compact = 0;     // exactly one clock of compaction
    check("compacted", q, int'(ones), thermo(popc(v)), popc(v));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '0;
    #12 rst_n = 1;
    load_and_compact(12'b110000111001);
    check("example 6/12", q, int'(ones), 12'b111111000000, 6);
    load_and_compact('0);
    load_and_compact('1);
    for (int t = 0; t < 1000; t++) load_and_compact(N'($urandom));
    // compacting a crowded vector keeps it
    @(negedge clk); compact = 1;
    @(negedge clk); compact = 0;
    check("recompact", q, int'(ones), thermo(popc(q)), popc(q));
    // hold
    @(negedge clk); d = 12'h0f0;
    @(negedge clk);
    check("hold", q, int'(ones), thermo(popc(q)), popc(q));
    // clear has priority over load
    @(negedge clk); clr = 1; load = 1;
    @(negedge clk); clr = 0; load = 0;
    check("clear", q, int'(ones), '0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
