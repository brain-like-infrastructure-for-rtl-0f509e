// lamp_global_best_tb: self-checking test of the system-wide best selection.
// Fills the sixteen node results with random crowded vectors, rows and valid bits (with
// many ties and invalid nodes) and checks the chosen vector, its 1s count, node, row and
// valid flag against a model: among the valid nodes, the one with the fewest 1s, the
// lowest node number on a tie; nothing valid when no node is.
module lamp_global_best_tb;
  import lamp_pkg::*;
  localparam int N = 12;
  logic [N-1:0] best_q [NPROC];
  logic [ROW_W-1:0] best_row [NPROC];
  logic [NPROC-1:0] best_valid;
  logic [N-1:0] g_q;
  logic [$clog2(N+1)-1:0] g_ones;
  logic [3:0] g_node;
  logic [ROW_W-1:0] g_row;
  logic g_valid;
  int checks = 0, failures = 0;

  lamp_global_best #(.N(N)) dut (.*);

  function automatic logic [N-1:0] thermo(input int k);
    logic [N-1:0] r = '0;
    for (int i = 0; i < k; i++) r[N-1-i] = 1'b1;
    return r;
  endfunction

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int cnt [NPROC];
      int bn;
      for (int p = 0; p < NPROC; p++) begin
        cnt[p] = (t % 2 == 0) ? $urandom_range(0, N) : $urandom_range(3, 5);
        best_q[p] = thermo(cnt[p]);
        best_row[p] = ROW_W'($urandom);
      end
      best_valid = (t % 7 == 0) ? NPROC'(0) : NPROC'($urandom | (t % 3 == 0 ? 32'hffff : 0));
      #1;
      bn = -1;
      for (int p = 0; p < NPROC; p++)
        if (best_valid[p] && (bn < 0 || cnt[p] < cnt[bn])) bn = p;
      chk("valid", g_valid, bn >= 0);
      if (bn >= 0) begin
        chk("q", g_q, thermo(cnt[bn]));
        chk("ones", g_ones, cnt[bn]);
        chk("node", g_node, bn);
        chk("row", g_row, best_row[bn]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
