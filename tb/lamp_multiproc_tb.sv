// lamp_multiproc_tb: self-checking test of the 4x4 wrap-around matrix of sequencers.
// Part 1, links: every node gets a distinct random ma; for each of the eight directions
// a program SEND ma, RECV <direction> -> mb, HALT runs on all nodes at once, and each
// node's mb must equal ma of its neighbour in that direction, rows and columns wrapping
// around (the edge and corner nodes exercise the wrap).
// Part 2, concurrent search: each node gets its own random A-matrix and query and runs
// the associative search; every node's best row and its 1s count are checked, and all
// nodes must halt in the same cycle.
module lamp_multiproc_tb;
  import lamp_pkg::*;
  localparam int N = 12;

  logic clk = 0, rst_n = 0;
  logic cm_we = 0, a_we = 0, m_we = 0, start = 0;
  logic [CM_AW-1:0] cm_addr = '0;
  instr_t cm_wdata;
  logic [3:0] a_proc = '0, m_proc = '0;
  logic [ROW_W-1:0] a_addr = '0;
  logic [N-1:0] a_wdata = '0, m_wdata = '0;
  dst_e m_sel = D_MA;
  logic all_halted;
  logic [NPROC-1:0] busy, halted, best_valid;
  logic [N-1:0] m_out [NPROC][4];
  logic [N-1:0] best_q [NPROC];
  logic [$clog2(N+1)-1:0] best_ones [NPROC];
  logic [ROW_W-1:0] best_row [NPROC];
  int checks = 0, failures = 0;

  lamp_multiproc #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  function automatic instr_t I(opcode_e op, binop_e b = B_NOP, unop_e u = U_NOP,
                               src_e s1 = S_MA, src_e s2 = S_MA, dst_e d = D_MA,
                               int row = 0, int addr = 0);
    instr_t r;
    r.op = op; r.bop = b; r.uop = u; r.s1 = s1; r.s2 = s2; r.dst = d;
    r.row_imm = ROW_W'(row); r.addr_imm = CM_AW'(addr);
    return r;
  endfunction
  function automatic int popc(input logic [N-1:0] v);
    int c = 0;
    for (int i = 0; i < N; i++) c += int'(v[i]);
    return c;
  endfunction

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic load_prog(input instr_t p [$]);
    foreach (p[i]) begin
      @(negedge clk); cm_we = 1; cm_addr = CM_AW'(i); cm_wdata = p[i];
    end
    @(negedge clk); cm_we = 0;
  endtask

  task automatic set_m(input int p, input dst_e s, input logic [N-1:0] v);
    @(negedge clk); m_we = 1; m_proc = 4'(p); m_sel = s; m_wdata = v;
    @(negedge clk); m_we = 0;
  endtask

  task automatic run();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!all_halted) @(negedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] id [NPROC];
    int dr [8] = '{-1, -1, 0, 1, 1, 1, 0, -1};
    int dc [8] = '{ 0,  1, 1, 1, 0, -1, -1, -1};
    instr_t prog [$];
    cm_wdata = '0;
    #12 rst_n = 1;
    for (int p = 0; p < NPROC; p++) begin
      id[p] = N'($urandom);
      set_m(p, D_MA, id[p]);
    end
    for (int k = 0; k < 8; k++) begin
      prog = '{I(OP_SEND, B_NOP, U_NOP, S_MA), I(OP_RECV, B_NOP, U_NOP, src_e'(k), S_MA, D_MB),
               I(OP_HALT)};
      load_prog(prog);
      run();
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) begin
        automatic int nr = (r + dr[k] + 4) % 4, nc = (c + dc[k] + 4) % 4;
        chk($sformatf("link dir %0d node %0d%0d", k, r, c), m_out[r*4+c][1], id[nr*4+nc]);
      end
    end

    // concurrent search
    prog = '{I(OP_SETROW),
             I(OP_LP, B_AND, U_NOT, S_MA, S_A, D_MB),
             I(OP_LP, B_AND, U_NOP, S_A, S_MB, D_MC),
             I(OP_LP, B_AND, U_NOP, S_MA, S_MB, D_MD),
             I(OP_LP, B_OR,  U_NOP, S_MC, S_MD, D_MC),
             I(OP_LP, B_XOR, U_NOP, S_MA, S_A, D_MD),
             I(OP_LP, B_OR,  U_SLC, S_MD, S_MC, D_MD),
             I(OP_BEST, B_NOP, U_NOP, S_MD),
             I(OP_LOOP, B_NOP, U_NOP, S_MA, S_MA, D_MA, A_ROWS - 1, 1),
             I(OP_HALT)};
    load_prog(prog);
    for (int rep = 0; rep < 3; rep++) begin
      int eb [NPROC], ec [NPROC];
      for (int p = 0; p < NPROC; p++) begin
        automatic logic [N-1:0] q = N'($urandom);
        set_m(p, D_MA, q);
        ec[p] = N + 1;
        for (int r = 0; r < A_ROWS; r++) begin
          automatic logic [N-1:0] a = N'($urandom);
          @(negedge clk); a_we = 1; a_proc = 4'(p); a_addr = ROW_W'(r); a_wdata = a;
          if (popc(a ^ q) < ec[p]) begin ec[p] = popc(a ^ q); eb[p] = r; end
        end
        @(negedge clk); a_we = 0;
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (halted == '0) @(negedge clk);
      chk("all halt together", halted, {NPROC{1'b1}});
      for (int p = 0; p < NPROC; p++) begin
        chk($sformatf("node %0d best row", p), best_row[p], eb[p]);
        chk($sformatf("node %0d best ones", p), best_ones[p], ec[p]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
