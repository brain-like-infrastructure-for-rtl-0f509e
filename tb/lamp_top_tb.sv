// lamp_top_tb: end-to-end test of the whole LAMP at its default size (16 nodes, 12-bit
// vectors, 16-row A-matrices, 32-word command memories).
// Through the host port only, it writes the associative search program followed by a
// neighbour exchange (SEND ma, RECV from the east into mc) into the command memory, and
// for every node a random A-matrix and query into the data memory, then writes go and
// polls until done. Node 0 holds the paper's worked example: query m = 110011001100,
// row 0 = 000011110101 (quality 6 of 12) and every other row at distance 8 from m, so its
// best vector must be 111111000000 from row 0. Some nodes hold an exact copy of their
// query (best quality 0). For every node the best row, the crowded best vector, its 1s
// count, the query and the received vector are checked against a model, as is the
// system-wide best (node and row with the fewest 1s, lowest node on a tie), and the run
// time against the command count. Each mechanism is counted while it happens: loading
// of CM / A-matrix / m registers, the start pulse, each LP operation (and, or, xor, nop,
// not, slc), a decision that keeps and one that replaces the best, a taken and a
// fall-through loop, send and receive; one that never happened counts as a failure.
module lamp_top_tb;
  import lamp_pkg::*;
  localparam int N = 12;
  localparam int WPP = A_ROWS + 4;

  logic clk = 0, rst_n = 0;
  logic [11:0] host_addr = '0;
  logic host_we = 0;
  logic [31:0] host_wdata = '0, host_rdata;
  logic done;
  logic [NPROC-1:0] seq_busy, seq_halted;
  int checks = 0, failures = 0;

  lamp_top dut (.*);

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
  function automatic logic [N-1:0] thermo(input int k);
    logic [N-1:0] r = '0;
    for (int i = 0; i < k; i++) r[N-1-i] = 1'b1;
    return r;
  endfunction
  function automatic logic [N-1:0] flip_k(input logic [N-1:0] v, input int k);
    logic [N-1:0] r = v;                       // flip k distinct random coordinates
    int done_k = 0;
    while (done_k < k) begin
      int i = $urandom_range(0, N - 1);
      if (r[i] == v[i]) begin r[i] = ~r[i]; done_k++; end
    end
    return r;
  endfunction

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); host_addr = 12'(a); host_wdata = d; host_we = 1;
    @(negedge clk); host_we = 0;
  endtask
  task automatic rd(input int a, output logic [31:0] d);
    @(negedge clk); host_addr = 12'(a); #1 d = host_rdata;
  endtask

  // ---- mechanism counters (observed inside the design) ----
  int n_cm_load, n_a_load, n_m_load, n_start, n_and, n_or, n_xor, n_bnop, n_not, n_slc,
      n_unop, n_keep, n_replace, n_loop_taken, n_loop_end, n_send, n_recv;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.cm_we) n_cm_load++;
    if (dut.u_ctrl.a_we)  n_a_load++;
    if (dut.u_ctrl.m_we)  n_m_load++;
    if (dut.u_ctrl.start) n_start++;
  end

  for (genvar r = 0; r < PROWS; r++) begin : g_mr
    for (genvar c = 0; c < PCOLS; c++) begin : g_mc
      always @(posedge clk) if (rst_n && dut.u_mp.g_row[r].g_col[c].u_seq.busy) begin
        automatic instr_t ins = dut.u_mp.g_row[r].g_col[c].u_seq.ins;
        automatic logic   y   = dut.u_mp.g_row[r].g_col[c].u_seq.dec_y;
        automatic logic [ROW_W-1:0] rp = dut.u_mp.g_row[r].g_col[c].u_seq.rowptr;
        if (ins.op inside {OP_LP, OP_BEST, OP_SEND}) begin  // commands that use the LP
          case (ins.bop)
            B_AND: n_and++;
            B_OR:  n_or++;
            B_XOR: n_xor++;
            default: n_bnop++;
          endcase
          case (ins.uop)
            U_NOT: n_not++;
            U_SLC: n_slc++;
            default: n_unop++;
          endcase
        end
        if (ins.op == OP_BEST && dut.u_mp.g_row[r].g_col[c].u_seq.best_valid) begin
          if (y) n_replace++; else n_keep++;
        end
        if (ins.op == OP_LOOP) begin
          if (rp != ins.row_imm) n_loop_taken++; else n_loop_end++;
        end
        if (ins.op == OP_SEND) n_send++;
        if (ins.op == OP_RECV) n_recv++;
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_t prog [$];
    logic [N-1:0] q [NPROC];
    logic [N-1:0] amat [NPROC][A_ROWS];
    int eb [NPROC], ec [NPROC];
    logic [31:0] v;
    int polls;

    #22 rst_n = 1;

    prog = '{I(OP_SETROW),
             I(OP_LP, B_AND, U_NOT, S_MA, S_A, D_MB),   // not(m and A)
             I(OP_LP, B_AND, U_NOP, S_A, S_MB, D_MC),   // mu(m in A)
             I(OP_LP, B_AND, U_NOP, S_MA, S_MB, D_MD),  // mu(A in m)
             I(OP_LP, B_OR,  U_NOP, S_MC, S_MD, D_MC),
             I(OP_LP, B_XOR, U_NOP, S_MA, S_A, D_MD),   // d(m, A)
             I(OP_LP, B_OR,  U_SLC, S_MD, S_MC, D_MD),  // Q, crowded
             I(OP_BEST, B_NOP, U_NOP, S_MD),
             I(OP_LOOP, B_NOP, U_NOP, S_MA, S_MA, D_MA, A_ROWS - 1, 1),
             I(OP_SEND, B_NOP, U_NOP, S_MA),
             I(OP_RECV, B_NOP, U_NOP, src_e'(DIR_E), S_MA, D_MC),
             I(OP_HALT)};
    foreach (prog[i]) wr(i, 32'(prog[i]));
    for (int i = prog.size(); i < CM_DEPTH; i++) wr(i, 32'(I(OP_HALT)));

    for (int p = 0; p < NPROC; p++) begin
      q[p] = (p == 0) ? 12'b110011001100 : N'($urandom);
      for (int r = 0; r < A_ROWS; r++) begin
        if (p == 0) amat[p][r] = (r == 0) ? 12'b000011110101 : flip_k(q[p], 8);
        else        amat[p][r] = N'($urandom);
      end
      if (p % 5 == 3) amat[p][$urandom_range(0, A_ROWS - 1)] = q[p];  // exact match
      ec[p] = N + 1;
      for (int r = 0; r < A_ROWS; r++)
        if (popc(q[p] ^ amat[p][r]) < ec[p]) begin ec[p] = popc(q[p] ^ amat[p][r]); eb[p] = r; end
    end
    for (int p = 0; p < NPROC; p++) begin
      for (int r = 0; r < A_ROWS; r++) wr(12'h200 + p * WPP + r, 32'(amat[p][r]));
      wr(12'h200 + p * WPP + A_ROWS, 32'(q[p]));          // ma
      for (int k = 1; k < 4; k++) wr(12'h200 + p * WPP + A_ROWS + k, 0);
    end

    // read back part of what was written (A rows of node 5, a command word)
    for (int r = 0; r < A_ROWS; r++) begin
      rd(12'h200 + 5 * WPP + r, v); chk("A read-back", v, amat[5][r]);
    end
    rd(12'h007, v); chk("command read-back", v, 32'(prog[7]));

    wr(12'h400, 1);
    polls = 0;
    do begin rd(12'h400, v); polls++; end while (v[1] == 1'b0 && polls < 50000);
    chk("done", v[1], 1);
    chk("done pin", done, 1);
    chk("all halted", seq_halted, {NPROC{1'b1}});
    rd(12'h401, v);
    // SETROW, 16 rows of 8 commands, SEND, RECV, HALT, plus the cycle that sees all halted
    chk("run cycles", v, 1 + 16 * 8 + 3 + 1);

    for (int p = 0; p < NPROC; p++) begin
      automatic int r = p / 4, c = p % 4;
      automatic int east = r * 4 + (c + 1) % 4;
      rd(12'h600 + p * 16 + 0, v); chk($sformatf("node %0d best q", p), v, thermo(ec[p]));
      rd(12'h600 + p * 16 + 1, v); chk($sformatf("node %0d ones", p), v, ec[p]);
      rd(12'h600 + p * 16 + 2, v); chk($sformatf("node %0d row", p), v, eb[p]);
      rd(12'h600 + p * 16 + 3, v); chk($sformatf("node %0d valid", p), v, 1);
      rd(12'h600 + p * 16 + 4, v); chk($sformatf("node %0d ma", p), v, q[p]);
      rd(12'h600 + p * 16 + 6, v); chk($sformatf("node %0d mc from east", p), v, q[east]);
    end
    // system-wide best: first node, in node order, with the fewest 1s
    begin
      automatic int gn = 0;
      for (int p = 1; p < NPROC; p++) if (ec[p] < ec[gn]) gn = p;
      rd(12'h402, v); chk("global best q", v, thermo(ec[gn]));
      rd(12'h403, v); chk("global best ones", v, ec[gn]);
      rd(12'h404, v); chk("global best node", v, gn);
      rd(12'h405, v); chk("global best row", v, eb[gn]);
      rd(12'h406, v); chk("global best valid", v, 1);
    end
    // the paper's example on node 0
    rd(12'h600 + 0, v); chk("example Q(m,A) = 6/12", v, 12'b111111000000);

    // every mechanism must have happened
    chk("seen cm load", n_cm_load > 0, 1);   chk("seen a load", n_a_load > 0, 1);
    chk("seen m load", n_m_load > 0, 1);     chk("seen start", n_start, 1);
    chk("seen and", n_and > 0, 1);           chk("seen or", n_or > 0, 1);
    chk("seen xor", n_xor > 0, 1);           chk("seen binary nop", n_bnop > 0, 1);
    chk("seen not", n_not > 0, 1);           chk("seen slc", n_slc > 0, 1);
    chk("seen unary nop", n_unop > 0, 1);
    chk("seen decision keep", n_keep > 0, 1); chk("seen decision replace", n_replace > 0, 1);
    chk("seen loop taken", n_loop_taken > 0, 1); chk("seen loop end", n_loop_end, NPROC);
    chk("seen send", n_send, NPROC);         chk("seen recv", n_recv, NPROC);
    $display("mechanisms: cm=%0d a=%0d m=%0d start=%0d and=%0d or=%0d xor=%0d not=%0d slc=%0d keep=%0d replace=%0d loop=%0d/%0d send=%0d recv=%0d",
             n_cm_load, n_a_load, n_m_load, n_start, n_and, n_or, n_xor, n_not, n_slc,
             n_keep, n_replace, n_loop_taken, n_loop_end, n_send, n_recv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
