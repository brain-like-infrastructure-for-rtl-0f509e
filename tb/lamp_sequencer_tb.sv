// lamp_sequencer_tb: self-checking test of one sequencer.
// Program 1 is the associative search P(m, A) = min_i Q_i(m, A_i) written with the LP's
// operations only (formulas of the quality unit, then slc, then the decision circuit):
//   0 SETROW 0
//   1 mb = not(ma and A)      2 mc = A and mb         3 md = ma and mb
//   4 mc = mc or md           5 md = ma xor A         6 md = slc(md or mc)
//   7 BEST md                 8 LOOP to 1 until row 15
//   9 SEND md                10 HALT
// For random A-matrices and queries the test checks the best row (first row with the
// fewest 1s in Q), the crowded best vector, its 1s count, the final m registers, the
// exchange register and the run time: one clock to take start, then one per command:
// 1 + (1 + 16*8 + 2) = 132 clocks from the start edge until halted is seen.
// The paper's 12-bit worked example is run row by row of its table.
// Program 2 receives from each of the eight neighbour inputs in turn and checks the
// copies, and checks that loads are ignored while running.
module lamp_sequencer_tb;
  import lamp_pkg::*;
  localparam int N = 12;

  logic clk = 0, rst_n = 0;
  logic cm_we = 0, a_we = 0, m_we = 0, start = 0;
  logic [CM_AW-1:0] cm_addr = '0;
  instr_t cm_wdata;
  logic [ROW_W-1:0] a_addr = '0;
  logic [N-1:0] a_wdata = '0, m_wdata = '0;
  dst_e m_sel = D_MA;
  logic busy, halted, best_valid;
  logic [N-1:0] xin [8];
  logic [N-1:0] xout, best_q;
  logic [N-1:0] m_out [4];
  logic [$clog2(N+1)-1:0] best_ones;
  logic [ROW_W-1:0] best_row;
  int checks = 0, failures = 0;

  lamp_sequencer #(.N(N)) dut (.*);

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

  task automatic run(output int cycles);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!halted) begin
      @(negedge clk); cycles++;
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_t prog [$];
    logic [N-1:0] amat [A_ROWS];
    logic [N-1:0] m;
    int cycles;
    for (int k = 0; k < 8; k++) xin[k] = N'(12'h111 * (k + 1));
    cm_wdata = '0;
    #12 rst_n = 1;

    prog = '{I(OP_SETROW),
             I(OP_LP, B_AND, U_NOT, S_MA, S_A, D_MB),
             I(OP_LP, B_AND, U_NOP, S_A, S_MB, D_MC),
             I(OP_LP, B_AND, U_NOP, S_MA, S_MB, D_MD),
             I(OP_LP, B_OR,  U_NOP, S_MC, S_MD, D_MC),
             I(OP_LP, B_XOR, U_NOP, S_MA, S_A, D_MD),
             I(OP_LP, B_OR,  U_SLC, S_MD, S_MC, D_MD),
             I(OP_BEST, B_NOP, U_NOP, S_MD),
             I(OP_LOOP, B_NOP, U_NOP, S_MA, S_MA, D_MA, A_ROWS - 1, 1),
             I(OP_SEND, B_NOP, U_NOP, S_MD),
             I(OP_HALT)};
    load_prog(prog);

    for (int t = 0; t < 200; t++) begin
      int best, bestc;
      m = N'($urandom);
      for (int r = 0; r < A_ROWS; r++) begin
        amat[r] = N'($urandom);
        if (t % 3 == 0 && r == t % A_ROWS) amat[r] = m;  // sometimes an exact match
        @(negedge clk); a_we = 1; a_addr = ROW_W'(r); a_wdata = amat[r];
      end
      @(negedge clk); a_we = 0; m_we = 1; m_sel = D_MA; m_wdata = m;
      @(negedge clk); m_we = 0;
      best = 0; bestc = N + 1;
      for (int r = 0; r < A_ROWS; r++)
        if (popc(m ^ amat[r]) < bestc) begin bestc = popc(m ^ amat[r]); best = r; end
      run(cycles);
      chk("cycles", cycles, 132);
      chk("best_valid", best_valid, 1);
      chk("best_row", best_row, best);
      chk("best_q", best_q, thermo(bestc));
      chk("best_ones", best_ones, bestc);
      chk("ma kept", m_out[0], m);
      chk("md last row", m_out[3], thermo(popc(m ^ amat[A_ROWS-1])));
      chk("xout", xout, thermo(popc(m ^ amat[A_ROWS-1])));
      chk("busy low", busy, 0);
    end

    // The paper's worked example, one row: m = 110011001100, A_0 = 000011110101.
    // The m registers must hold the rows of its table: not(m and A), mu(m in A),
    // mu(A in m), then d(m, A), Q and Q crowded to 6 of 12.
    @(negedge clk); a_we = 1; a_addr = '0; a_wdata = 12'b000011110101;
    @(negedge clk); a_we = 0; m_we = 1; m_sel = D_MA; m_wdata = 12'b110011001100;
    @(negedge clk); m_we = 0;
    prog = '{I(OP_SETROW),
             I(OP_LP, B_AND, U_NOT, S_MA, S_A, D_MB),
             I(OP_LP, B_AND, U_NOP, S_A, S_MB, D_MC),
             I(OP_LP, B_AND, U_NOP, S_MA, S_MB, D_MD),
             I(OP_HALT)};
    load_prog(prog);
    run(cycles);
    chk("example not(m and A)", m_out[1], 12'b111100111011);
    chk("example mu(m in A)",   m_out[2], 12'b000000110001);
    chk("example mu(A in m)",   m_out[3], 12'b110000001000);
    prog = '{I(OP_LP, B_XOR, U_NOP, S_MA, S_A, D_MB),
             I(OP_LP, B_OR,  U_NOP, S_MC, S_MD, D_MC),
             I(OP_LP, B_OR,  U_NOP, S_MB, S_MC, D_MD),
             I(OP_LP, B_NOP, U_SLC, S_MD, S_MA, D_MC),
             I(OP_HALT)};
    load_prog(prog);
    run(cycles);
    chk("example d(m, A)", m_out[1], 12'b110000111001);
    chk("example Q",       m_out[3], 12'b110000111001);
    chk("example Q = 6/12 crowded", m_out[2], 12'b111111000000);

    // Program 2: neighbour exchange.
    prog.delete();
    for (int k = 0; k < 8; k++) begin
      prog.push_back(I(OP_RECV, B_NOP, U_NOP, src_e'(k), S_MA, D_MC));
      prog.push_back(I(OP_LP, B_XOR, U_NOP, S_MC, S_MB, D_MB));  // mb accumulates xor
    end
    prog.push_back(I(OP_SEND, B_NOP, U_NOP, S_MB));
    prog.push_back(I(OP_HALT));
    load_prog(prog);
    @(negedge clk); m_we = 1; m_sel = D_MB; m_wdata = '0;
    @(negedge clk); m_we = 0;
    begin
      logic [N-1:0] acc = '0;
      for (int k = 0; k < 8; k++) acc ^= xin[k];
      run(cycles);
      chk("recv cycles", cycles, 19);
      chk("recv last", m_out[2], xin[7]);
      chk("recv xor", m_out[1], acc);
      chk("recv xout", xout, acc);
    end

    // Loads are ignored while running: start a long program and write ma.
    prog.delete();
    for (int k = 0; k < 20; k++) prog.push_back(I(OP_NOP));
    prog.push_back(I(OP_HALT));
    load_prog(prog);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0; m_we = 1; m_sel = D_MA; m_wdata = ~m_out[0];
    @(negedge clk); m_we = 0;
    chk("load ignored", m_out[0] == ~m_wdata, 1);
    while (!halted) @(negedge clk);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
