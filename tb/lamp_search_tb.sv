// lamp_search_tb: the machine's main workload, one associative search over one table.
// A 256-row table of 12-bit vectors is split over the sixteen nodes (node p holds rows
// 16p .. 16p+15) and the same query is given to every node. After one run, the
// system-wide best must be the first row of the whole table with the fewest mismatching
// coordinates: its crowded quality vector, 1s count, node and row are checked against a
// model, for several tables, including ones with an exact copy of the query, ties across
// nodes, and a query whose best row is the last one. The run time must be the same
// 130 commands + 1 cycle for any table, since all nodes search in parallel.
module lamp_search_tb;
  import lamp_pkg::*;
  localparam int N = 12;
  localparam int WPP = A_ROWS + 4;
  localparam int ROWS = NPROC * A_ROWS;

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

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_t prog [$];
    logic [N-1:0] table_a [ROWS];
    logic [N-1:0] m;
    logic [31:0] v;
    #22 rst_n = 1;
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
    foreach (prog[i]) wr(i, 32'(prog[i]));

    for (int t = 0; t < 6; t++) begin
      int best, bestc, polls;
      m = N'($urandom);
      for (int r = 0; r < ROWS; r++) begin
        // rows at distance 2..12 from the query, so ties are common
        table_a[r] = m ^ N'($urandom | $urandom);
        if (popc(table_a[r] ^ m) < 2) table_a[r] = ~m;
      end
      case (t)
        1: table_a[$urandom_range(0, ROWS - 1)] = m;           // exact copy
        2: begin table_a[37] = m ^ 12'h001; table_a[200] = m ^ 12'h800; end  // tie
        3: table_a[ROWS - 1] = m;                               // last row
        default: ;
      endcase
      best = 0; bestc = N + 1;
      for (int r = 0; r < ROWS; r++)
        if (popc(m ^ table_a[r]) < bestc) begin bestc = popc(m ^ table_a[r]); best = r; end
      for (int p = 0; p < NPROC; p++) begin
        for (int r = 0; r < A_ROWS; r++) wr(12'h200 + p * WPP + r, 32'(table_a[p * A_ROWS + r]));
        wr(12'h200 + p * WPP + A_ROWS, 32'(m));
      end
      wr(12'h400, 1);
      polls = 0;
      do begin rd(12'h400, v); polls++; end while (v[1] == 1'b0 && polls < 50000);
      chk("done", v[1], 1);
      rd(12'h401, v); chk("run cycles", v, 1 + 16 * 8 + 1 + 1);
      rd(12'h402, v); chk("best Q", v, thermo(bestc));
      rd(12'h403, v); chk("best ones", v, bestc);
      rd(12'h404, v); chk("best node", v, best / A_ROWS);
      rd(12'h405, v); chk("best row", v, best % A_ROWS);
      rd(12'h406, v); chk("valid", v, 1);
      $display("table %0d: best row %0d of %0d with %0d mismatches", t, best, ROWS, bestc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
