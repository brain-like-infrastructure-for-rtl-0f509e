// lamp_ctrl_tb: self-checking test of the control block.
// The command and data memories are modelled by functions of the read address. The test
// records every write the block makes towards the multiprocessor and checks that CM word
// k of every node gets command word k, that data word p*20 + w goes to node p (A-matrix
// row w for w < 16, m register w - 16 otherwise), that each target is written exactly
// once, that start is a single pulse after all loading, that the phases take 32 + 320 + 1
// cycles, that run_cycles counts the cycles until all_halted (raised by the test after a
// random delay) and that done stays up until the next go. Two runs are made.
module lamp_ctrl_tb;
  import lamp_pkg::*;
  localparam int N = 12;
  localparam int WPP = A_ROWS + 4;

  logic clk = 0, rst_n = 0, go = 0, all_halted = 1;
  logic busy, done, start;
  logic [31:0] run_cycles;
  logic [CM_AW-1:0] cmem_raddr, cm_addr;
  instr_t cmem_rdata, cm_wdata;
  logic [$clog2(NPROC*WPP)-1:0] dmem_raddr;
  logic [N-1:0] dmem_rdata, a_wdata, m_wdata;
  logic cm_we, a_we, m_we;
  logic [3:0] a_proc, m_proc;
  logic [ROW_W-1:0] a_addr;
  dst_e m_sel;
  int checks = 0, failures = 0;

  lamp_ctrl #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  function automatic instr_t cword(input int k);
    return instr_t'(25'(k * 32'h9e3779b1 + 7));
  endfunction
  function automatic logic [N-1:0] dword(input int a);
    return N'(a * 37 + 5) ^ N'(a >> 3);
  endfunction
  assign cmem_rdata = cword(int'(cmem_raddr));
  assign dmem_rdata = dword(int'(dmem_raddr));

  int cm_cnt [CM_DEPTH];
  int a_cnt [NPROC][A_ROWS];
  int m_cnt [NPROC][4];
  int starts, cyc, start_cyc, go_cyc, cm_last, dm_last;
  bit cm_ok, a_ok, m_ok, order_ok;

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // monitor
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (cm_we) begin
      cm_cnt[cm_addr]++;
      if (cm_wdata != cword(int'(cm_addr))) cm_ok = 0;
      cm_last = cyc;
    end
    if (a_we) begin
      a_cnt[a_proc][a_addr]++;
      if (a_wdata != dword(int'(a_proc) * WPP + int'(a_addr))) a_ok = 0;
      dm_last = cyc;
    end
    if (m_we) begin
      m_cnt[m_proc][m_sel]++;
      if (m_wdata != dword(int'(m_proc) * WPP + A_ROWS + int'(m_sel))) m_ok = 0;
      dm_last = cyc;
    end
    if (start) begin
      starts++;
      start_cyc = cyc;
      if (dm_last >= cyc || cm_last >= cyc) order_ok = 0;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #12 rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      int dly;
      cm_cnt = '{default: 0}; a_cnt = '{default: 0}; m_cnt = '{default: 0};
      starts = 0; cm_ok = 1; a_ok = 1; m_ok = 1; order_ok = 1;
      dly = $urandom_range(3, 200);
      @(negedge clk); go = 1; go_cyc = cyc + 1;
      @(negedge clk); go = 0; all_halted = 0;
      chk("busy after go", busy, 1);
      while (!start) @(negedge clk);
      repeat (dly) @(negedge clk);
      all_halted = 1;
      while (!done) @(negedge clk);
      chk("starts", starts, 1);
      chk("load+start cycles", start_cyc - go_cyc, CM_DEPTH + NPROC * WPP + 1);
      chk("run_cycles", run_cycles, dly);
      chk("cm data", cm_ok, 1); chk("a data", a_ok, 1); chk("m data", m_ok, 1);
      chk("order", order_ok, 1);
      foreach (cm_cnt[k]) chk("cm once", cm_cnt[k], 1);
      foreach (a_cnt[p, r]) chk("a once", a_cnt[p][r], 1);
      foreach (m_cnt[p, s]) chk("m once", m_cnt[p][s], 1);
      repeat (5) @(negedge clk);
      chk("done holds", done, 1);
      chk("not busy", busy, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
