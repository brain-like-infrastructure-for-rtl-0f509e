// lamp_host_if_tb: self-checking test of the host interface address map.
// Checks that writes to the command memory, data memory and go addresses raise exactly
// the matching strobe with the right address and data (and nothing elsewhere), and that
// every read address returns the status, run cycle count, system-wide best or per-node
// result it maps to,
// with the result arrays filled with random values, and that the command and data
// memories read back while the control block is idle and read 0 while it is busy.
module lamp_host_if_tb;
  import lamp_pkg::*;
  localparam int N = 12;

  logic clk = 0, rst_n = 0;
  logic [11:0] host_addr;
  logic host_we;
  logic [31:0] host_wdata, host_rdata;
  logic cmem_we, dmem_we, go;
  logic [CM_AW-1:0] cmem_waddr;
  instr_t cmem_wdata;
  logic [$clog2(NPROC*(A_ROWS+4))-1:0] dmem_waddr;
  logic [N-1:0] dmem_wdata;
  logic [CM_AW-1:0] cmem_raddr;
  logic [$clog2(NPROC*(A_ROWS+4))-1:0] dmem_raddr;
  instr_t cmem_rdata;
  logic [N-1:0] dmem_rdata;
  logic busy = 0, done = 0;
  logic [31:0] run_cycles;
  logic [NPROC-1:0] seq_busy, seq_halted, best_valid;
  logic [N-1:0] m_out [NPROC][4];
  logic [N-1:0] best_q [NPROC];
  logic [$clog2(N+1)-1:0] best_ones [NPROC];
  logic [ROW_W-1:0] best_row [NPROC];
  logic [N-1:0] g_q;
  logic [$clog2(N+1)-1:0] g_ones;
  logic [3:0] g_node;
  logic [ROW_W-1:0] g_row;
  logic g_valid;
  int checks = 0, failures = 0;

  lamp_host_if #(.N(N)) dut (.*);

  // memory models: the read data is a function of the read address
  assign cmem_rdata = instr_t'(25'(cmem_raddr * 7 + 3));
  assign dmem_rdata = N'(dmem_raddr * 5 + 1);

  always #5 clk = ~clk;

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s (addr %h): got %0h expected %0h", what, host_addr, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    host_we = 0; host_addr = '0; host_wdata = '0;
    run_cycles = $urandom;
    seq_busy = NPROC'($urandom); seq_halted = NPROC'($urandom); best_valid = NPROC'($urandom);
    for (int p = 0; p < NPROC; p++) begin
      for (int k = 0; k < 4; k++) m_out[p][k] = N'($urandom);
      best_q[p] = N'($urandom); best_ones[p] = 4'($urandom_range(0, N));
      best_row[p] = ROW_W'($urandom);
    end
    g_q = N'($urandom); g_ones = 4'($urandom); g_node = 4'($urandom);
    g_row = ROW_W'($urandom); g_valid = 1'($urandom);
    #12 rst_n = 1;
    // writes
    for (int t = 0; t < 300; t++) begin
      automatic logic [11:0] a = 12'($urandom);
      if (t < 32) a = 12'h000 + 12'(t);
      else if (t < 64) a = 12'h200 + 12'($urandom_range(0, 319));
      else if (t < 70) a = 12'h400;
      host_addr = a; host_wdata = $urandom; host_we = 1; #1;
      chk("cmem_we", cmem_we, a[11:9] == 0);
      chk("dmem_we", dmem_we, a[11:9] == 1 && a[8:0] < 320);
      chk("go", go, a == 12'h400 && host_wdata[0]);
      if (cmem_we) begin
        chk("cmem addr", cmem_waddr, a[4:0]);
        chk("cmem data", cmem_wdata, host_wdata[24:0]);
      end
      if (dmem_we) begin
        chk("dmem addr", dmem_waddr, a[8:0]);
        chk("dmem data", dmem_wdata, host_wdata[N-1:0]);
      end
      host_we = 0; #1;
      chk("no strobe without we", {cmem_we, dmem_we, go}, 0);
    end
    // reads
    busy = 1; done = 0;
    host_addr = 12'h400; #1; chk("status", host_rdata, 32'b01);
    busy = 0; done = 1; #1; chk("status", host_rdata, 32'b10);
    host_addr = 12'h401; #1; chk("run cycles", host_rdata, run_cycles);
    host_addr = 12'h402; #1; chk("global q", host_rdata, g_q);
    host_addr = 12'h403; #1; chk("global ones", host_rdata, g_ones);
    host_addr = 12'h404; #1; chk("global node", host_rdata, g_node);
    host_addr = 12'h405; #1; chk("global row", host_rdata, g_row);
    host_addr = 12'h406; #1; chk("global valid", host_rdata, g_valid);
    for (int p = 0; p < NPROC; p++) begin
      for (int i = 0; i < 9; i++) begin
        host_addr = 12'h600 + 12'(p * 16 + i); #1;
        case (i)
          0: chk("best_q", host_rdata, best_q[p]);
          1: chk("best_ones", host_rdata, best_ones[p]);
          2: chk("best_row", host_rdata, best_row[p]);
          3: chk("best_valid", host_rdata, best_valid[p]);
          8: chk("node status", host_rdata, {seq_busy[p], seq_halted[p]});
          default: chk("m reg", host_rdata, m_out[p][i-4]);
        endcase
      end
    end
    host_addr = 12'h3ff; #1; chk("unmapped", host_rdata, 0);
    host_addr = 12'h340; #1; chk("past data memory", host_rdata, 0);
    // memory read-back, only while idle
    busy = 0;
    for (int k = 0; k < 32; k++) begin
      host_addr = 12'(k); #1; chk("cmem read", host_rdata, 25'(k * 7 + 3));
    end
    for (int a = 0; a < 320; a += 7) begin
      host_addr = 12'h200 + 12'(a); #1; chk("dmem read", host_rdata, N'(a * 5 + 1));
    end
    busy = 1;
    host_addr = 12'h005; #1; chk("cmem read while busy", host_rdata, 0);
    host_addr = 12'h205; #1; chk("dmem read while busy", host_rdata, 0);
    busy = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
