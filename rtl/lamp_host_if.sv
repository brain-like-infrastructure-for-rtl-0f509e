// lamp_host_if: host interface of the LAMP (loading and result read-out).
//
// A simple memory-mapped port with 32-bit data. Writes are acted on at the rising edge
// when host_we is high; host_rdata is combinational from host_addr. Address map
// (addr[11:9] selects the region):
//   0x000 + k        write: command memory word k (lamp_pkg::instr_t in the low bits);
//                    read: the same word (while the control block is idle)
//   0x200 + p*20 + w write: data memory word (node p; w < 16 row A_w, w = 16..19 ma..md);
//                    read: the same word (while the control block is idle); addresses
//                    past the last word (0x340..0x3ff) are ignored and read 0
//   0x400            write bit 0 = 1: go (start loading and running);
//                    read: bit 0 busy, bit 1 done
//   0x401            read: cycles the last run took (start to all halted)
//   0x402..0x406     read: system-wide best (lamp_global_best): vector, its number of 1s,
//                    node, row, valid
//   0x600 + p*16 + i read, node p: i=0 best quality vector, 1 its number of 1s, 2 its row,
//                    3 best valid, 4..7 ma..md, 8 {busy, halted}
// Other addresses, and the memories while the control block is busy, read 0. The paper says the interface exchanges data and loads the
// memories, and that A and ma..md are the system's inputs and outputs (here A can be read
// back from the data memory, ma..md from the nodes); this address map and port are this
// design's own.
module lamp_host_if
  import lamp_pkg::*;
#(
  parameter int unsigned N = 12
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [11:0]            host_addr,
  input  logic                   host_we,
  input  logic [31:0]            host_wdata,
  output logic [31:0]            host_rdata,
  // memories
  output logic                   cmem_we,
  output logic [CM_AW-1:0]       cmem_waddr,
  output instr_t                 cmem_wdata,
  output logic                   dmem_we,
  output logic [$clog2(NPROC*(A_ROWS+4))-1:0] dmem_waddr,
  output logic [N-1:0]           dmem_wdata,
  output logic [CM_AW-1:0]       cmem_raddr,   // host read addresses; the top gives the
  output logic [$clog2(NPROC*(A_ROWS+4))-1:0] dmem_raddr,  // ports to the host when idle
  input  instr_t                 cmem_rdata,
  input  logic [N-1:0]           dmem_rdata,
  // control block
  output logic                   go,
  input  logic                   busy,
  input  logic                   done,
  input  logic [31:0]            run_cycles,
  // results
  input  logic [NPROC-1:0]       seq_busy,
  input  logic [NPROC-1:0]       seq_halted,
  input  logic [N-1:0]           m_out      [NPROC][4],
  input  logic [N-1:0]           best_q     [NPROC],
  input  logic [$clog2(N+1)-1:0] best_ones  [NPROC],
  input  logic [ROW_W-1:0]       best_row   [NPROC],
  input  logic [NPROC-1:0]       best_valid,
  // system-wide best
  input  logic [N-1:0]           g_q,
  input  logic [$clog2(N+1)-1:0] g_ones,
  input  logic [3:0]             g_node,
  input  logic [ROW_W-1:0]       g_row,
  input  logic                   g_valid
);
  localparam int unsigned DDEPTH = NPROC * (A_ROWS + 4);
  localparam int unsigned DAW    = $clog2(DDEPTH);

  logic in_dmem;   // address inside the data memory (it has fewer words than its region)
  assign in_dmem = host_addr[11:9] == 3'd1 && 32'(host_addr[8:0]) < DDEPTH;

  logic [2:0] region;
  logic [3:0] node, item;
  assign region = host_addr[11:9];
  assign node   = host_addr[7:4];
  assign item   = host_addr[3:0];

  always_comb begin
    cmem_we    = host_we && region == 3'd0;
    cmem_waddr = host_addr[CM_AW-1:0];
    cmem_wdata = instr_t'(host_wdata[$bits(instr_t)-1:0]);
    dmem_we    = host_we && in_dmem;
    dmem_waddr = host_addr[DAW-1:0];
    dmem_wdata = host_wdata[N-1:0];
    cmem_raddr = host_addr[CM_AW-1:0];
    dmem_raddr = host_addr[DAW-1:0];
    go         = host_we && region == 3'd2 && host_addr[8:0] == 9'd0 && host_wdata[0];
  end

  always_comb begin
    host_rdata = '0;
    if (region == 3'd0 && !busy) begin
      host_rdata = 32'(cmem_rdata);
    end else if (in_dmem && !busy) begin
      host_rdata = 32'(dmem_rdata);
    end else if (region == 3'd2) begin
      if (host_addr[8:0] == 9'd0)      host_rdata = {30'd0, done, busy};
      else if (host_addr[8:0] == 9'd1) host_rdata = run_cycles;
      else if (host_addr[8:0] == 9'd2) host_rdata = 32'(g_q);
      else if (host_addr[8:0] == 9'd3) host_rdata = 32'(g_ones);
      else if (host_addr[8:0] == 9'd4) host_rdata = 32'(g_node);
      else if (host_addr[8:0] == 9'd5) host_rdata = 32'(g_row);
      else if (host_addr[8:0] == 9'd6) host_rdata = 32'(g_valid);
    end else if (region == 3'd3 && host_addr[8] == 1'b0) begin
      unique case (item)
        4'd0: host_rdata = 32'(best_q[node]);
        4'd1: host_rdata = 32'(best_ones[node]);
        4'd2: host_rdata = 32'(best_row[node]);
        4'd3: host_rdata = 32'(best_valid[node]);
        4'd4, 4'd5, 4'd6, 4'd7: host_rdata = 32'(m_out[node][item[1:0]]);
        4'd8: host_rdata = {30'd0, seq_busy[node], seq_halted[node]};
        default: host_rdata = '0;
      endcase
    end
  end

  // The host data word must hold a vector and a command.
  if (N > 32 || $bits(instr_t) > 32) begin : g_width_check
    $error("lamp_host_if: vectors and commands must fit in 32 bits");
  end

  // A go request is only accepted with the machine idle or done.
  a_go_idle: assert property (@(posedge clk) disable iff (!rst_n) go |-> !busy);
endmodule
