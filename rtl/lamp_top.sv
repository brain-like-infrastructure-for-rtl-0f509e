// lamp_top: logic associative multiprocessor (LAMP), whole system.
//
// Blocks, as in the paper's LAMP architecture: the host interface (lamp_host_if), the
// system command memory and data memory (lamp_ram), the control block (lamp_ctrl) and the
// 4x4 multiprocessor of sequencers (lamp_multiproc), plus lamp_global_best, which picks
// the best of the sixteen nodes' results with the decision circuit. A host writes a program into the
// command memory and the A-matrices and m vectors of all sixteen nodes into the data
// memory, then writes go. The control block copies the program to every node's CM and
// the data to every node's A-matrix and m block, starts all nodes together and waits
// until all have halted; the host then reads each node's best quality vector, its row and
// its m registers. See lamp_host_if for the address map and lamp_ctrl for the timing.
//
// The paper's infrastructure IP (service, diagnosis and repair of the modules) is not
// built: its method is not described. The node status it would observe leaves the chip on
// seq_busy / seq_halted, and `done` marks the end of a run.
module lamp_top
  import lamp_pkg::*;
#(
  parameter int unsigned N = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [11:0]       host_addr,
  input  logic              host_we,
  input  logic [31:0]       host_wdata,
  output logic [31:0]       host_rdata,
  output logic              done,
  output logic [NPROC-1:0]  seq_busy,
  output logic [NPROC-1:0]  seq_halted
);
  localparam int unsigned DDEPTH = NPROC * (A_ROWS + 4);
  localparam int unsigned DAW    = $clog2(DDEPTH);

  logic                   cmem_we, dmem_we, go, busy, all_halted, start;
  logic [CM_AW-1:0]       cmem_waddr, cmem_raddr, ctrl_cmem_raddr, host_cmem_raddr;
  instr_t                 cmem_wdata, cmem_rdata;
  logic [DAW-1:0]         dmem_waddr, dmem_raddr, ctrl_dmem_raddr, host_dmem_raddr;
  logic [N-1:0]           dmem_wdata, dmem_rdata;
  logic [31:0]            run_cycles;

  logic                   cm_we, a_we, m_we;
  logic [CM_AW-1:0]       cm_addr;
  instr_t                 cm_wdata;
  logic [3:0]             a_proc, m_proc;
  logic [ROW_W-1:0]       a_addr;
  logic [N-1:0]           a_wdata, m_wdata;
  dst_e                   m_sel;

  logic [N-1:0]           m_out      [NPROC][4];
  logic [N-1:0]           best_q     [NPROC];
  logic [$clog2(N+1)-1:0] best_ones  [NPROC];
  logic [ROW_W-1:0]       best_row   [NPROC];
  logic [NPROC-1:0]       best_valid;
  logic [N-1:0]           g_q;
  logic [$clog2(N+1)-1:0] g_ones;
  logic [3:0]             g_node;
  logic [ROW_W-1:0]       g_row;
  logic                   g_valid;

  lamp_host_if #(.N(N)) u_if (
    .clk, .rst_n, .host_addr, .host_we, .host_wdata, .host_rdata,
    .cmem_we, .cmem_waddr, .cmem_wdata, .dmem_we, .dmem_waddr, .dmem_wdata,
    .cmem_raddr(host_cmem_raddr), .dmem_raddr(host_dmem_raddr), .cmem_rdata, .dmem_rdata,
    .go, .busy, .done, .run_cycles,
    .seq_busy, .seq_halted, .m_out, .best_q, .best_ones, .best_row, .best_valid,
    .g_q, .g_ones, .g_node, .g_row, .g_valid
  );

  // The memories' read ports serve the control block while it works, the host otherwise.
  assign cmem_raddr = busy ? ctrl_cmem_raddr : host_cmem_raddr;
  assign dmem_raddr = busy ? ctrl_dmem_raddr : host_dmem_raddr;

  lamp_ram #(.W($bits(instr_t)), .DEPTH(CM_DEPTH)) u_cmem (
    .clk, .we(cmem_we), .waddr(cmem_waddr), .wdata(cmem_wdata),
    .raddr(cmem_raddr), .rdata(cmem_rdata)
  );

  lamp_ram #(.W(N), .DEPTH(DDEPTH)) u_dmem (
    .clk, .we(dmem_we), .waddr(dmem_waddr), .wdata(dmem_wdata),
    .raddr(dmem_raddr), .rdata(dmem_rdata)
  );

  lamp_ctrl #(.N(N)) u_ctrl (
    .clk, .rst_n, .go, .busy, .done, .run_cycles,
    .cmem_raddr(ctrl_cmem_raddr), .cmem_rdata, .dmem_raddr(ctrl_dmem_raddr), .dmem_rdata,
    .cm_we, .cm_addr, .cm_wdata, .a_we, .a_proc, .a_addr, .a_wdata,
    .m_we, .m_proc, .m_sel, .m_wdata, .start, .all_halted
  );

  lamp_multiproc #(.N(N)) u_mp (
    .clk, .rst_n, .cm_we, .cm_addr, .cm_wdata, .a_we, .a_proc, .a_addr, .a_wdata,
    .m_we, .m_proc, .m_sel, .m_wdata, .start, .all_halted,
    .busy(seq_busy), .halted(seq_halted),
    .m_out, .best_q, .best_ones, .best_row, .best_valid
  );

  lamp_global_best #(.N(N)) u_gbest (
    .best_q, .best_row, .best_valid, .g_q, .g_ones, .g_node, .g_row, .g_valid
  );
endmodule
