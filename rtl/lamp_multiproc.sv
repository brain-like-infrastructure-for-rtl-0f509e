// lamp_multiproc: the 4x4 multiprocessor matrix P = [P_ij] of sequencers.
//
// Sixteen lamp_sequencer nodes sit on a spherical network: rows and columns wrap around
// (the boundary elements of the paper's figure repeat the nodes of the opposite edge), so
// every node, including the edge ones, has eight neighbours: N, NE, E, SE, S, SW, W, NW.
// Node (r, c) has index r*4 + c; its neighbour in direction k (lamp_pkg::dir_e) drives
// input xin[k] with its exchange register.
//
// Loading: the command memory word is written to all nodes at once (cm_*); A-matrix rows
// and m registers are written to the node named by a_proc / m_proc. `start` goes to all
// nodes at once; `all_halted` is high when every node has halted.
//
// Paper: 4x4 matrix, 16 sequencers, eight contiguous neighbours with boundary elements.
// This design's own: the direction numbering, the broadcast of one program to all nodes
// and the per-node load addressing.
module lamp_multiproc
  import lamp_pkg::*;
#(
  parameter int unsigned N = 12
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cm_we,
  input  logic [CM_AW-1:0]       cm_addr,
  input  instr_t                 cm_wdata,
  input  logic                   a_we,
  input  logic [3:0]             a_proc,
  input  logic [ROW_W-1:0]       a_addr,
  input  logic [N-1:0]           a_wdata,
  input  logic                   m_we,
  input  logic [3:0]             m_proc,
  input  dst_e                   m_sel,
  input  logic [N-1:0]           m_wdata,
  input  logic                   start,
  output logic                   all_halted,
  output logic [NPROC-1:0]       busy,
  output logic [NPROC-1:0]       halted,
  output logic [N-1:0]           m_out      [NPROC][4],
  output logic [N-1:0]           best_q     [NPROC],
  output logic [$clog2(N+1)-1:0] best_ones  [NPROC],
  output logic [ROW_W-1:0]       best_row   [NPROC],
  output logic [NPROC-1:0]       best_valid
);
  logic [N-1:0] xout [NPROC];

  // Row and column offsets of the eight directions N, NE, E, SE, S, SW, W, NW.
  localparam int DR [8] = '{-1, -1, 0, 1, 1, 1, 0, -1};
  localparam int DC [8] = '{ 0,  1, 1, 1, 0, -1, -1, -1};

  for (genvar r = 0; r < PROWS; r++) begin : g_row
    for (genvar c = 0; c < PCOLS; c++) begin : g_col
      localparam int unsigned ID = r * PCOLS + c;
      logic [N-1:0] xin [8];

      for (genvar k = 0; k < 8; k++) begin : g_nb
        localparam int unsigned NR = (r + DR[k] + PROWS) % PROWS;
        localparam int unsigned NC = (c + DC[k] + PCOLS) % PCOLS;
        assign xin[k] = xout[NR*PCOLS + NC];
      end

      logic [N-1:0] mo [4];

      lamp_sequencer #(.N(N)) u_seq (
        .clk, .rst_n,
        .cm_we, .cm_addr, .cm_wdata,
        .a_we(a_we && a_proc == 4'(ID)), .a_addr, .a_wdata,
        .m_we(m_we && m_proc == 4'(ID)), .m_sel, .m_wdata,
        .start, .busy(busy[ID]), .halted(halted[ID]),
        .xin, .xout(xout[ID]),
        .m_out(mo), .best_q(best_q[ID]), .best_ones(best_ones[ID]),
        .best_row(best_row[ID]), .best_valid(best_valid[ID])
      );

      for (genvar k = 0; k < 4; k++) begin : g_mo
        assign m_out[ID][k] = mo[k];
      end
    end
  end

  assign all_halted = &halted;
endmodule
