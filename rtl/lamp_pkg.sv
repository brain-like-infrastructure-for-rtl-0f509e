// lamp_pkg: types and constants shared by the logic associative multiprocessor (LAMP).
//
// The machine works on n-bit Boolean vectors with only logical operations. This package
// holds the command format of a sequencer, the operand/operator codes of the logical
// processor and the neighbour directions of the 4x4 wrap-around array.
//
// Bit order: bit [N-1] of a vector is its leftmost coordinate, so "shift left and compact"
// moves all 1s towards bit [N-1].
//
// The five LP operations (and, or, xor, not, slc), the operand set {A_i, ma, mb, mc, md},
// the four destination registers and the eight neighbours follow the paper. The command
// encoding, the field widths, the memory depths and the control commands (row pointer,
// loop, best-so-far register, neighbour send/receive, halt) are this design's own choices.
package lamp_pkg;

  // Depth of the A-matrix of one sequencer (rows A_i) and of its command memory CM.
  localparam int unsigned A_ROWS   = 16;
  localparam int unsigned ROW_W    = $clog2(A_ROWS);
  localparam int unsigned CM_DEPTH = 32;
  localparam int unsigned CM_AW    = $clog2(CM_DEPTH);

  // Processor matrix P = [P_ij], 4 x 4.
  localparam int unsigned PROWS = 4;
  localparam int unsigned PCOLS = 4;
  localparam int unsigned NPROC = PROWS * PCOLS;

  typedef enum logic [3:0] {
    OP_NOP    = 4'd0,  // no operation
    OP_LP     = 4'd1,  // dst <= uop(bop(s1, s2)) through the logical processor
    OP_SETROW = 4'd2,  // row pointer <= row_imm
    OP_LOOP   = 4'd3,  // if row pointer != row_imm: row pointer++, jump to addr_imm
    OP_BINIT  = 4'd4,  // best <= operand s1, best_row <= row pointer
    OP_BEST   = 4'd5,  // best <= decision(best, operand s1); record row when replaced
    OP_SEND   = 4'd6,  // exchange register xout <= operand s1
    OP_RECV   = 4'd7,  // dst <= exchange register of neighbour s1[2:0]
    OP_HALT   = 4'd8   // stop, signal done
  } opcode_e;

  typedef enum logic [1:0] {B_AND = 2'd0, B_OR = 2'd1, B_XOR = 2'd2, B_NOP = 2'd3} binop_e;
  typedef enum logic [1:0] {U_NOP = 2'd0, U_NOT = 2'd1, U_SLC = 2'd2} unop_e;
  typedef enum logic [2:0] {S_MA = 3'd0, S_MB = 3'd1, S_MC = 3'd2, S_MD = 3'd3, S_A = 3'd4} src_e;
  typedef enum logic [1:0] {D_MA = 2'd0, D_MB = 2'd1, D_MC = 2'd2, D_MD = 2'd3} dst_e;

  // Neighbour directions (row index grows downwards, column index to the right).
  typedef enum logic [2:0] {
    DIR_N = 3'd0, DIR_NE = 3'd1, DIR_E = 3'd2, DIR_SE = 3'd3,
    DIR_S = 3'd4, DIR_SW = 3'd5, DIR_W = 3'd6, DIR_NW = 3'd7
  } dir_e;

  typedef struct packed {
    opcode_e               op;
    binop_e                bop;
    unop_e                 uop;
    src_e                  s1;
    src_e                  s2;
    dst_e                  dst;
    logic [ROW_W-1:0]      row_imm;
    logic [CM_AW-1:0]      addr_imm;
  } instr_t;


endpackage
