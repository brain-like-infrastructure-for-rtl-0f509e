// lamp_lp: logical processor of a sequencer.
//
// Combinational datapath in three levels, as in the paper's structure of logic
// calculations:
//   1. operand multiplexer: each of the two operands is one of {A_i, ma, mb, mc, md};
//   2. binary level: and, or, xor, or nop (nop passes operand 1 through);
//   3. unary level: not, nop, or slc (shift left and crowd the 1s, in the same cycle).
// The result goes out on `res`; `we` is one-hot over ma..md and marks which of the four
// m registers it is written to (the sequencer does the write at the next clock edge).
// Permitted combinations (paper): {m} op A_i, {m} op {m}, and a unary operation alone on
// any of {m, A_i}, which is a binary nop followed by the unary operation.
// Operator and operand codes are this design's own (see lamp_pkg).
module lamp_lp
  import lamp_pkg::*;
#(
  parameter int unsigned N = 12
) (
  input  logic         en,       // perform an operation this cycle
  input  binop_e       bop,
  input  unop_e        uop,
  input  src_e         s1,
  input  src_e         s2,
  input  dst_e         dst,
  input  logic [N-1:0] a_row,    // A_i, the row selected in the A-matrix
  input  logic [N-1:0] ma,
  input  logic [N-1:0] mb,
  input  logic [N-1:0] mc,
  input  logic [N-1:0] md,
  output logic [N-1:0] res,
  output logic [3:0]   we        // write enable for ma, mb, mc, md (bit 0 = ma)
);
  logic [N-1:0] op1, op2, bin, crowded;

  function automatic logic [N-1:0] pick(input src_e s, input logic [N-1:0] a,
                                        input logic [N-1:0] r0, input logic [N-1:0] r1,
                                        input logic [N-1:0] r2, input logic [N-1:0] r3);
    unique case (s)
      S_MA:    return r0;
      S_MB:    return r1;
      S_MC:    return r2;
      S_MD:    return r3;
      default: return a;   // S_A
    endcase
  endfunction

  lamp_compact #(.N(N)) u_slc (.v(bin), .c(crowded), .ones());

  always_comb begin
    op1 = pick(s1, a_row, ma, mb, mc, md);
    op2 = pick(s2, a_row, ma, mb, mc, md);
    unique case (bop)
      B_AND:   bin = op1 & op2;
      B_OR:    bin = op1 | op2;
      B_XOR:   bin = op1 ^ op2;
      default: bin = op1;        // B_NOP
    endcase
    unique case (uop)
      U_NOT:   res = ~bin;
      U_SLC:   res = crowded;
      default: res = bin;        // U_NOP
    endcase
    we = en ? (4'b0001 << dst) : 4'b0000;
  end
endmodule
