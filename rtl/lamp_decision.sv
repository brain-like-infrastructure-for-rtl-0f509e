// lamp_decision: choice between two quality vectors without arithmetic.
//
// Combinational. Y = OR over all bits of ((Q1 & Q2) ^ Q1), i.e. Y is 1 when Q1 has a 1
// where Q2 has a 0. The output is Q1 when Y = 0 and Q2 when Y = 1. For crowded
// (thermometer-coded) quality vectors this keeps the one with fewer 1s, that is the better
// solution, and keeps Q1 on a tie. The three operations (and, xor, bit-wise OR reduction)
// and the selection rule are the paper's (eq. 4 and its decision circuit).
module lamp_decision #(
  parameter int unsigned N = 12
) (
  input  logic [N-1:0] q1,
  input  logic [N-1:0] q2,
  output logic         y,    // 1: Q2 is chosen
  output logic [N-1:0] q     // chosen vector
);
  always_comb begin
    y = |((q1 & q2) ^ q1);
    q = y ? q2 : q1;
  end
endmodule
