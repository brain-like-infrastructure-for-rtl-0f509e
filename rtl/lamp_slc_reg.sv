// lamp_slc_reg: N-bit register that crowds its 1s to the left in one clock cycle.
//
// Commands (one per clock, priority clr > load > compact):
//   clr     : register <= 0
//   load    : register <= d (parallel load)
//   compact : register <= its own contents with all 1s shifted to the left end
// Outputs: q, the register, and ones, the number (1..N from the left) of the rightmost 1
// of q once it is crowded, which equals its number of 1s and serves as the quality index.
// `ones` is combinational from q (it is valid whether or not q is already crowded); 0
// means q is empty.
//
// The one-cycle left shift and compaction and the use of the rightmost-1 number as the
// quality index are the paper's. Its circuit (a JK flip-flop per bit with gating) is drawn
// without gate types, so the crowding network here (lamp_compact) and the command
// pins and priority are this design's own. rst_n clears the register asynchronously.
module lamp_slc_reg #(
  parameter int unsigned N = 12
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,
  input  logic                   load,
  input  logic                   compact,
  input  logic [N-1:0]           d,
  output logic [N-1:0]           q,
  output logic [$clog2(N+1)-1:0] ones
);
  logic [N-1:0] crowded;

  lamp_compact #(.N(N)) u_crowd (.v(q), .c(crowded), .ones(ones));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       q <= '0;
    else if (clr)     q <= '0;
    else if (load)    q <= d;
    else if (compact) q <= crowded;
  end
endmodule
