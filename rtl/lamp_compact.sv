// lamp_compact: combinational shift-left bit crowding ("slc") of an N-bit vector.
//
// All 1s of the input are moved to the left end (towards bit N-1) in one pass, so the
// output is a thermometer code holding as many 1s as the input. In keeping with the
// arithmetic-free idea of the machine, no adder is used: the vector runs through an
// odd-even transposition network of N stages whose compare-exchange cell is one OR gate
// (the left output) and one AND gate (the right output). The position of the rightmost 1
// of the crowded vector, numbered 1..N from the left, is the number of 1s; it is produced
// by a thermometer-to-binary encoder (edge detect, then OR per output bit) as `ones`.
//
// The one-cycle compaction and the rightmost-1 index are the paper's; the network that
// does it is this design's own choice (the paper's register circuit is a chain of JK cells
// whose gate types are not given).
module lamp_compact #(
  parameter int unsigned N = 12
) (
  input  logic [N-1:0]         v,     // vector to crowd
  output logic [N-1:0]         c,     // crowded vector, 1s at the left end
  output logic [$clog2(N+1)-1:0] ones // number of 1s = index of rightmost 1 of c
);
  localparam int unsigned CW = $clog2(N + 1);

  logic [N-1:0] stage [N+1];

  assign stage[0] = v;

  for (genvar s = 0; s < N; s++) begin : g_stage
    for (genvar i = 0; i < N; i++) begin : g_bit
      // Pair (i+1, i) is compared in stage s when i has the parity of s.
      if ((i % 2) == (s % 2) && i + 1 < N) begin : g_pair
        // bit i is the right member of pair (i+1, i): it gets the AND, bit i+1 the OR
        assign stage[s+1][i]   = stage[s][i+1] & stage[s][i];
        assign stage[s+1][i+1] = stage[s][i+1] | stage[s][i];
      end else if (!(i >= 1 && ((i - 1) % 2) == (s % 2))) begin : g_pass
        // bit i belongs to no pair in this stage
        assign stage[s+1][i] = stage[s][i];
      end
    end
  end

  assign c = stage[N];

  // Thermometer (1s from the left) to binary: edge at position k (1-based from the left)
  // when c bit for position k is 1 and the next one is 0.
  logic [N:0] ce;
  logic [N:1] edge_at;
  assign ce = {c, 1'b0};
  always_comb begin
    for (int unsigned k = 1; k <= N; k++) edge_at[k] = ce[N-k+1] & ~ce[N-k];
  end

  always_comb begin
    ones = '0;
    for (int unsigned k = 1; k <= N; k++) begin
      for (int unsigned b = 0; b < CW; b++) begin
        if (((k >> b) & 1) == 1) ones[b] = ones[b] | edge_at[k];
      end
    end
  end

endmodule
