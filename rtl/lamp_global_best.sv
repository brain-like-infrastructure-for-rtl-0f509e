// lamp_global_best: system-wide search result, the best of the sixteen nodes' bests.
//
// Combinational reduction tree of log2(NPROC) = 4 levels. Each cell takes two
// candidates (crowded quality vector, node, row, valid) and keeps one: if only one is
// valid it is kept; if both are, the paper's decision circuit (lamp_decision, with the
// lower-numbered node as Q1) keeps the one with fewer 1s and the lower node on a tie.
// The output is the overall best vector, its number of 1s, the node and the row it came
// from, i.e. P(m, A) = min_i Q_i over the whole matrix when every node has searched its
// own part of the table.
//
// The search functional and the decision circuit are the paper's; performing the final
// minimum across nodes in this tree, rather than in software or through neighbour
// exchange, is this design's own choice.
module lamp_global_best
  import lamp_pkg::*;
#(
  parameter int unsigned N = 12
) (
  input  logic [N-1:0]           best_q     [NPROC],
  input  logic [ROW_W-1:0]       best_row   [NPROC],
  input  logic [NPROC-1:0]       best_valid,
  output logic [N-1:0]           g_q,
  output logic [$clog2(N+1)-1:0] g_ones,
  output logic [3:0]             g_node,
  output logic [ROW_W-1:0]       g_row,
  output logic                   g_valid
);
  localparam int unsigned LV = $clog2(NPROC);

  // Level l (1..LV) holds NPROC >> l winners; level 0 is the nodes themselves.
  for (genvar l = 1; l <= LV; l++) begin : g_lvl
    localparam int unsigned W = NPROC >> l;
    logic [N-1:0]     q  [W];
    logic [3:0]       nd [W];
    logic [ROW_W-1:0] rw [W];
    logic [W-1:0]     vl;

    for (genvar i = 0; i < W; i++) begin : g_cell
      logic [N-1:0]     qa, qb;
      logic [3:0]       na, nb;
      logic [ROW_W-1:0] ra, rb;
      logic [N-1:0]     qd;
      logic             va, vb, y, take_b;

      if (l == 1) begin : g_from_nodes
        assign qa = best_q[2*i];     assign qb = best_q[2*i+1];
        assign na = 4'(2*i);         assign nb = 4'(2*i+1);
        assign ra = best_row[2*i];   assign rb = best_row[2*i+1];
        assign va = best_valid[2*i]; assign vb = best_valid[2*i+1];
      end else begin : g_from_level
        assign qa = g_lvl[l-1].q[2*i];  assign qb = g_lvl[l-1].q[2*i+1];
        assign na = g_lvl[l-1].nd[2*i]; assign nb = g_lvl[l-1].nd[2*i+1];
        assign ra = g_lvl[l-1].rw[2*i]; assign rb = g_lvl[l-1].rw[2*i+1];
        assign va = g_lvl[l-1].vl[2*i]; assign vb = g_lvl[l-1].vl[2*i+1];
      end

      // qd equals the choice below whenever both candidates are valid
      lamp_decision #(.N(N)) u_dec (.q1(qa), .q2(qb), .y(y), .q(qd));
      assign take_b = !va || (vb && y);
      assign q[i]   = (va && vb) ? qd : (take_b ? qb : qa);
      assign nd[i]  = take_b ? nb : na;
      assign rw[i]  = take_b ? rb : ra;
      assign vl[i]  = va || vb;
    end
  end

  assign g_q     = g_lvl[LV].q[0];
  assign g_node  = g_lvl[LV].nd[0];
  assign g_row   = g_lvl[LV].rw[0];
  assign g_valid = g_lvl[LV].vl[0];

  lamp_compact #(.N(N)) u_idx (.v(g_q), .c(), .ones(g_ones));
endmodule
