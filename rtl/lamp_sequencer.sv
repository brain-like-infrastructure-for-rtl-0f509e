// lamp_sequencer: elementary logic associative processor (one node of the 4x4 matrix).
//
// Contents, as in the paper's sequencer structure: the logical processor LP (lamp_lp),
// the associative A-matrix of A_ROWS rows of N bits, the block of vectors ma, mb, mc, md,
// the command memory CM, the control automaton CU and the interface I to the eight
// neighbouring sequencers. One more register, `best`, is a compaction register
// (lamp_slc_reg) that keeps the best quality vector found so far together with the row
// it came from; it realises the search functional P(m, A) = min_i Q_i(m, A_i) with the
// paper's decision circuit (lamp_decision).
//
// Operation: while idle, the A-matrix, CM and m registers are written through the load
// ports. A one-cycle `start` pulse clears the row pointer, the program counter and the
// best register and makes the CU run: each clock it executes the command CM[pc] in a
// single cycle (commands in lamp_pkg). OP_HALT stops it and raises `halted` until the
// next start. The A operand is always row A[row pointer].
//
// Interface I: `xout` is this node's exchange register, written by OP_SEND; OP_RECV
// copies neighbour k's exchange register (xin[k], k = lamp_pkg::dir_e) into an m register.
//
// Paper: LP, A-matrix, m block, CM, CU, I and the eight-neighbour links. This design's
// own: the command set and encoding, single-cycle execution, the row pointer and loop
// command, the best register and the neighbour exchange register. The compaction
// command input of the best register is tied off: the values it receives are already
// crowded by the LP's slc stage; only its load and its ones count are used.
module lamp_sequencer
  import lamp_pkg::*;
#(
  parameter int unsigned N = 12
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // loading (only while not running)
  input  logic                   cm_we,
  input  logic [CM_AW-1:0]       cm_addr,
  input  instr_t                 cm_wdata,
  input  logic                   a_we,
  input  logic [ROW_W-1:0]       a_addr,
  input  logic [N-1:0]           a_wdata,
  input  logic                   m_we,
  input  dst_e                   m_sel,
  input  logic [N-1:0]           m_wdata,
  // control
  input  logic                   start,
  output logic                   busy,
  output logic                   halted,
  // neighbour exchange
  input  logic [N-1:0]           xin [8],
  output logic [N-1:0]           xout,
  // results
  output logic [N-1:0]           m_out [4],
  output logic [N-1:0]           best_q,
  output logic [$clog2(N+1)-1:0] best_ones,
  output logic [ROW_W-1:0]       best_row,
  output logic                   best_valid
);
  logic [CM_AW-1:0] pc;
  logic [ROW_W-1:0] rowptr;
  instr_t           ins;
  logic [N-1:0]     a_row;
  logic [N-1:0]     m [4];
  logic [N-1:0]     lp_res;
  logic [3:0]       lp_we;
  logic             dec_y;
  logic [N-1:0]     dec_q;
  logic             exec;

  // Command memory CM and A-matrix.
  lamp_ram #(.W($bits(instr_t)), .DEPTH(CM_DEPTH)) u_cm (
    .clk, .we(cm_we && !busy), .waddr(cm_addr), .wdata(cm_wdata), .raddr(pc), .rdata(ins)
  );
  lamp_ram #(.W(N), .DEPTH(A_ROWS)) u_amat (
    .clk, .we(a_we && !busy), .waddr(a_addr), .wdata(a_wdata), .raddr(rowptr), .rdata(a_row)
  );

  assign exec = busy;

  // Logical processor.
  lamp_lp #(.N(N)) u_lp (
    .en(exec && ins.op == OP_LP), .bop(ins.bop), .uop(ins.uop), .s1(ins.s1), .s2(ins.s2),
    .dst(ins.dst), .a_row, .ma(m[0]), .mb(m[1]), .mc(m[2]), .md(m[3]),
    .res(lp_res), .we(lp_we)
  );

  // Best quality so far: Q1 = stored best, Q2 = candidate from the LP.
  lamp_decision #(.N(N)) u_dec (.q1(best_q), .q2(lp_res), .y(dec_y), .q(dec_q));

  // OP_BEST on an empty best register simply takes the candidate.
  logic         best_load;
  logic [N-1:0] best_d;
  assign best_load = exec && ((ins.op == OP_BINIT) ||
                              (ins.op == OP_BEST && (dec_y || !best_valid)));
  assign best_d    = (ins.op == OP_BEST && best_valid) ? dec_q : lp_res;

  lamp_slc_reg #(.N(N)) u_best (
    .clk, .rst_n, .clr(start && !busy), .load(best_load), .compact(1'b0),
    .d(best_d), .q(best_q), .ones(best_ones)
  );

  // Block of vectors m.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 4; k++) m[k] <= '0;
    end else if (!busy) begin
      if (m_we) m[m_sel] <= m_wdata;
    end else if (ins.op == OP_RECV) begin
      m[ins.dst] <= xin[ins.s1[2:0]];
    end else begin
      for (int k = 0; k < 4; k++) if (lp_we[k]) m[k] <= lp_res;
    end
  end

  // Control automaton CU.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc         <= '0;
      rowptr     <= '0;
      busy       <= 1'b0;
      halted     <= 1'b0;
      xout       <= '0;
      best_row   <= '0;
      best_valid <= 1'b0;
    end else if (!busy) begin
      if (start) begin
        pc         <= '0;
        rowptr     <= '0;
        busy       <= 1'b1;
        halted     <= 1'b0;
        best_row   <= '0;
        best_valid <= 1'b0;
      end
    end else begin
      pc <= pc + 1'b1;
      unique case (ins.op)
        OP_SETROW: rowptr <= ins.row_imm;
        OP_LOOP: if (rowptr != ins.row_imm) begin
          rowptr <= rowptr + 1'b1;
          pc     <= ins.addr_imm;
        end
        OP_BINIT: begin
          best_row   <= rowptr;
          best_valid <= 1'b1;
        end
        OP_BEST: if (dec_y || !best_valid) begin
          best_row   <= rowptr;
          best_valid <= 1'b1;
        end
        OP_SEND: xout <= lp_res;
        OP_HALT: begin
          busy   <= 1'b0;
          halted <= 1'b1;
          pc     <= pc;
        end
        default: ;
      endcase
    end
  end

  assign m_out = m;

  // At most one m register is written by the LP per cycle.
  a_lp_we_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(lp_we));
endmodule
