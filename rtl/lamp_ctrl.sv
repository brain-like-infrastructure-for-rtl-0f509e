// lamp_ctrl: control block of the LAMP.
//
// On `go` it distributes the program and the data to the multiprocessor, starts all
// sequencers at the same clock and waits until every one has halted:
//   LOAD_CM : CM_DEPTH cycles; command memory word k is written to CM[k] of all nodes.
//   LOAD_DM : NPROC*WPP cycles; data memory word p*WPP + w goes to node p, to A-matrix row
//             w for w < A_ROWS and to m register w - A_ROWS (ma..md) otherwise.
//   START   : one cycle, start pulse to all nodes.
//   WAIT    : until all nodes have halted; run_cycles counts these cycles.
//   DONE    : `done` high until the next `go`.
// Both memories are read asynchronously, so one word moves per clock. `busy` is high from
// the cycle after `go` until DONE.
//
// Paper: a control unit that initialises command execution and synchronises all
// components, and placement of program and data among the processors. The phases, the
// data memory layout and the cycle counter are this design's own.
module lamp_ctrl
  import lamp_pkg::*;
#(
  parameter int unsigned N = 12
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   go,
  output logic                   busy,
  output logic                   done,
  output logic [31:0]            run_cycles,
  // command memory read port
  output logic [CM_AW-1:0]       cmem_raddr,
  input  instr_t                 cmem_rdata,
  // data memory read port
  output logic [$clog2(NPROC*(A_ROWS+4))-1:0] dmem_raddr,
  input  logic [N-1:0]           dmem_rdata,
  // to the multiprocessor
  output logic                   cm_we,
  output logic [CM_AW-1:0]       cm_addr,
  output instr_t                 cm_wdata,
  output logic                   a_we,
  output logic [3:0]             a_proc,
  output logic [ROW_W-1:0]       a_addr,
  output logic [N-1:0]           a_wdata,
  output logic                   m_we,
  output logic [3:0]             m_proc,
  output dst_e                   m_sel,
  output logic [N-1:0]           m_wdata,
  output logic                   start,
  input  logic                   all_halted
);
  localparam int unsigned WPP = A_ROWS + 4;   // data words per node
  localparam int unsigned DAW = $clog2(NPROC * WPP);

  typedef enum logic [2:0] {S_IDLE, S_LOAD_CM, S_LOAD_DM, S_START, S_WAIT, S_DONE} state_e;
  state_e state;

  logic [CM_AW-1:0] k;       // command index
  logic [3:0]       p;       // node index
  logic [4:0]       w;       // word within a node
  logic [DAW-1:0]   da;      // running data memory address

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      k          <= '0;
      p          <= '0;
      w          <= '0;
      da         <= '0;
      run_cycles <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: if (go) begin
          state <= S_LOAD_CM;
          k     <= '0;
        end
        S_LOAD_CM: begin
          k <= k + 1'b1;
          if (k == CM_AW'(CM_DEPTH - 1)) begin
            state <= S_LOAD_DM;
            p     <= '0;
            w     <= '0;
            da    <= '0;
          end
        end
        S_LOAD_DM: begin
          da <= da + 1'b1;
          if (w == 5'(WPP - 1)) begin
            w <= '0;
            p <= p + 1'b1;
            if (p == 4'(NPROC - 1)) state <= S_START;
          end else begin
            w <= w + 1'b1;
          end
        end
        S_START: begin
          state      <= S_WAIT;
          run_cycles <= '0;
        end
        S_WAIT: begin
          run_cycles <= run_cycles + 1'b1;
          if (all_halted) state <= S_DONE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy       = state inside {S_LOAD_CM, S_LOAD_DM, S_START, S_WAIT};
    done       = state == S_DONE;
    start      = state == S_START;
    cmem_raddr = k;
    dmem_raddr = da;
    cm_we      = state == S_LOAD_CM;
    cm_addr    = k;
    cm_wdata   = cmem_rdata;
    a_we       = state == S_LOAD_DM && w < 5'(A_ROWS);
    a_proc     = p;
    a_addr     = ROW_W'(w);
    a_wdata    = dmem_rdata;
    m_we       = state == S_LOAD_DM && w >= 5'(A_ROWS);
    m_proc     = p;
    m_sel      = dst_e'(w - 5'(A_ROWS));
    m_wdata    = dmem_rdata;
  end

  // The start pulse lasts exactly one cycle.
  a_start_single: assert property (@(posedge clk) disable iff (!rst_n) start |=> !start);
endmodule
