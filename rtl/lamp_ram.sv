// lamp_ram: single-port-write, asynchronous-read memory of DEPTH words of W bits.
//
// Used for the A-matrix and the command memory CM of every sequencer, and for the
// system-level command memory and data memory. A write takes effect at the rising edge
// when we is high; rdata shows word raddr combinationally, so a sequencer reads its
// current command and row A_i in the same cycle it uses them. The memory is not reset
// (contents are loaded before use). The paper names these memories and says what they
// hold; the port set, read timing and depths are this design's own.
module lamp_ram #(
  parameter int unsigned W     = 12,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
