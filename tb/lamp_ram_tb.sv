// lamp_ram_tb: self-checking test of the memory used for the A-matrix, CM and the system
// memories. Writes every word with random data, reads it back asynchronously, checks
// that a write with we low changes nothing and that a write shows at the read port
// right after its clock edge.
module lamp_ram_tb;
  localparam int W = 12, DEPTH = 16;
  logic clk = 0, we = 0;
  logic [$clog2(DEPTH)-1:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  lamp_ram #(.W(W), .DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = 4'(i); wdata = W'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      we = $urandom_range(0, 1) == 1; waddr = 4'($urandom); wdata = W'($urandom);
      raddr = waddr;
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      checks++;
      if (rdata !== model[raddr]) begin
        failures++;
        $display("FAIL addr %0d: got %h expected %h", raddr, rdata, model[raddr]);
      end
    end
    for (int i = 0; i < DEPTH; i++) begin
      raddr = 4'(i); #1;
      checks++;
      if (rdata !== model[i]) begin
        failures++;
        $display("FAIL final addr %0d: got %h expected %h", i, rdata, model[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
