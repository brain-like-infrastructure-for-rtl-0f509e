// lamp_lp_tb: self-checking test of the logical processor.
// Drives every combination of binary operation (and, or, xor, nop), unary operation (not,
// nop, slc), both operand selections over {A_i, ma, mb, mc, md} and each destination with
// random register contents, and compares the result and the write enables with a
// reference model; also checks that nothing is written when the LP is not enabled.
module lamp_lp_tb;
  import lamp_pkg::*;
  localparam int N = 12;
  logic en;
  binop_e bop; unop_e uop; src_e s1, s2; dst_e dst;
  logic [N-1:0] a_row, ma, mb, mc, md, res;
  logic [3:0] we;
  int checks = 0, failures = 0;

  lamp_lp #(.N(N)) dut (.en, .bop, .uop, .s1, .s2, .dst, .a_row, .ma, .mb, .mc, .md, .res, .we);

  function automatic logic [N-1:0] sel(input int s);
    case (s)
      0: return ma;
      1: return mb;
      2: return mc;
      3: return md;
      default: return a_row;
    endcase
  endfunction
  function automatic logic [N-1:0] crowd(input logic [N-1:0] v);  // count and refill
    int c = 0;
    logic [N-1:0] r = '0;
    for (int i = 0; i < N; i++) c += int'(v[i]);
    for (int i = 0; i < c; i++) r[N-1-i] = 1'b1;
    return r;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 20; rep++) begin
      for (int b = 0; b < 4; b++) for (int u = 0; u < 3; u++)
      for (int x = 0; x < 5; x++) for (int z = 0; z < 5; z++) for (int t = 0; t < 4; t++) begin
        logic [N-1:0] o1, o2, eb, er;
        a_row = N'($urandom); ma = N'($urandom); mb = N'($urandom);
        mc = N'($urandom); md = N'($urandom);
        en = (rep != 0);
        bop = binop_e'(b); uop = unop_e'(u); s1 = src_e'(x); s2 = src_e'(z); dst = dst_e'(t);
        #1;
        o1 = sel(x); o2 = sel(z);
        case (b)
          0: eb = o1 & o2;
          1: eb = o1 | o2;
          2: eb = o1 ^ o2;
          default: eb = o1;
        endcase
        case (u)
          1: er = ~eb;
          2: er = crowd(eb);
          default: er = eb;
        endcase
        checks++;
        if (res !== er || we !== (en ? (4'b1 << t) : 4'b0)) begin
          failures++;
          $display("FAIL b=%0d u=%0d s1=%0d s2=%0d dst=%0d en=%b: res=%b exp %b we=%b",
                   b, u, x, z, t, en, res, er, we);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
