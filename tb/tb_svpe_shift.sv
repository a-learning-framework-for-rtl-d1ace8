// tb_svpe_shift: checks the SHIFT unit against a multiplier reference.
// For n = 1, 3 and 5 bit codes and random 16-bit activations, the product must
// equal x * w * 2^FRAC computed with an ordinary multiplication, where w is the
// power-of-two weight the code stands for.
module tb_svpe_shift;
  import nbq_pkg::*;

  int checks = 0, failures = 0;

  logic signed [DATA_W-1:0] x;
  logic [0:0] c1;
  logic [2:0] c3;
  logic [4:0] c5;
  logic signed [DATA_W+frac_bits(1):0]  p1;
  logic signed [DATA_W+frac_bits(3):0]  p3;
  logic signed [DATA_W+frac_bits(5):0]  p5;

  svpe_shift #(.NBIT(1)) u1 (.x(x), .code(c1), .prod(p1));
  svpe_shift #(.NBIT(3)) u3 (.x(x), .code(c3), .prod(p3));
  svpe_shift #(.NBIT(5)) u5 (.x(x), .code(c5), .prod(p5));

  // Reference: weight value times 2^FRAC, as an integer, then times x.
  function automatic longint ref_prod(input int nbit, input int code, input longint xv);
    int frac = int'(frac_bits(nbit));
    int mag, s;
    longint w;
    if (nbit == 1) return code ? -xv : xv;
    s   = (code >> (nbit - 1)) & 1;
    mag = code & ((1 << (nbit - 1)) - 1);
    if (mag == 0) return 0;
    w = longint'(1) << (frac - (mag - 1));   // 2^-(mag-1) * 2^frac
    return s ? -(xv * w) : xv * w;
  endfunction

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: x=%0d got %0d expected %0d", what, x, got, exp);
    end
  endtask

  initial begin
    for (int t = 0; t < 200; t++) begin
      case (t)
        0: x = 16'sh7fff;
        1: x = -16'sh8000;
        2: x = 0;
        default: x = DATA_W'($urandom);
      endcase
      for (int c = 0; c < 32; c++) begin
        c1 = 1'(c); c3 = 3'(c); c5 = 5'(c);
        #1;
        if (c < 2) check("n=1", longint'(p1), ref_prod(1, c, longint'(x)));
        if (c < 8) check("n=3", longint'(p3), ref_prod(3, c, longint'(x)));
        check("n=5", longint'(p5), ref_prod(5, c, longint'(x)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
