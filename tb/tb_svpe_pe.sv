// tb_svpe_pe: checks one shift-add cell. With random activations, codes and
// incoming partial sums, and en toggling, the registered partial sum must be
// psum_in + x*w*2^FRAC after an enabled edge and must hold after a disabled one.
module tb_svpe_pe;
  import nbq_pkg::*;
  import tb_ref_pkg::*;

  localparam int NBIT = 3;
  localparam int ACC_W = acc_bits(NBIT);

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic signed [DATA_W-1:0] x = 0;
  logic [NBIT-1:0] code = 0;
  logic signed [ACC_W-1:0] pin = 0, pout;
  longint expected;

  svpe_pe #(.NBIT(NBIT)) dut (.clk(clk), .rst_n(rst_n), .en(en), .x(x), .code(code),
                              .psum_in(pin), .psum_out(pout));

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (pout != 0) begin failures++; $display("FAIL reset value"); end
    expected = 0;
    for (int t = 0; t < 500; t++) begin
      x    = DATA_W'($urandom);
      code = NBIT'($urandom);
      pin  = ACC_W'($signed(24'($urandom)));
      en   = ($urandom % 4) != 0;
      if (en) expected = longint'(pin) + longint'(x) * wscaled(NBIT, int'(code));
      @(negedge clk);
      checks++;
      if (longint'(pout) != expected) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d en=%0b got %0d expected %0d", t, en, pout, expected);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
