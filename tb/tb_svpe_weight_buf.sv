// tb_svpe_weight_buf: checks the two-bank weight buffer. A write must land in
// the idle bank only: the active codes do not change until the bank select
// flips, and then show the written word; the other bank keeps its contents.
module tb_svpe_weight_buf;
  localparam int NBIT = 3, K = 3, W = K*K*NBIT;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, we = 0, bank = 0;
  logic [W-1:0] wdata = 0, codes;
  logic [W-1:0] model [2];

  svpe_weight_buf #(.NBIT(NBIT), .K(K)) dut (.clk(clk), .rst_n(rst_n), .we(we), .wdata(wdata),
                                             .bank(bank), .codes(codes));
  always #5 clk = ~clk;

  task automatic check(input string what);
    checks++;
    if (codes !== model[bank]) begin
      failures++;
      if (failures < 10) $display("FAIL %s: bank=%0d got %h expected %h", what, bank, codes, model[bank]);
    end
  endtask

  initial begin
    model[0] = '0; model[1] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check("reset");
    for (int t = 0; t < 300; t++) begin
      we    = ($urandom % 2) != 0;
      wdata = W'({$urandom, $urandom});
      if (($urandom % 3) == 0) bank = ~bank;
      if (we) model[~bank] = wdata;
      @(negedge clk);
      we = 0;
      check("after write");
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
