// tb_bram_dp: the on-chip RAM. Random writes and reads against an associative
// array model: read data must appear one cycle after the address and must be
// the last value written; a read of the address written in the same cycle
// returns the old value.
module tb_bram_dp;
  localparam int DW = 24, DEPTH = 40, AW = $clog2(DEPTH);

  int checks = 0, failures = 0;
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  logic [DW-1:0] wdata = 0, rdata;
  logic [DW-1:0] model [DEPTH];
  logic [DW-1:0] expv;

  bram_dp #(.DW(DW), .DEPTH(DEPTH)) dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata),
                                         .raddr(raddr), .rdata(rdata));
  always #5 clk = ~clk;

  initial begin
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = AW'(a); wdata = DW'($urandom); model[a] = wdata;
      @(negedge clk);
    end
    for (int t = 0; t < 400; t++) begin
      we    = ($urandom % 2) != 0;
      waddr = AW'($urandom % DEPTH);
      wdata = DW'($urandom);
      raddr = (($urandom % 4) == 0) ? waddr : AW'($urandom % DEPTH);
      expv  = model[raddr];
      if (we) model[waddr] = wdata;
      @(negedge clk);
      checks++;
      if (rdata != expv) begin
        failures++;
        if (failures < 10) $display("FAIL read %0d: %h vs %h", raddr, rdata, expv);
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
