// tb_pool_unit: 2x2/2 max pooling of PN = 2 lanes on a raster stream with idle
// cycles. Frames of even and odd size are used; every pooled output must be the
// maximum of its 2x2 block, carry the pooled coordinates, and come out in
// raster order; an odd last row or
// column produces nothing.
module tb_pool_unit;
  import nbq_pkg::*;

  localparam int PN = 2, W_MAX = 12, CW = $clog2(W_MAX + 1);

  int checks = 0, failures = 0, pooled = 0;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [CW-1:0] row = 0, col = 0, prow, pcol;
  logic signed [DATA_W-1:0] din [PN];
  logic signed [DATA_W-1:0] dout [PN];
  logic out_valid;
  logic signed [DATA_W-1:0] img [PN][12][W_MAX];
  int er[$], ec[$];

  pool_unit #(.PN(PN), .W_MAX(W_MAX)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .row(row), .col(col), .din(din),
    .out_valid(out_valid), .prow(prow), .pcol(pcol), .dout(dout));

  always #5 clk = ~clk;

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    pooled++;
    if (er.size() == 0 || 32'(prow) != er[0] || 32'(pcol) != ec[0]) begin
      failures++;
      if (failures < 10) $display("FAIL pooled coordinate (%0d,%0d)", prow, pcol);
    end else begin
      for (int n = 0; n < PN; n++) begin
        logic signed [DATA_W-1:0] m;
        m = img[n][2*er[0]][2*ec[0]];
        if (img[n][2*er[0]][2*ec[0]+1] > m)   m = img[n][2*er[0]][2*ec[0]+1];
        if (img[n][2*er[0]+1][2*ec[0]] > m)   m = img[n][2*er[0]+1][2*ec[0]];
        if (img[n][2*er[0]+1][2*ec[0]+1] > m) m = img[n][2*er[0]+1][2*ec[0]+1];
        checks++;
        if (dout[n] != m) begin
          failures++;
          if (failures < 10) $display("FAIL max at (%0d,%0d) lane %0d: %0d vs %0d", er[0], ec[0], n, dout[n], m);
        end
      end
    end
    if (er.size()) begin void'(er.pop_front()); void'(ec.pop_front()); end
  end

  task automatic frame(input int w, input int h);
    for (int n = 0; n < PN; n++) for (int r = 0; r < h; r++) for (int c = 0; c < w; c++)
      img[n][r][c] = DATA_W'($urandom);
    for (int r = 0; r < h; r++) for (int c = 0; c < w; c++) begin
      if (($urandom % 3) == 0) @(negedge clk);
      in_valid = 1; row = CW'(r); col = CW'(c);
      for (int n = 0; n < PN; n++) din[n] = img[n][r][c];
      if (r % 2 == 1 && c % 2 == 1) begin er.push_back(r/2); ec.push_back(c/2); end
      @(negedge clk);
      in_valid = 0;
    end
    repeat (3) @(negedge clk);
    checks++;
    if (er.size() != 0) begin failures++; $display("FAIL %0d pooled outputs missing", er.size()); er.delete(); ec.delete(); end
  endtask

  initial begin
    foreach (din[n]) din[n] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    frame(W_MAX, 8);
    frame(7, 5);
    checks++;
    if (pooled != 6*4 + 3*2) begin failures++; $display("FAIL %0d pooled outputs", pooled); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
