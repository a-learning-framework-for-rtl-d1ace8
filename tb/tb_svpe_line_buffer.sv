// tb_svpe_line_buffer: streams random images (with idle cycles between pixels)
// through the k row FIFOs and checks, one cycle after every pixel (r, c), that
// the output column holds image pixels (r-k+1 .. r, c) and that win_ok is set
// exactly when r >= ksize-1 and c >= ksize-1. Two frame widths are used to
// check that the FIFOs follow a width change between frames.
module tb_svpe_line_buffer;
  import nbq_pkg::*;

  localparam int K = 3, W_MAX = 12, CW = $clog2(W_MAX + 1);

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [DATA_W-1:0] pix = 0;
  logic [CW-1:0] row = 0, col = 0;
  logic [$clog2(K+1)-1:0] ksize = 3;
  logic out_valid, win_ok;
  logic signed [DATA_W-1:0] rows [K];
  logic signed [DATA_W-1:0] img [16][W_MAX];

  svpe_line_buffer #(.K(K), .W_MAX(W_MAX)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .pix(pix), .row(row), .col(col),
    .ksize(ksize), .out_valid(out_valid), .win_ok(win_ok), .rows(rows));

  always #5 clk = ~clk;

  task automatic run_frame(input int w, input int h);
    for (int r = 0; r < h; r++) for (int c = 0; c < w; c++) img[r][c] = DATA_W'($urandom);
    for (int r = 0; r < h; r++) begin
      for (int c = 0; c < w; c++) begin
        while (($urandom % 3) == 0) @(negedge clk);   // idle cycles
        in_valid = 1; pix = img[r][c]; row = CW'(r); col = CW'(c);
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (!out_valid || (win_ok != (r >= K-1 && c >= K-1))) begin
          failures++;
          if (failures < 10) $display("FAIL valid/win_ok at (%0d,%0d)", r, c);
        end
        for (int j = 0; j < K; j++) begin
          if (r - (K-1) + j >= 0) begin
            checks++;
            if (rows[j] != img[r-(K-1)+j][c]) begin
              failures++;
              if (failures < 10) $display("FAIL row %0d at (%0d,%0d): %0d vs %0d", j, r, c, rows[j], img[r-(K-1)+j][c]);
            end
          end
        end
      end
    end
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL out_valid without input"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run_frame(W_MAX, 6);
    run_frame(7, 9);
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
