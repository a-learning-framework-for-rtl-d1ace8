// tb_svpe_cluster_if: the cluster interface with PM = 3 clusters of PN = 2
// arrays. Every (cluster, array) gets its own random 3x3 kernel over the CTRL
// weight port; PM random channels stream in raster order with idle cycles.
// Each DATA OUT beat must carry the output coordinates of the next complete
// window in raster order and, for output channel n, the sum over the PM input
// channels of the direct 3x3 convolutions, three cycles after the last pixel
// of the window (LB_LAT + ARR_LAT).
module tb_svpe_cluster_if;
  import nbq_pkg::*;
  import tb_ref_pkg::*;

  localparam int NBIT = 3, K = 3, PM = 3, PN = 2, W_MAX = 10, ACC_W = acc_bits(NBIT);
  localparam int WI = 8, HI = 6;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, w_we = 0, w_bank = 0;
  logic signed [DATA_W-1:0] pix [PM];
  logic [3:0] row = 0, col = 0, orow, ocol;
  logic [1:0] w_cl = 0;
  logic [0:0] w_sel = 0;
  logic [K*K*NBIT-1:0] w_data = 0;
  logic signed [ACC_W-1:0] sums [PN];
  logic out_valid;

  logic signed [DATA_W-1:0] img [PM][HI][WI];
  int w [PM][PN][K][K];
  int exp_r[$], exp_c[$], exp_t[$];
  int cyc = 0;

  svpe_cluster_if #(.NBIT(NBIT), .K(K), .PM(PM), .PN(PN), .W_MAX(W_MAX)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .pix(pix), .row(row), .col(col),
    .ksize(2'd3), .w_bank(w_bank), .w_we(w_we), .w_cl(w_cl), .w_sel(w_sel), .w_data(w_data),
    .out_valid(out_valid), .orow(orow), .ocol(ocol), .sums(sums));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_r.size() == 0) begin
      failures++; $display("FAIL unexpected output");
    end else begin
      if (32'(orow) != exp_r[0] || 32'(ocol) != exp_c[0] || cyc - exp_t[0] != LB_LAT + ARR_LAT) begin
        failures++;
        if (failures < 10) $display("FAIL coord (%0d,%0d) vs (%0d,%0d), latency %0d",
                                    orow, ocol, exp_r[0], exp_c[0], cyc - exp_t[0]);
      end
      for (int n = 0; n < PN; n++) begin
        longint s;
        s = 0;
        for (int m = 0; m < PM; m++)
          for (int r = 0; r < K; r++) for (int j = 0; j < K; j++)
            s += longint'(img[m][exp_r[0]+r][exp_c[0]+j]) * wscaled(NBIT, w[m][n][r][j]);
        checks++;
        if (longint'(sums[n]) != s) begin
          failures++;
          if (failures < 10) $display("FAIL (%0d,%0d) ch %0d: %0d vs %0d", exp_r[0], exp_c[0], n, sums[n], s);
        end
      end
      void'(exp_r.pop_front()); void'(exp_c.pop_front()); void'(exp_t.pop_front());
    end
  end

  initial begin
    foreach (pix[m]) pix[m] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int m = 0; m < PM; m++) for (int n = 0; n < PN; n++) begin
      for (int r = 0; r < K; r++) for (int j = 0; j < K; j++) begin
        w[m][n][r][j] = int'($urandom % 8);
        w_data[(r*K+j)*NBIT +: NBIT] = NBIT'(w[m][n][r][j]);
      end
      w_we = 1; w_cl = 2'(m); w_sel = 1'(n);
      @(negedge clk);
    end
    w_we = 0;
    w_bank = 1;
    for (int m = 0; m < PM; m++)
      for (int r = 0; r < HI; r++) for (int c = 0; c < WI; c++) img[m][r][c] = DATA_W'($urandom);
    for (int r = 0; r < HI; r++) for (int c = 0; c < WI; c++) begin
      if (($urandom % 3) == 0) @(negedge clk);
      in_valid = 1; row = 4'(r); col = 4'(c);
      for (int m = 0; m < PM; m++) pix[m] = img[m][r][c];
      if (r >= K-1 && c >= K-1) begin
        exp_r.push_back(r-K+1); exp_c.push_back(c-K+1); exp_t.push_back(cyc);
      end
      @(negedge clk);
      in_valid = 0;
    end
    repeat (6) @(negedge clk);
    checks++;
    if (exp_r.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_r.size()); end
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
