// tb_svpe_cluster: one SVPE cluster (line buffer + PN arrays + cascade adders).
// A random image streams in raster order with idle cycles; each array gets its
// own random 3x3 kernel through the weight-write port (array select). On every
// output the cascade output of array n must equal the cascade input (random,
// changing every cycle) plus the direct 3x3 convolution of kernel n at the
// window, and outputs must come in raster order, one per complete window.
module tb_svpe_cluster;
  import nbq_pkg::*;
  import tb_ref_pkg::*;

  localparam int NBIT = 3, K = 3, PN = 3, W_MAX = 10, ACC_W = acc_bits(NBIT);
  localparam int WI = 9, HI = 7;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, w_we = 0, w_bank = 0;
  logic signed [DATA_W-1:0] pix = 0;
  logic [3:0] row = 0, col = 0;
  logic [1:0] w_sel = 0;
  logic [K*K*NBIT-1:0] w_data = 0;
  logic signed [ACC_W-1:0] cas_in [PN];
  logic signed [ACC_W-1:0] cas_out [PN];
  logic out_valid;

  logic signed [DATA_W-1:0] img [HI][WI];
  int w [PN][K][K];
  int exp_r[$], exp_c[$];

  svpe_cluster #(.NBIT(NBIT), .K(K), .PN(PN), .W_MAX(W_MAX)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .pix(pix), .row(row), .col(col),
    .ksize(2'd3), .w_we(w_we), .w_sel(w_sel), .w_data(w_data), .w_bank(w_bank),
    .cas_in(cas_in), .out_valid(out_valid), .cas_out(cas_out));

  always #5 clk = ~clk;

  always @(posedge clk) begin
    #1;
    foreach (cas_in[n]) cas_in[n] = ACC_W'($signed(20'($urandom)));
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    if (exp_r.size() == 0) begin
      failures++; $display("FAIL unexpected output");
    end else begin
      for (int n = 0; n < PN; n++) begin
        longint s;
        s = longint'(cas_in[n]);
        for (int r = 0; r < K; r++) for (int j = 0; j < K; j++)
          s += longint'(img[exp_r[0]+r][exp_c[0]+j]) * wscaled(NBIT, w[n][r][j]);
        checks++;
        if (longint'(cas_out[n]) != s) begin
          failures++;
          if (failures < 10) $display("FAIL (%0d,%0d) lane %0d: %0d vs %0d", exp_r[0], exp_c[0], n, cas_out[n], s);
        end
      end
      void'(exp_r.pop_front()); void'(exp_c.pop_front());
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < PN; n++) begin
      for (int r = 0; r < K; r++) for (int j = 0; j < K; j++) begin
        w[n][r][j] = int'($urandom % 8);
        w_data[(r*K+j)*NBIT +: NBIT] = NBIT'(w[n][r][j]);
      end
      w_we = 1; w_sel = 2'(n);
      @(negedge clk);
    end
    w_we = 0;
    w_bank = 1;
    for (int r = 0; r < HI; r++) for (int c = 0; c < WI; c++) img[r][c] = DATA_W'($urandom);
    for (int r = 0; r < HI; r++) for (int c = 0; c < WI; c++) begin
      if (($urandom % 3) == 0) @(negedge clk);
      in_valid = 1; pix = img[r][c]; row = 4'(r); col = 4'(c);
      if (r >= K-1 && c >= K-1) begin exp_r.push_back(r-K+1); exp_c.push_back(c-K+1); end
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
