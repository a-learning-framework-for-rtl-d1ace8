// tb_wl_tbqnn: runs a scaled-down T-BQ-NN network (the all-convolutional CIFAR
// network: 3x3 "same" convolutions, 2x2/2 max pooling, 1x1 convolutions) layer
// after layer through the coprocessor, the way the processor would drive it.
// The top is built with PM = 4 clusters of PN = 4 arrays and 16 x 16 maps
// (the network's own maps are 32 x 32 with 128..1024 channels; only the sizes
// are reduced here, the sequence of operations is the same):
//   L1: 3x3/1, 3 -> 8 channels, 16 x 16 (M < PM: an unused zero lane;
//       N = 2*PN: two output groups)
//   L2: 3x3/1, 8 -> 4 channels, then pool 2x2/2 to 8 x 8 (M = 2*PM: two
//       accumulation passes, first_pass / last_pass)
//   L3: 1x1/1, 4 -> 8 channels, 8 x 8 (a 3x3 kernel whose only non-zero tap is
//       the centre, with padding on)
// For every output group the host loads the weights with a weight-only command,
// then streams each tile of PM input channels. Each layer's outputs are read
// back and compared with a direct model (floor(sum/2^FRAC), saturated to 16
// bits); the model's outputs feed the next layer. The command lengths are
// checked against (H+2)*(W+2) + DRAIN + 2 cycles and summed.
module tb_wl_tbqnn;
  import nbq_pkg::*;
  import tb_ref_pkg::*;

  localparam int NBIT = 3, K = 3, PM = 4, PN = 4, MAX_W = 16, MAX_H = 16;
  localparam int DRAIN = 16;
  localparam int FRAC = frac_bits(NBIT);
  localparam int DEPTH = MAX_W * MAX_H, AW = $clog2(DEPTH);
  localparam int WAW = $clog2(PM*PN);
  localparam int WW = K*K*NBIT;
  localparam int MAXC = 8;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic [31:0] wdata = 0, rdata;
  logic awready, wready, bvalid, arready, rvalid, irq_done, sat_flag;
  logic [1:0] bresp, rresp;
  logic img_we = 0, wt_we = 0;
  logic [AW-1:0] img_waddr = 0, out_raddr = 0;
  logic [PM*DATA_W-1:0] img_wdata = 0;
  logic [WAW-1:0] wt_waddr = 0;
  logic [WW-1:0] wt_wdata = 0;
  logic [PN*DATA_W-1:0] out_rdata;

  nbq_accel_top #(.NBIT(NBIT), .K(K), .PM(PM), .PN(PN), .MAX_W(MAX_W), .MAX_H(MAX_H)) dut (
    .clk(clk), .rst_n(rst_n),
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready), .s_wdata(wdata), .s_wstrb(4'hf),
    .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp),
    .s_rvalid(rvalid), .s_rready(rready),
    .img_we(img_we), .img_waddr(img_waddr), .img_wdata(img_wdata),
    .wt_we(wt_we), .wt_waddr(wt_waddr), .wt_wdata(wt_wdata),
    .out_raddr(out_raddr), .out_rdata(out_rdata), .irq_done(irq_done), .sat_flag(sat_flag));

  always #5 clk = ~clk;

  // activations of the current layer's input and output, weights of the layer
  int act [MAXC][MAX_H][MAX_W];
  int res [MAXC][MAX_H][MAX_W];
  int wts [MAXC][MAXC][K][K];
  int total_cycles = 0, n_cmd = 0, n_sat = 0;

  always @(posedge clk) if (rst_n && sat_flag) n_sat++;

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1; bready = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    @(negedge clk);
    bready = 0;
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1; rready = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk);
    rready = 0;
  endtask

  task automatic command(input cmd_t c, input int expect_cycles);
    logic [31:0] st;
    axi_write(REG_CTRL, 32'(c));
    do axi_read(REG_STATUS, st); while (!st[1]);
    axi_read(REG_CYCLES, st);
    checks++;
    if (int'(st) != expect_cycles) begin
      failures++;
      $display("FAIL command %b took %0d cycles, expected %0d", c, st, expect_cycles);
    end
    total_cycles += int'(st);
    n_cmd++;
  endtask

  // One convolution layer: M inputs -> N outputs on an h x w map, 3x3 with
  // "same" padding, optional 2x2/2 max pooling. act -> res.
  task automatic run_layer(input int M, input int N, input int h, input int w, input bit pool);
    int tiles = (M + PM - 1) / PM, groups = (N + PN - 1) / PN;
    int ho = pool ? h / 2 : h, wo = pool ? w / 2 : w;
    logic [PN*DATA_W-1:0] d;
    axi_write(REG_IMG_W, w);
    axi_write(REG_IMG_H, h);
    for (int g = 0; g < groups; g++) begin
      for (int t = 0; t < tiles; t++) begin
        cmd_t c;
        // weights of (tile t, group g) into the idle bank; they become active at its end
        for (int m = 0; m < PM; m++) for (int n = 0; n < PN; n++) begin
          int mi = t*PM + m, ni = g*PN + n;
          @(negedge clk);
          wt_we = 1; wt_waddr = WAW'(m*PN + n);
          for (int r = 0; r < K; r++) for (int j = 0; j < K; j++)
            wt_wdata[(r*K+j)*NBIT +: NBIT] = (mi < M && ni < N) ? NBIT'(wts[mi][ni][r][j]) : '0;
        end
        @(negedge clk);
        wt_we = 0;
        command(cmd_t'(7'b0000101), PM*PN + DRAIN + 2);
        // input channels of tile t
        for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) begin
          @(negedge clk);
          img_we = 1; img_waddr = AW'(y*w + x);
          for (int m = 0; m < PM; m++)
            img_wdata[m*DATA_W +: DATA_W] = (t*PM + m < M) ? DATA_W'(act[t*PM+m][y][x]) : '0;
        end
        @(negedge clk);
        img_we = 0;
        c = '0;
        c.start = 1; c.stream_en = 1; c.pad_en = 1; c.pool_en = pool;
        c.first_pass = (t == 0); c.last_pass = (t == tiles - 1);
        command(c, (h+2)*(w+2) + DRAIN + 2);
      end
      // read back PN output channels and compare
      for (int y = 0; y < ho; y++) for (int x = 0; x < wo; x++) begin
        @(negedge clk);
        out_raddr = AW'(y*wo + x);
        @(negedge clk);
        d = out_rdata;
        for (int n = 0; n < PN && g*PN + n < N; n++) begin
          checks++;
          if (int'($signed(d[n*DATA_W +: DATA_W])) != res[g*PN+n][y][x]) begin
            failures++;
            if (failures < 10) $display("FAIL out ch %0d (%0d,%0d): %0d vs %0d", g*PN+n, y, x,
                                        $signed(d[n*DATA_W +: DATA_W]), res[g*PN+n][y][x]);
          end
        end
      end
    end
  endtask

  // Model of the same layer.
  task automatic model_layer(input int M, input int N, input int h, input int w, input bit pool);
    int full [MAXC][MAX_H][MAX_W];
    for (int n = 0; n < N; n++) for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) begin
      longint s = 0;
      for (int m = 0; m < M; m++) for (int r = 0; r < K; r++) for (int j = 0; j < K; j++) begin
        int yy = y + r - 1, xx = x + j - 1;
        if (yy >= 0 && yy < h && xx >= 0 && xx < w)
          s += longint'(act[m][yy][xx]) * wscaled(NBIT, wts[m][n][r][j]);
      end
      full[n][y][x] = int'(requant(s, FRAC));
    end
    for (int n = 0; n < N; n++)
      if (pool) begin
        for (int y = 0; y < h/2; y++) for (int x = 0; x < w/2; x++) begin
          int v = full[n][2*y][2*x];
          for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++)
            if (full[n][2*y+i][2*x+j] > v) v = full[n][2*y+i][2*x+j];
          res[n][y][x] = v;
        end
      end else begin
        for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) res[n][y][x] = full[n][y][x];
      end
  endtask

  task automatic random_weights(input int M, input int N, input bit one_by_one);
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++)
      for (int r = 0; r < K; r++) for (int j = 0; j < K; j++)
        wts[m][n][r][j] = (one_by_one && !(r == 1 && j == 1)) ? 0 : int'($urandom % (1 << NBIT));
  endtask

  task automatic next_layer(input int N, input int h, input int w);
    for (int n = 0; n < N; n++) for (int y = 0; y < h; y++) for (int x = 0; x < w; x++)
      act[n][y][x] = res[n][y][x];
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    axi_write(REG_KSIZE, K);
    // input image: 3 channels, 12-bit signed pixels
    for (int m = 0; m < 3; m++) for (int y = 0; y < 16; y++) for (int x = 0; x < 16; x++)
      act[m][y][x] = int'($signed(12'($urandom)));
    // L1
    random_weights(3, 8, 0);
    model_layer(3, 8, 16, 16, 0);
    run_layer(3, 8, 16, 16, 0);
    next_layer(8, 16, 16);
    // L2 (with pooling)
    random_weights(8, 4, 0);
    model_layer(8, 4, 16, 16, 1);
    run_layer(8, 4, 16, 16, 1);
    next_layer(4, 8, 8);
    // L3 (1x1)
    random_weights(4, 8, 1);
    model_layer(4, 8, 8, 8, 0);
    run_layer(4, 8, 8, 8, 0);
    $display("commands=%0d accelerator cycles=%0d saturations=%0d", n_cmd, total_cycles, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
