// tb_nbq_accel_full: the end-to-end test of tb_nbq_accel_top with the top at
// its default parameters (3-bit weights, 3x3, Pm = 32, Pn = 8, 32x32 maps).
// The processor side is modelled by AXI4-Lite tasks on the register port and
// by the host ports of the on-chip memories. Two layers are run and the output
// memory is compared with a direct convolution model (floor(sum / 2^FRAC),
// saturated to 16 bits, optionally 2x2 max pooled):
//  A: 2*PM input channels, PN output channels, "same" padding. A weight-only
//     command fills one bank; the first pass streams channel tile 0 while the
//     weights of tile 1 are loaded into the idle bank; the last pass streams
//     tile 1, accumulates onto the stored partial sums and requantises.
//  B: PM input channels, one pass, no padding, 2x2 max pooling, full-range
//     pixels so that requantisation saturates.
// The mechanisms of the design are counted and each must occur: weight-only
// command, weight load overlapped with streaming, bank swap, zero padding,
// partial-sum accumulation, pooling, saturation. The command length read from
// the CYCLES register must equal (H+2p)*(W+2p) + DRAIN + 2 for a streaming
// command, one padded-frame position per cycle.
module tb_nbq_accel_full;
  import nbq_pkg::*;
  import tb_ref_pkg::*;

  localparam int NBIT = 3, K = 3, PM = 32, PN = 8, MAX_W = 32, MAX_H = 32;   // the top's defaults
  localparam int IW = 32, IH = 32;     // CIFAR-size layer
  localparam int DRAIN = 16;
  localparam int ACC_W = acc_bits(NBIT), FRAC = frac_bits(NBIT);
  localparam int DEPTH = MAX_W * MAX_H, AW = $clog2(DEPTH);
  localparam int WAW = (PM*PN > 1) ? $clog2(PM*PN) : 1;
  localparam int WW = K*K*NBIT;

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

  nbq_accel_top dut (
    .clk(clk), .rst_n(rst_n),
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready), .s_wdata(wdata), .s_wstrb(4'hf),
    .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp),
    .s_rvalid(rvalid), .s_rready(rready),
    .img_we(img_we), .img_waddr(img_waddr), .img_wdata(img_wdata),
    .wt_we(wt_we), .wt_waddr(wt_waddr), .wt_wdata(wt_wdata),
    .out_raddr(out_raddr), .out_rdata(out_rdata), .irq_done(irq_done), .sat_flag(sat_flag));

  always #5 clk = ~clk;

  // ---------------------------------------------------------------- model data
  logic signed [DATA_W-1:0] img [2*PM][MAX_H][MAX_W];
  int wts [2*PM][PN][K][K];

  // ------------------------------------------------------- mechanism counters
  int n_wonly = 0, n_overlap = 0, n_swap = 0, n_pad = 0, n_accum = 0, n_pool = 0, n_sat = 0;
  logic bank_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.w_bank != bank_q) n_swap++;
    bank_q <= dut.w_bank;
    if (dut.px_valid && dut.u_fetch.st_in == 1'b0) n_pad++;
    if (dut.w_we && dut.px_valid) n_overlap++;
    if (dut.ps_we && !dut.first_pass) n_accum++;
    if (dut.u_ls.pl_valid && dut.pool_en) n_pool++;
    if (sat_flag) n_sat++;
  end

  // ------------------------------------------------------------- AXI-Lite BFM
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

  // Run a command and wait for its end (polling STATUS.done).
  task automatic command(input cmd_t c, output int cycles);
    logic [31:0] st;
    axi_write(REG_CTRL, 32'(c));
    do axi_read(REG_STATUS, st); while (!st[1]);
    axi_read(REG_CYCLES, st);
    cycles = int'(st);
  endtask

  // ------------------------------------------------------------- host writes
  task automatic load_image(input int tile, input int w, input int h);
    for (int y = 0; y < h; y++) for (int x = 0; x < w; x++) begin
      @(negedge clk);
      img_we = 1; img_waddr = AW'(y*w + x);
      for (int m = 0; m < PM; m++) img_wdata[m*DATA_W +: DATA_W] = img[tile*PM+m][y][x];
    end
    @(negedge clk);
    img_we = 0;
  endtask

  task automatic load_weights(input int tile);
    for (int m = 0; m < PM; m++) for (int n = 0; n < PN; n++) begin
      @(negedge clk);
      wt_we = 1; wt_waddr = WAW'(m*PN + n);
      for (int r = 0; r < K; r++) for (int j = 0; j < K; j++)
        wt_wdata[(r*K+j)*NBIT +: NBIT] = NBIT'(wts[tile*PM+m][n][r][j]);
    end
    @(negedge clk);
    wt_we = 0;
  endtask

  // ---------------------------------------------------------------- reference
  function automatic longint ref_sum(input int nch, input int n, input int y, input int x,
                                     input int p, input int w, input int h);
    longint s = 0;
    for (int m = 0; m < nch; m++) for (int r = 0; r < K; r++) for (int j = 0; j < K; j++) begin
      int yy = y + r - p, xx = x + j - p;
      if (yy >= 0 && yy < h && xx >= 0 && xx < w)
        s += longint'(img[m][yy][xx]) * wscaled(NBIT, wts[m][n][r][j]);
    end
    return s;
  endfunction

  task automatic read_out(input int addr, output logic [PN*DATA_W-1:0] d);
    @(negedge clk);
    out_raddr = AW'(addr);
    @(negedge clk);
    d = out_rdata;
  endtask

  task automatic check_cycles(input string what, input int got, input int hp, input int wp);
    checks++;
    if (got != hp*wp + DRAIN + 2) begin
      failures++;
      $display("FAIL %s took %0d cycles, expected %0d", what, got, hp*wp + DRAIN + 2);
    end
  endtask

  int cyc;
  logic [PN*DATA_W-1:0] d;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---------------------------------------------------------------- layer A
    for (int m = 0; m < 2*PM; m++) for (int y = 0; y < IH; y++) for (int x = 0; x < IW; x++)
      img[m][y][x] = DATA_W'($signed(12'($urandom)));
    for (int m = 0; m < 2*PM; m++) for (int n = 0; n < PN; n++)
      for (int r = 0; r < K; r++) for (int j = 0; j < K; j++) wts[m][n][r][j] = int'($urandom % (1 << NBIT));
    axi_write(REG_IMG_W, IW);
    axi_write(REG_IMG_H, IH);
    axi_write(REG_KSIZE, K);
    load_weights(0);
    command(cmd_t'(7'b0000101), cyc);                 // weights only
    n_wonly++;
    checks++;
    if (cyc != PM*PN + DRAIN + 2) begin failures++; $display("FAIL weight-only command %0d cycles", cyc); end
    load_weights(1);
    load_image(0, IW, IH);
    command(cmd_t'(7'b1001111), cyc);                 // pad, first pass, weights of tile 1, stream
    check_cycles("pass 1", cyc, IH+2, IW+2);
    load_image(1, IW, IH);
    command(cmd_t'(7'b1010011), cyc);                 // pad, last pass, stream
    check_cycles("pass 2", cyc, IH+2, IW+2);
    for (int y = 0; y < IH; y++) for (int x = 0; x < IW; x++) begin
      read_out(y*IW + x, d);
      for (int n = 0; n < PN; n++) begin
        longint e;
        e = requant(ref_sum(2*PM, n, y, x, 1, IW, IH), FRAC);
        checks++;
        if (longint'($signed(d[n*DATA_W +: DATA_W])) != e) begin
          failures++;
          if (failures < 10) $display("FAIL A out (%0d,%0d) ch %0d: %0d vs %0d", y, x, n,
                                      $signed(d[n*DATA_W +: DATA_W]), e);
        end
      end
    end
    // ---------------------------------------------------------------- layer B
    for (int m = 0; m < PM; m++) for (int y = 0; y < MAX_H; y++) for (int x = 0; x < MAX_W; x++)
      img[m][y][x] = DATA_W'($urandom);
    for (int m = 0; m < PM; m++) for (int n = 0; n < PN; n++)
      for (int r = 0; r < K; r++) for (int j = 0; j < K; j++) wts[m][n][r][j] = int'($urandom % (1 << NBIT));
    axi_write(REG_IMG_W, MAX_W);
    axi_write(REG_IMG_H, MAX_H);
    load_weights(0);
    command(cmd_t'(7'b0000101), cyc);                 // weights only
    n_wonly++;
    load_image(0, MAX_W, MAX_H);
    command(cmd_t'(7'b0111011), cyc);                 // pool, last+first, stream, no padding
    check_cycles("pooled pass", cyc, MAX_H, MAX_W);
    for (int y = 0; y < (MAX_H-K+1)/2; y++) for (int x = 0; x < (MAX_W-K+1)/2; x++) begin
      read_out(y*((MAX_W-K+1)/2) + x, d);
      for (int n = 0; n < PN; n++) begin
        longint e, v;
        e = -100000;
        for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++) begin
          v = requant(ref_sum(PM, n, 2*y+i, 2*x+j, 0, MAX_W, MAX_H), FRAC);
          if (v > e) e = v;
        end
        checks++;
        if (longint'($signed(d[n*DATA_W +: DATA_W])) != e) begin
          failures++;
          if (failures < 10) $display("FAIL B out (%0d,%0d) ch %0d: %0d vs %0d", y, x, n,
                                      $signed(d[n*DATA_W +: DATA_W]), e);
        end
      end
    end
    // ------------------------------------------------------- mechanism report
    $display("weight-only=%0d overlap=%0d swaps=%0d pad=%0d accum=%0d pool=%0d sat=%0d",
             n_wonly, n_overlap, n_swap, n_pad, n_accum, n_pool, n_sat);
    checks++; if (n_wonly == 0)   begin failures++; $display("FAIL no weight-only command"); end
    checks++; if (n_overlap == 0) begin failures++; $display("FAIL no overlapped weight load"); end
    checks++; if (n_swap == 0)    begin failures++; $display("FAIL no bank swap"); end
    checks++; if (n_pad == 0)     begin failures++; $display("FAIL no padding"); end
    checks++; if (n_accum == 0)   begin failures++; $display("FAIL no accumulation"); end
    checks++; if (n_pool == 0)    begin failures++; $display("FAIL no pooling"); end
    checks++; if (n_sat == 0)     begin failures++; $display("FAIL no saturation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
