// tb_fetch_unit: the fetch unit against behavioural 1-cycle memories.
// Command 1 loads weights and streams a padded frame at the same time; it must
// emit PM*PN weight writes (cluster m, array n, word m*PN+n) and exactly one
// DATA IN beat per padded-frame position in raster order, zero in the border
// and the stored pixel inside, at one position per cycle; then flip the weight
// bank and pulse done after (H+2p)*(W+2p) + DRAIN + 2 cycles. Command 2 streams
// an unpadded frame without weights, the bank must stay.
module tb_fetch_unit;
  import nbq_pkg::*;

  localparam int NBIT = 3, K = 3, PM = 2, PN = 2, W_MAX = 12, DEPTH = 100, DRAIN = 16;
  localparam int CW = $clog2(W_MAX + 1), IAW = $clog2(DEPTH), WW = K*K*NBIT;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  cmd_t cmd = '0;
  logic [CW-1:0] img_w = 0, img_h = 0, wo;
  logic [1:0] ksize = 3;
  logic busy, done;
  logic [IAW-1:0] img_raddr;
  logic [PM*DATA_W-1:0] img_rdata;
  logic [1:0] wt_raddr;
  logic [WW-1:0] wt_rdata;
  logic px_valid, w_bank, w_we, first_pass, last_pass, pool_en;
  logic signed [DATA_W-1:0] px [PM];
  logic [CW-1:0] px_row, px_col;
  logic [0:0] w_cl, w_sel;
  logic [WW-1:0] w_data;

  logic [PM*DATA_W-1:0] imem [DEPTH];
  logic [WW-1:0] wmem [PM*PN];

  fetch_unit #(.NBIT(NBIT), .K(K), .PM(PM), .PN(PN), .W_MAX(W_MAX), .IMG_DEPTH(DEPTH), .DRAIN(DRAIN)) dut (
    .clk(clk), .rst_n(rst_n), .cmd(cmd), .img_w(img_w), .img_h(img_h), .ksize(ksize),
    .busy(busy), .done(done), .wo(wo), .img_raddr(img_raddr), .img_rdata(img_rdata),
    .wt_raddr(wt_raddr), .wt_rdata(wt_rdata), .px_valid(px_valid), .px(px), .px_row(px_row),
    .px_col(px_col), .w_bank(w_bank), .w_we(w_we), .w_cl(w_cl), .w_sel(w_sel), .w_data(w_data),
    .first_pass(first_pass), .last_pass(last_pass), .pool_en(pool_en));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    img_rdata <= imem[img_raddr];
    wt_rdata  <= wmem[wt_raddr];
  end

  int nw, np, t_start, t_done, cyc;
  int pad, hp, wp, w, h;
  always @(posedge clk) cyc++;

  // Stream monitor.
  always @(negedge clk) if (rst_n) begin
    if (w_we) begin
      int idx;
      idx = int'(w_cl) * PN + int'(w_sel);
      checks++;
      if (idx != nw || w_data != wmem[nw]) begin
        failures++;
        if (failures < 10) $display("FAIL weight write %0d: idx %0d", nw, idx);
      end
      nw++;
    end
    if (px_valid) begin
      int r, c;
      r = np / wp; c = np % wp;
      checks++;
      if (32'(px_row) != r || 32'(px_col) != c) begin
        failures++;
        if (failures < 10) $display("FAIL position %0d: (%0d,%0d) vs (%0d,%0d)", np, px_row, px_col, r, c);
      end
      for (int m = 0; m < PM; m++) begin
        logic signed [DATA_W-1:0] e;
        if (r < pad || r >= pad + h || c < pad || c >= pad + w) e = 0;
        else e = imem[(r-pad)*w + (c-pad)][m*DATA_W +: DATA_W];
        checks++;
        if (px[m] != e) begin
          failures++;
          if (failures < 10) $display("FAIL pixel (%0d,%0d) ch %0d: %0d vs %0d", r, c, m, px[m], e);
        end
      end
      np++;
    end
    if (done) t_done = cyc;
  end

  task automatic run(input cmd_t c, input int ww, input int hh);
    w = ww; h = hh;
    pad = c.pad_en ? (K-1)/2 : 0;
    hp = h + 2*pad; wp = w + 2*pad;
    img_w = CW'(w); img_h = CW'(h);
    nw = 0; np = 0;
    @(negedge clk);
    cmd = c; t_start = cyc;
    @(negedge clk);
    cmd = '0;
    wait (done);
    repeat (2) @(negedge clk);
    checks++;
    if (np != hp*wp*int'(c.stream_en)) begin failures++; $display("FAIL %0d positions, expected %0d", np, hp*wp); end
    checks++;
    if (nw != PM*PN*int'(c.wload_en)) begin failures++; $display("FAIL %0d weight writes", nw); end
    checks++;
    if (t_done - t_start != hp*wp + DRAIN + 2) begin
      failures++; $display("FAIL command took %0d cycles, expected %0d", t_done - t_start, hp*wp + DRAIN + 2);
    end
    checks++;
    if (32'(wo) != wp - K + 1) begin failures++; $display("FAIL wo %0d", wo); end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) imem[a] = {$urandom, $urandom};
    for (int a = 0; a < PM*PN; a++) wmem[a] = WW'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run(cmd_t'(7'b1011111), 7, 5);   // pad, first+last, weights, stream
    checks++;
    if (w_bank != 1'b1 || !first_pass || !last_pass) begin failures++; $display("FAIL bank/flags after cmd 1"); end
    run(cmd_t'(7'b0100011), 6, 4);   // pool, stream only, no padding
    checks++;
    if (w_bank != 1'b1 || !pool_en || first_pass) begin failures++; $display("FAIL bank/flags after cmd 2"); end
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
