// tb_load_store_unit: partial-sum accumulation, requantisation and storing.
// Three passes over a 6x5 output map (PN = 2) with behavioural memories:
// pass 1 (first) stores the window sums, pass 2 adds to them, pass 3 (last)
// adds again and writes floor(sum / 2^FRAC) saturated to 16 bits to the
// output memory. A fourth set of passes does the same with 2x2 max pooling.
// The partial-sum and output memories must match a model, values large enough
// to saturate are included and the saturation flag must rise.
module tb_load_store_unit;
  import nbq_pkg::*;
  import tb_ref_pkg::*;

  localparam int NBIT = 3, PN = 2, W_MAX = 12, DEPTH = 64, ACC_W = acc_bits(NBIT);
  localparam int CW = $clog2(W_MAX + 1), AW = $clog2(DEPTH), FRAC = frac_bits(NBIT);
  localparam int WO = 6, HO = 5;

  int checks = 0, failures = 0, sat_seen = 0;
  logic clk = 0, rst_n = 0;
  logic first_pass = 0, last_pass = 0, pool_en = 0, in_valid = 0;
  logic [CW-1:0] orow = 0, ocol = 0;
  logic signed [ACC_W-1:0] sums [PN];
  logic [AW-1:0] ps_raddr, ps_waddr, out_waddr;
  logic [PN*ACC_W-1:0] ps_rdata, ps_wdata;
  logic [PN*DATA_W-1:0] out_wdata;
  logic ps_we, out_we, sat_event;

  logic [PN*ACC_W-1:0] psmem [DEPTH];
  logic [PN*DATA_W-1:0] omem [DEPTH];
  longint mps [HO][WO][PN];

  load_store_unit #(.NBIT(NBIT), .PN(PN), .W_MAX(W_MAX), .DEPTH(DEPTH)) dut (
    .clk(clk), .rst_n(rst_n), .wo(CW'(WO)), .first_pass(first_pass), .last_pass(last_pass),
    .pool_en(pool_en), .in_valid(in_valid), .orow(orow), .ocol(ocol), .sums(sums),
    .ps_raddr(ps_raddr), .ps_rdata(ps_rdata), .ps_we(ps_we), .ps_waddr(ps_waddr),
    .ps_wdata(ps_wdata), .out_we(out_we), .out_waddr(out_waddr), .out_wdata(out_wdata),
    .sat_event(sat_event));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    ps_rdata <= psmem[ps_raddr];
    if (rst_n && ps_we) psmem[ps_waddr] <= ps_wdata;
    if (rst_n && out_we) omem[out_waddr] <= out_wdata;
    if (rst_n && sat_event) sat_seen++;
  end

  task automatic pass(input bit first, input bit last);
    first_pass = first; last_pass = last;
    for (int r = 0; r < HO; r++) for (int c = 0; c < WO; c++) begin
      if (($urandom % 3) == 0) @(negedge clk);
      in_valid = 1; orow = CW'(r); ocol = CW'(c);
      for (int n = 0; n < PN; n++) begin
        longint v;
        v = (($urandom % 8) == 0) ? longint'($signed(20'($urandom))) * 8 : longint'($signed(18'($urandom)));
        sums[n] = ACC_W'(v);
        mps[r][c][n] = first ? v : mps[r][c][n] + v;
      end
      @(negedge clk);
      in_valid = 0;
    end
    repeat (5) @(negedge clk);
  endtask

  task automatic check_psums();
    for (int r = 0; r < HO; r++) for (int c = 0; c < WO; c++) for (int n = 0; n < PN; n++) begin
      checks++;
      if (longint'($signed(psmem[r*WO+c][n*ACC_W +: ACC_W])) != mps[r][c][n]) begin
        failures++;
        if (failures < 10) $display("FAIL psum (%0d,%0d,%0d)", r, c, n);
      end
    end
  endtask

  initial begin
    foreach (sums[n]) sums[n] = 0;
    for (int a = 0; a < DEPTH; a++) omem[a] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // without pooling
    pass(1, 0); check_psums();
    pass(0, 0); check_psums();
    pass(0, 1); check_psums();
    for (int r = 0; r < HO; r++) for (int c = 0; c < WO; c++) for (int n = 0; n < PN; n++) begin
      checks++;
      if (longint'($signed(omem[r*WO+c][n*DATA_W +: DATA_W])) != requant(mps[r][c][n], FRAC)) begin
        failures++;
        if (failures < 10) $display("FAIL out (%0d,%0d,%0d): %0d vs %0d", r, c, n,
                                    $signed(omem[r*WO+c][n*DATA_W +: DATA_W]), requant(mps[r][c][n], FRAC));
      end
    end
    // with pooling
    for (int a = 0; a < DEPTH; a++) omem[a] = '0;
    pool_en = 1;
    pass(1, 0);
    pass(0, 1); check_psums();
    for (int r = 0; r < HO/2; r++) for (int c = 0; c < WO/2; c++) for (int n = 0; n < PN; n++) begin
      longint m;
      m = -100000;
      for (int i = 0; i < 2; i++) for (int j = 0; j < 2; j++)
        if (requant(mps[2*r+i][2*c+j][n], FRAC) > m) m = requant(mps[2*r+i][2*c+j][n], FRAC);
      checks++;
      if (longint'($signed(omem[r*(WO/2)+c][n*DATA_W +: DATA_W])) != m) begin
        failures++;
        if (failures < 10) $display("FAIL pooled (%0d,%0d,%0d)", r, c, n);
      end
    end
    checks++;
    if (sat_seen == 0) begin failures++; $display("FAIL saturation never seen"); end
    $display("saturation events: %0d", sat_seen);
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
