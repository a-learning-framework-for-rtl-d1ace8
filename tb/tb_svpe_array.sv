// tb_svpe_array: checks the SVPE 2D convolver against a direct convolution.
// Two arrays are driven with the same columns of image rows: the 3x3 array of
// the n-BQ-NN configuration and the 11x11 universal array, run with kernel
// sizes 11, 5 and 3 in turn (the mode switch). For every complete window the
// window sum must equal sum w(r,j)*x(...)*2^FRAC, in order, two cycles after
// the last pixel of the window is sampled. New weights written into the idle
// bank between frames must not take effect until the bank select flips.
module tb_svpe_array;
  import nbq_pkg::*;
  import tb_ref_pkg::*;

  localparam int NBIT = 3, ACC_W = acc_bits(NBIT);
  localparam int KA = 3, KB = 11;
  localparam int WI = 16, HI = 14;

  int checks = 0, failures = 0, mode_runs = 0, swaps = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, win_ok_a = 0, win_ok_b = 0;
  logic signed [DATA_W-1:0] rows_a [KA];
  logic signed [DATA_W-1:0] rows_b [KB];
  logic [1:0] ks_a = 3;
  logic [3:0] ks_b = 11;
  logic we_a = 0, we_b = 0, bank = 0;
  logic [KA*KA*NBIT-1:0] wd_a = 0;
  logic [KB*KB*NBIT-1:0] wd_b = 0;
  logic va, vb;
  logic signed [ACC_W-1:0] sa, sb;

  logic signed [DATA_W-1:0] img [HI][WI];
  int wa [KA][KA];
  int wb [KB][KB];
  longint qa[$], qb[$];
  int lat_a, lat_b;

  svpe_array #(.NBIT(NBIT), .K(KA)) dut_a (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .win_ok(win_ok_a), .rows(rows_a),
    .ksize(ks_a), .w_we(we_a), .w_data(wd_a), .w_bank(bank), .out_valid(va), .sum(sa));
  svpe_array #(.NBIT(NBIT), .K(KB)) dut_b (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .win_ok(win_ok_b), .rows(rows_b),
    .ksize(ks_b), .w_we(we_b), .w_data(wd_b), .w_bank(bank), .out_valid(vb), .sum(sb));

  always #5 clk = ~clk;

  // Compare outputs with the expected queues; count the latency of the first.
  int cyc = 0, last_in = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (va) begin
      checks++;
      if (qa.size() == 0 || longint'(sa) != qa[0]) begin
        failures++;
        if (failures < 10) $display("FAIL 3x3 sum %0d expected %0d", sa, (qa.size() > 0) ? qa[0] : 0);
      end
      if (qa.size() > 0) void'(qa.pop_front());
      lat_a = cyc - last_in;
    end
    if (vb) begin
      checks++;
      if (qb.size() == 0 || longint'(sb) != qb[0]) begin
        failures++;
        if (failures < 10) $display("FAIL %0dx%0d sum %0d expected %0d", ks_b, ks_b, sb, (qb.size() > 0) ? qb[0] : 0);
      end
      if (qb.size() > 0) void'(qb.pop_front());
      lat_b = cyc - last_in;
    end
  end

  // Random weights into the idle bank (written during the previous frame).
  task automatic load_weights();
    for (int r = 0; r < KA; r++) for (int j = 0; j < KA; j++) begin
      wa[r][j] = int'($urandom % 8);
      wd_a[(r*KA+j)*NBIT +: NBIT] = NBIT'(wa[r][j]);
    end
    for (int r = 0; r < KB; r++) for (int j = 0; j < KB; j++) begin
      wb[r][j] = int'($urandom % 8);
      wd_b[(r*KB+j)*NBIT +: NBIT] = NBIT'(wb[r][j]);
    end
    @(negedge clk);
    we_a = 1; we_b = 1;
    @(negedge clk);
    we_a = 0; we_b = 0;
  endtask

  function automatic longint conv(input int k, input int r0, input int c0, input bit big);
    longint s = 0;
    for (int r = 0; r < k; r++) for (int j = 0; j < k; j++)
      s += longint'(img[r0+r][c0+j]) * wscaled(NBIT, big ? wb[r][j] : wa[r][j]);
    return s;
  endfunction

  task automatic run_frame(input int kb);
    ks_b = 4'(kb);
    for (int r = 0; r < HI; r++) for (int c = 0; c < WI; c++) img[r][c] = DATA_W'($urandom);
    for (int r = 0; r < HI; r++) begin
      for (int c = 0; c < WI; c++) begin
        if (($urandom % 4) == 0) @(negedge clk);
        in_valid = 1;
        for (int j = 0; j < KA; j++) rows_a[j] = (r-KA+1+j >= 0) ? img[r-KA+1+j][c] : 16'sd0;
        for (int j = 0; j < KB; j++) rows_b[j] = (r-KB+1+j >= 0) ? img[r-KB+1+j][c] : 16'sd0;
        win_ok_a = (r >= KA-1) && (c >= KA-1);
        win_ok_b = (r >= kb-1) && (c >= kb-1);
        if (win_ok_a) qa.push_back(conv(KA, r-KA+1, c-KA+1, 0));
        if (win_ok_b) qb.push_back(conv(kb, r-kb+1, c-kb+1, 1));
        last_in = cyc;
        @(negedge clk);
        in_valid = 0;
      end
    end
    repeat (4) @(negedge clk);
    checks++;
    if (qa.size() != 0 || qb.size() != 0) begin
      failures++;
      $display("FAIL missing outputs %0d %0d", qa.size(), qb.size());
    end
    qa.delete(); qb.delete();
    mode_runs++;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    load_weights();
    bank = ~bank; swaps++;
    foreach (rows_a[j]) rows_a[j] = 0;
    foreach (rows_b[j]) rows_b[j] = 0;
    run_frame(11);
    // Next weights go to the idle bank; the frame below must still use the old ones.
    begin
      int sa_w[KA][KA];
      int sb_w[KB][KB];
      sa_w = wa; sb_w = wb;
      load_weights();
      wa = sa_w; wb = sb_w;
      run_frame(5);
    end
    // Reload the same random draw into the model: write again, then swap.
    load_weights();
    bank = ~bank; swaps++;
    @(negedge clk);
    run_frame(3);
    checks++;
    // The monitor sees a result one edge after it is registered: ARR_LAT + 1.
    if (lat_a != ARR_LAT + 1 || lat_b != ARR_LAT + 1) begin
      failures++;
      $display("FAIL latency %0d/%0d, expected %0d", lat_a, lat_b, ARR_LAT + 1);
    end
    $display("kernel-size modes run: %0d, bank swaps: %0d", mode_runs, swaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
