// tb_reg_if: the AXI4-Lite register interface. Writes and reads the shape
// registers, issues a command and checks that it appears on cmd for exactly
// one cycle with the written bits, that a start is ignored while busy, that
// STATUS shows busy, the sticky done flag and the weight bank, and that CYCLES
// reads the length of the last command. Response handshakes are held with
// bready/rready low for a few cycles to exercise back-pressure.
module tb_reg_if;
  import nbq_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic [31:0] wdata = 0, rdata;
  logic awready, wready, bvalid, arready, rvalid;
  logic [1:0] bresp, rresp;
  cmd_t cmd;
  logic [5:0] img_w, img_h;
  logic [1:0] ksize;
  logic busy = 0, done = 0, w_bank = 0;
  int cmd_pulses = 0;
  cmd_t last_cmd;

  reg_if #(.CW(6), .KW(2)) dut (
    .clk(clk), .rst_n(rst_n),
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready), .s_wdata(wdata), .s_wstrb(4'hf),
    .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp),
    .s_rvalid(rvalid), .s_rready(rready),
    .cmd(cmd), .img_w(img_w), .img_h(img_h), .ksize(ksize), .busy(busy), .done(done), .w_bank(w_bank));

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && cmd.start) begin cmd_pulses++; last_cmd = cmd; end

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1; bready = 0;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
    bready = 1;
    do @(posedge clk); while (!bvalid);
    checks++;
    if (bresp != 2'b00) failures++;
    @(negedge clk);
    bready = 0;
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1; rready = 0;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
    rready = 1;
    do @(posedge clk); while (!rvalid);
    d = rdata;
    @(negedge clk);
    rready = 0;
  endtask

  task automatic expect_eq(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: %h vs %h", what, got, exp);
    end
  endtask

  logic [31:0] d;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    axi_write(REG_IMG_W, 32'd17);
    axi_write(REG_IMG_H, 32'd9);
    axi_write(REG_KSIZE, 32'd3);
    axi_read(REG_IMG_W, d);  expect_eq("IMG_W", d, 17);
    axi_read(REG_IMG_H, d);  expect_eq("IMG_H", d, 9);
    axi_read(REG_KSIZE, d);  expect_eq("KSIZE", d, 3);
    expect_eq("img_w port", 32'(img_w), 17);
    expect_eq("img_h port", 32'(img_h), 9);
    // command: stream + wload + first + pad
    axi_write(REG_CTRL, 32'b1001111);
    expect_eq("one pulse", 32'(cmd_pulses), 1);
    expect_eq("cmd bits", 32'(last_cmd), 32'b1001111);
    // the accelerator runs for 20 cycles
    busy = 1;
    axi_read(REG_STATUS, d); expect_eq("STATUS busy", d, 32'b001);
    axi_write(REG_CTRL, 32'b0000011);   // ignored while busy
    repeat (12) @(negedge clk);
    w_bank = 1; done = 1; busy = 0;
    @(negedge clk);
    done = 0;
    expect_eq("no start while busy", 32'(cmd_pulses), 1);
    axi_read(REG_STATUS, d); expect_eq("STATUS done", d, 32'b110);
    axi_read(REG_CYCLES, d);
    checks++;
    if (d < 20 || d > 40) begin failures++; $display("FAIL CYCLES %0d", d); end
    axi_write(REG_CTRL, 32'b0010011);
    expect_eq("second pulse", 32'(cmd_pulses), 2);
    axi_read(REG_STATUS, d); expect_eq("done cleared", d, 32'b100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
