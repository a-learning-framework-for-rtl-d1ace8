// nbq_accel_top: convolution coprocessor for n-bit power-of-two weight networks
// (n-BQ-NN), built from shift vector processing element (SVPE) clusters.
//
// Data flow: the processor fills the on-chip image and weight memories (host
// write ports, standing in for the AXI-HP path), sets the layer shape and
// issues a command through the AXI4-Lite register interface (AXI-GP). The
// fetch unit loads the weights into the idle banks of the PM x PN SVPE arrays
// and streams the (zero-padded) image, one pixel of each of PM input channels
// per cycle, into the SVPE cluster interface. Each of the PM clusters convolves
// its channel with PN kernels using shift-add arrays; the cluster cascade sums
// over the PM channels. The load/store unit accumulates the PN window sums with
// the partial sums of earlier passes, and on the last pass requantises them to
// 16 bits, optionally max-pools them 2x2 and writes them to the output memory,
// which the processor reads back (host read port).
//
// Parameters take the paper's values where it gives them: n = 3 bit weights
// (T-BQ-NN), 3x3 kernels, parallelism (Pn, Pm) = (8, 32) and 16-bit data;
// MAX_W x MAX_H = 32 x 32 is the largest feature map of the paper's CIFAR
// network. With K = 11 the arrays become the universal 3/5/11 array.
// Timing: one padded-frame position per cycle; a command takes
// (H+2p)*(W+2p) + DRAIN + 2 cycles when it streams, PM*PN + DRAIN + 2 when it
// only loads weights.
module nbq_accel_top
  import nbq_pkg::*;
#(
  parameter int unsigned NBIT  = 3,
  parameter int unsigned K     = 3,
  parameter int unsigned PM    = 32,
  parameter int unsigned PN    = 8,
  parameter int unsigned MAX_W = 32,
  parameter int unsigned MAX_H = 32,
  // derived
  parameter int unsigned ACC_W = acc_bits(NBIT),
  parameter int unsigned W_MAX = MAX_W + K - 1,
  parameter int unsigned CW    = $clog2(W_MAX + 1),
  parameter int unsigned KW    = $clog2(K + 1),
  parameter int unsigned DEPTH = MAX_W * MAX_H,
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned WAW   = (PM*PN > 1) ? $clog2(PM*PN) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // AXI-GP: AXI4-Lite register port
  input  logic [7:0]             s_awaddr,
  input  logic                   s_awvalid,
  output logic                   s_awready,
  input  logic [31:0]            s_wdata,
  input  logic [3:0]             s_wstrb,
  input  logic                   s_wvalid,
  output logic                   s_wready,
  output logic [1:0]             s_bresp,
  output logic                   s_bvalid,
  input  logic                   s_bready,
  input  logic [7:0]             s_araddr,
  input  logic                   s_arvalid,
  output logic                   s_arready,
  output logic [31:0]            s_rdata,
  output logic [1:0]             s_rresp,
  output logic                   s_rvalid,
  input  logic                   s_rready,
  // data path from the processing system (stands for AXI-HP)
  input  logic                   img_we,
  input  logic [AW-1:0]          img_waddr,
  input  logic [PM*DATA_W-1:0]   img_wdata,
  input  logic                   wt_we,
  input  logic [WAW-1:0]         wt_waddr,
  input  logic [K*K*NBIT-1:0]    wt_wdata,
  input  logic [AW-1:0]          out_raddr,
  output logic [PN*DATA_W-1:0]   out_rdata,
  // end of a command; a requantised output saturated to 16 bits
  output logic                   irq_done,
  output logic                   sat_flag
);

  localparam int unsigned MSW = (PM > 1) ? $clog2(PM) : 1;
  localparam int unsigned NSW = (PN > 1) ? $clog2(PN) : 1;

  cmd_t                     cmd;
  logic [CW-1:0]            img_w, img_h;
  logic [KW-1:0]            ksize;
  logic                     busy, done;

  logic [AW-1:0]            img_raddr;
  logic [PM*DATA_W-1:0]     img_rdata;
  logic [WAW-1:0]           wt_raddr;
  logic [K*K*NBIT-1:0]      wt_rdata;

  logic                     px_valid;
  logic signed [DATA_W-1:0] px [PM];
  logic [CW-1:0]            px_row, px_col;
  logic                     w_bank, w_we;
  logic [MSW-1:0]           w_cl;
  logic [NSW-1:0]           w_sel;
  logic [K*K*NBIT-1:0]      w_data;
  logic                     first_pass, last_pass, pool_en;

  logic                     so_valid;
  logic [CW-1:0]            so_row, so_col;
  logic signed [ACC_W-1:0]  so_sums [PN];

  logic [AW-1:0]            ps_raddr, ps_waddr, o_waddr;
  logic [PN*ACC_W-1:0]      ps_rdata, ps_wdata;
  logic                     ps_we, o_we, sat_event;
  logic [PN*DATA_W-1:0]     o_wdata;
  logic [CW-1:0]            wo;

  reg_if #(.CW(CW), .KW(KW)) u_regs (
    .clk(clk), .rst_n(rst_n),
    .s_awaddr(s_awaddr), .s_awvalid(s_awvalid), .s_awready(s_awready),
    .s_wdata(s_wdata), .s_wstrb(s_wstrb), .s_wvalid(s_wvalid), .s_wready(s_wready),
    .s_bresp(s_bresp), .s_bvalid(s_bvalid), .s_bready(s_bready),
    .s_araddr(s_araddr), .s_arvalid(s_arvalid), .s_arready(s_arready),
    .s_rdata(s_rdata), .s_rresp(s_rresp), .s_rvalid(s_rvalid), .s_rready(s_rready),
    .cmd(cmd), .img_w(img_w), .img_h(img_h), .ksize(ksize),
    .busy(busy), .done(done), .w_bank(w_bank)
  );

  // On-chip data memories.
  bram_dp #(.DW(PM*DATA_W), .DEPTH(DEPTH)) u_img_mem (
    .clk(clk), .we(img_we), .waddr(img_waddr), .wdata(img_wdata),
    .raddr(img_raddr), .rdata(img_rdata)
  );
  bram_dp #(.DW(K*K*NBIT), .DEPTH(PM*PN)) u_wt_mem (
    .clk(clk), .we(wt_we), .waddr(wt_waddr), .wdata(wt_wdata),
    .raddr(wt_raddr), .rdata(wt_rdata)
  );
  bram_dp #(.DW(PN*ACC_W), .DEPTH(DEPTH)) u_psum_mem (
    .clk(clk), .we(ps_we), .waddr(ps_waddr), .wdata(ps_wdata),
    .raddr(ps_raddr), .rdata(ps_rdata)
  );
  bram_dp #(.DW(PN*DATA_W), .DEPTH(DEPTH)) u_out_mem (
    .clk(clk), .we(o_we), .waddr(o_waddr), .wdata(o_wdata),
    .raddr(out_raddr), .rdata(out_rdata)
  );

  fetch_unit #(
    .NBIT(NBIT), .K(K), .PM(PM), .PN(PN), .W_MAX(W_MAX), .IMG_DEPTH(DEPTH), .CW(CW),
    .IAW(AW), .WAW(WAW), .MSW(MSW), .NSW(NSW)
  ) u_fetch (
    .clk(clk), .rst_n(rst_n), .cmd(cmd), .img_w(img_w), .img_h(img_h), .ksize(ksize),
    .busy(busy), .done(done), .wo(wo), .img_raddr(img_raddr), .img_rdata(img_rdata),
    .wt_raddr(wt_raddr), .wt_rdata(wt_rdata),
    .px_valid(px_valid), .px(px), .px_row(px_row), .px_col(px_col),
    .w_bank(w_bank), .w_we(w_we), .w_cl(w_cl), .w_sel(w_sel), .w_data(w_data),
    .first_pass(first_pass), .last_pass(last_pass), .pool_en(pool_en)
  );

  svpe_cluster_if #(
    .NBIT(NBIT), .K(K), .PM(PM), .PN(PN), .W_MAX(W_MAX), .ACC_W(ACC_W), .CW(CW),
    .MSW(MSW), .NSW(NSW)
  ) u_svpe (
    .clk(clk), .rst_n(rst_n), .in_valid(px_valid), .pix(px), .row(px_row), .col(px_col),
    .ksize(ksize), .w_bank(w_bank), .w_we(w_we), .w_cl(w_cl), .w_sel(w_sel), .w_data(w_data),
    .out_valid(so_valid), .orow(so_row), .ocol(so_col), .sums(so_sums)
  );

  load_store_unit #(
    .NBIT(NBIT), .PN(PN), .W_MAX(W_MAX), .DEPTH(DEPTH), .ACC_W(ACC_W), .CW(CW), .AW(AW)
  ) u_ls (
    .clk(clk), .rst_n(rst_n), .wo(wo), .first_pass(first_pass), .last_pass(last_pass),
    .pool_en(pool_en), .in_valid(so_valid), .orow(so_row), .ocol(so_col), .sums(so_sums),
    .ps_raddr(ps_raddr), .ps_rdata(ps_rdata), .ps_we(ps_we), .ps_waddr(ps_waddr),
    .ps_wdata(ps_wdata), .out_we(o_we), .out_waddr(o_waddr), .out_wdata(o_wdata),
    .sat_event(sat_event)
  );

  assign irq_done = done;
  assign sat_flag = sat_event;

endmodule
