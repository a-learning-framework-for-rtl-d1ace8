// svpe_cluster_if: the SVPE cluster interface, PM SVPE clusters behind shared
// DATA IN, DATA OUT and CTRL buses.
//
// DATA IN carries one 16-bit pixel per input channel per cycle (PM lanes, one
// lane per cluster) with the row and column of the pixel in the padded frame.
// CTRL carries the kernel size, the active weight bank and the weight-write
// port (cluster index, array index, k*k weight codes). The clusters are chained
// through their cascade adders: cluster 0 starts from zero and the last
// cluster's cascade output is DATA OUT, PN window sums (one per output channel)
// over the PM input channels. A delay line carries the output coordinates
// (orow, ocol) = (row-ksize+1, col-ksize+1) alongside. The interface with M
// clusters of N arrays and its three buses follow the paper's architecture
// figure; lane assignment and the cascade are this design's choices.
//
// Timing: DATA OUT is valid LB_LAT + ARR_LAT = 3 cycles after the pixel that
// completes a window; one window (PN sums) per cycle. The cascade from cluster
// 0 to cluster PM-1 is combinational (PM adders deep, after the arrays' output
// registers); it keeps every cluster on the same pixel timing. A build that
// must close timing at a high clock would register it every few clusters and
// skew the pixel lanes to match.
module svpe_cluster_if
  import nbq_pkg::*;
#(
  parameter int unsigned NBIT  = 3,
  parameter int unsigned K     = 3,
  parameter int unsigned PM    = 32,
  parameter int unsigned PN    = 8,
  parameter int unsigned W_MAX = 34,
  parameter int unsigned ACC_W = acc_bits(NBIT),
  parameter int unsigned CW    = $clog2(W_MAX + 1),
  parameter int unsigned MSW   = (PM > 1) ? $clog2(PM) : 1,
  parameter int unsigned NSW   = (PN > 1) ? $clog2(PN) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // DATA IN
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] pix [PM],
  input  logic [CW-1:0]            row,
  input  logic [CW-1:0]            col,
  // CTRL
  input  logic [$clog2(K+1)-1:0]   ksize,
  input  logic                     w_bank,
  input  logic                     w_we,
  input  logic [MSW-1:0]           w_cl,
  input  logic [NSW-1:0]           w_sel,
  input  logic [K*K*NBIT-1:0]      w_data,
  // DATA OUT
  output logic                     out_valid,
  output logic [CW-1:0]            orow,
  output logic [CW-1:0]            ocol,
  output logic signed [ACC_W-1:0]  sums [PN]
);

  localparam int unsigned LAT = LB_LAT + ARR_LAT;

  logic                    cl_valid [PM];
  logic [CW-1:0]           row_d [LAT];
  logic [CW-1:0]           col_d [LAT];

  for (genvar m = 0; m < PM; m++) begin : g_cl
    logic signed [ACC_W-1:0] cin  [PN];
    logic signed [ACC_W-1:0] cout [PN];
    if (m == 0) begin : g_head
      for (genvar n = 0; n < PN; n++) begin : g_zero
        assign cin[n] = '0;
      end
    end else begin : g_link
      assign cin = g_cl[m-1].cout;
    end
    svpe_cluster #(.NBIT(NBIT), .K(K), .PN(PN), .W_MAX(W_MAX), .ACC_W(ACC_W), .CW(CW)) u_cl (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .pix(pix[m]), .row(row), .col(col),
      .ksize(ksize), .w_we(w_we && (32'(w_cl) == m)), .w_sel(w_sel), .w_data(w_data),
      .w_bank(w_bank), .cas_in(cin), .out_valid(cl_valid[m]), .cas_out(cout)
    );
  end

  // Output coordinates travel beside the data.
  always_ff @(posedge clk) begin
    row_d[0] <= row - CW'(ksize) + 1'b1;
    col_d[0] <= col - CW'(ksize) + 1'b1;
    for (int i = 1; i < LAT; i++) begin
      row_d[i] <= row_d[i-1];
      col_d[i] <= col_d[i-1];
    end
  end

  assign out_valid = cl_valid[PM-1];
  assign orow      = row_d[LAT-1];
  assign ocol      = col_d[LAT-1];
  assign sums      = g_cl[PM-1].cout;

endmodule
