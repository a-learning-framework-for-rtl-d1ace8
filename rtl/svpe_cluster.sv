// svpe_cluster: one SVPE cluster, PN SVPE arrays working on one input channel.
//
// The cluster owns the k image-row FIFOs of its input channel (svpe_line_buffer)
// and PN SVPE arrays that convolve that channel with PN different kernels, one
// per output channel of the current group. Its adders add each array's window
// sum to the partial sum arriving from the previous cluster on the cascade
// (cas_in), so a chain of PM clusters sums the contributions of PM input
// channels for each of PN output channels. That a cluster is made of N arrays
// plus interconnect and adders follows the paper's architecture figure; that a
// cluster is one input channel, that its arrays share one line buffer and that
// the partial sums cascade from cluster to cluster are this design's reading.
//
// Interface: in_valid/pix/row/col (pixel stream of this channel), ksize,
// weight write (w_we, w_sel = array index, w_data, w_bank), cas_in[PN] ->
// out_valid, cas_out[PN]. Timing: out_valid LB_LAT + ARR_LAT = 3 cycles after
// the pixel that completes a window; cas_in must be valid in that same cycle
// (the cascade add is combinational).
module svpe_cluster
  import nbq_pkg::*;
#(
  parameter int unsigned NBIT  = 3,
  parameter int unsigned K     = 3,
  parameter int unsigned PN    = 8,
  parameter int unsigned W_MAX = 34,
  parameter int unsigned ACC_W = acc_bits(NBIT),
  parameter int unsigned CW    = $clog2(W_MAX + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] pix,
  input  logic [CW-1:0]            row,
  input  logic [CW-1:0]            col,
  input  logic [$clog2(K+1)-1:0]   ksize,
  input  logic                     w_we,
  input  logic [(PN > 1 ? $clog2(PN) : 1)-1:0] w_sel,
  input  logic [K*K*NBIT-1:0]      w_data,
  input  logic                     w_bank,
  input  logic signed [ACC_W-1:0]  cas_in  [PN],
  output logic                     out_valid,
  output logic signed [ACC_W-1:0]  cas_out [PN]
);

  logic                     lb_valid, lb_win_ok;
  logic signed [DATA_W-1:0] lb_rows [K];
  logic                     arr_valid [PN];
  logic signed [ACC_W-1:0]  arr_sum   [PN];

  svpe_line_buffer #(.K(K), .W_MAX(W_MAX), .CW(CW)) u_lb (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .pix(pix), .row(row), .col(col),
    .ksize(ksize), .out_valid(lb_valid), .win_ok(lb_win_ok), .rows(lb_rows)
  );

  for (genvar n = 0; n < PN; n++) begin : g_arr
    svpe_array #(.NBIT(NBIT), .K(K), .ACC_W(ACC_W)) u_arr (
      .clk(clk), .rst_n(rst_n), .in_valid(lb_valid), .win_ok(lb_win_ok), .rows(lb_rows),
      .ksize(ksize), .w_we(w_we && (32'(w_sel) == n)), .w_data(w_data), .w_bank(w_bank),
      .out_valid(arr_valid[n]), .sum(arr_sum[n])
    );
    assign cas_out[n] = cas_in[n] + arr_sum[n];
  end

  assign out_valid = arr_valid[0];

endmodule
