// svpe_array: the SVPE array, a k x k 2D convolver built from SHIFT and ADDER
// cells instead of multiply-accumulate units.
//
// Row r of the array receives one pixel per cycle from image-row FIFO r and
// broadcasts it to its k cells; each cell shifts it by its weight and adds the
// partial sum of its left neighbour (svpe_pe), so the last cell of the row holds
// the 1D convolution of that row. A column of k chained adders at the right
// edge then sums the k row results into the window sum. The weights sit in a
// two-bank buffer (svpe_weight_buf) loaded before the computation.
//
// With K > 3 the same module is the "universal" array for several kernel sizes:
// the runtime input ksize selects the ksize x ksize corner w(1..ksize,1..ksize)
// of the K x K grid, the row result is taken at column ksize and only the first
// ksize rows are summed (for K = 11: taps at 3, 5 and 11). The kernel rows are
// fed from the newest ksize rows of the line buffer. The grid of shift-add cells,
// the chained adders and the taps follow the paper's two array figures; the
// broadcast of the pixel along the row and the two pipeline stages are this
// design's choices.
//
// Weight layout: tap (r, j) (row r, column j, both from 0) is code
// bits [(r*K+j)*NBIT +: NBIT]; the window sum is sum w(r,j) * x(row-ks+1+r, col-ks+1+j).
// Interface: in_valid/win_ok/rows from svpe_line_buffer, ksize, weight write
// (w_we, w_data, w_bank) -> out_valid, sum (scaled by 2^FRAC, see nbq_pkg).
// Timing: out_valid two cycles after an in_valid with win_ok (nbq_pkg::ARR_LAT),
// one window per cycle.
module svpe_array
  import nbq_pkg::*;
#(
  parameter int unsigned NBIT  = 3,
  parameter int unsigned K     = 3,
  parameter int unsigned ACC_W = acc_bits(NBIT)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     win_ok,
  input  logic signed [DATA_W-1:0] rows [K],
  input  logic [$clog2(K+1)-1:0]   ksize,
  input  logic                     w_we,
  input  logic [K*K*NBIT-1:0]      w_data,
  input  logic                     w_bank,
  output logic                     out_valid,
  output logic signed [ACC_W-1:0]  sum
);

  logic [K*K*NBIT-1:0]      codes;
  logic signed [DATA_W-1:0] xr    [K];
  logic signed [ACC_W-1:0]  psum  [K][K];
  logic signed [ACC_W-1:0]  rowsum[K];
  logic signed [ACC_W-1:0]  colsum[K+1];
  logic                     vld1;

  svpe_weight_buf #(.NBIT(NBIT), .K(K)) u_wbuf (
    .clk(clk), .rst_n(rst_n), .we(w_we), .wdata(w_data), .bank(w_bank), .codes(codes)
  );

  // Kernel row r takes line-buffer row K-ksize+r (the newest ksize rows).
  always_comb begin
    for (int r = 0; r < K; r++) begin
      if (r < int'(ksize)) xr[r] = rows[K - int'(ksize) + r];
      else                 xr[r] = '0;
    end
  end

  for (genvar r = 0; r < K; r++) begin : g_row
    for (genvar j = 0; j < K; j++) begin : g_col
      logic signed [ACC_W-1:0] pin;
      if (j == 0) begin : g_first
        assign pin = '0;
      end else begin : g_chain
        assign pin = psum[r][j-1];
      end
      svpe_pe #(.NBIT(NBIT), .ACC_W(ACC_W)) u_pe (
        .clk(clk), .rst_n(rst_n), .en(in_valid), .x(xr[r]),
        .code(codes[(r*K+j)*NBIT +: NBIT]), .psum_in(pin), .psum_out(psum[r][j])
      );
    end
    // Row result tapped at column ksize (the taps of the universal array).
    assign rowsum[r] = (r < int'(ksize)) ? psum[r][int'(ksize) - 1] : '0;
  end

  // The k chained adders of the right-hand column.
  assign colsum[0] = '0;
  for (genvar r = 0; r < K; r++) begin : g_vadd
    assign colsum[r+1] = colsum[r] + rowsum[r];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld1      <= 1'b0;
      out_valid <= 1'b0;
      sum       <= '0;
    end else begin
      vld1      <= in_valid && win_ok;
      out_valid <= vld1;
      if (vld1) sum <= colsum[K];
    end
  end

endmodule
