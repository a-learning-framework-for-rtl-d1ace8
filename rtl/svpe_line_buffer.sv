// svpe_line_buffer: the k image-row FIFOs in front of an SVPE array.
//
// Pixels of one input channel arrive in raster order, one per valid cycle,
// together with their row and column in the (padded) frame. The buffer keeps
// the last k-1 image rows in k-1 row FIFOs of W_MAX entries, addressed by the
// column: when the pixel of (row, col) arrives, the buffer outputs the column
// of k pixels (row-k+1 .. row, col), oldest first, and shifts that column of the
// FIFOs up by one row. rows[K-1] ("image row k" of the figure) is the new pixel
// and rows[0] ("image row 1") is the oldest row. win_ok says that the k x k
// window ending at this column is complete for the selected kernel size
// (row >= ksize-1 and col >= ksize-1). k cascaded row FIFOs follow the paper;
// the column-addressed implementation is this design's.
//
// Interface: in_valid, pix, row, col, ksize -> out_valid, win_ok, rows[K].
// Timing: outputs registered, one cycle after the input (nbq_pkg::LB_LAT);
// one pixel per cycle, no back-pressure.
module svpe_line_buffer
  import nbq_pkg::*;
#(
  parameter int unsigned K     = 3,
  parameter int unsigned W_MAX = 34,
  parameter int unsigned CW    = $clog2(W_MAX + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] pix,
  input  logic [CW-1:0]            row,
  input  logic [CW-1:0]            col,
  input  logic [$clog2(K+1)-1:0]   ksize,
  output logic                     out_valid,
  output logic                     win_ok,
  output logic signed [DATA_W-1:0] rows [K]
);

  logic signed [DATA_W-1:0] fifo [K-1][W_MAX];

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int j = 0; j < K - 1; j++) begin
        fifo[j][col] <= (j == K - 2) ? pix : fifo[j+1][col];
        rows[j]      <= fifo[j][col];
      end
      rows[K-1] <= pix;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      win_ok    <= 1'b0;
    end else begin
      out_valid <= in_valid;
      win_ok    <= in_valid && (32'(row) + 1 >= 32'(ksize)) && (32'(col) + 1 >= 32'(ksize));
    end
  end

endmodule
