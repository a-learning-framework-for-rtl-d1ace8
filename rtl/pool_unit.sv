// pool_unit: 2x2, stride-2 max pooling of PN output channels in raster order.
//
// Values arrive one position per valid cycle with their (row, col). On an even
// row the unit takes the maximum of each horizontal pair (even col, odd col)
// and parks it in a half-row buffer; on the following odd row it combines the
// pair maximum with the parked one and emits the pooled value at
// (row/2, col/2). Positions of an odd last row or column are dropped (floor).
// The pooling step itself is the paper's (2x2/2 pool layers); max rather than
// average pooling and this streaming structure are this design's choices.
//
// Interface: in_valid, row, col, din[PN] -> out_valid, prow, pcol, dout[PN].
// Timing: registered output one cycle after the (odd row, odd col) input.
module pool_unit
  import nbq_pkg::*;
#(
  parameter int unsigned PN    = 8,
  parameter int unsigned W_MAX = 34,
  parameter int unsigned CW    = $clog2(W_MAX + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [CW-1:0]            row,
  input  logic [CW-1:0]            col,
  input  logic signed [DATA_W-1:0] din  [PN],
  output logic                     out_valid,
  output logic [CW-1:0]            prow,
  output logic [CW-1:0]            pcol,
  output logic signed [DATA_W-1:0] dout [PN]
);

  logic signed [DATA_W-1:0] left [PN];                  // value at the even column
  logic signed [DATA_W-1:0] half [W_MAX/2][PN];         // pair maxima of the even row
  logic signed [DATA_W-1:0] pmax [PN];
  logic [$clog2(W_MAX/2)-1:0] hidx;

  assign hidx = $bits(hidx)'(col >> 1);

  always_comb begin
    for (int n = 0; n < PN; n++) pmax[n] = (din[n] > left[n]) ? din[n] : left[n];
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      if (!col[0]) begin
        left <= din;
      end else if (!row[0]) begin
        half[hidx] <= pmax;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      prow      <= '0;
      pcol      <= '0;
      for (int n = 0; n < PN; n++) dout[n] <= '0;
    end else begin
      out_valid <= in_valid && col[0] && row[0];
      if (in_valid && col[0] && row[0]) begin
        prow <= row >> 1;
        pcol <= col >> 1;
        for (int n = 0; n < PN; n++)
          dout[n] <= (half[hidx][n] > pmax[n]) ? half[hidx][n] : pmax[n];
      end
    end
  end

endmodule
