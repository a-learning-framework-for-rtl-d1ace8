// svpe_pe: one SHIFT-and-ADDER cell of the SVPE 2D convolver.
//
// Each cell holds one weight code (from the array's weight buffer), shifts the
// activation broadcast along its row by that weight and adds the partial sum of
// its left neighbour. The sum is registered and passed to the right neighbour,
// so a row of k cells forms a systolic 1D convolver: after the pixel of column c
// enters, the last cell holds sum_j w_j * x(c-k+1+j). The cell structure (shift,
// adder, output register, partial sums chained along the row) is read from the
// paper's array figure; broadcasting the pixel to the whole row rather than
// delaying it per cell is this design's choice.
//
// Interface: en advances the cell; x, code; psum_in from the left neighbour;
// psum_out registered. Timing: one cycle, stalls while en is low.
module svpe_pe
  import nbq_pkg::*;
#(
  parameter int unsigned NBIT  = 3,
  parameter int unsigned ACC_W = acc_bits(NBIT)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic signed [DATA_W-1:0] x,
  input  logic        [NBIT-1:0]   code,
  input  logic signed [ACC_W-1:0]  psum_in,
  output logic signed [ACC_W-1:0]  psum_out
);

  localparam int unsigned FRAC   = frac_bits(NBIT);
  localparam int unsigned PROD_W = DATA_W + FRAC + 1;

  logic signed [PROD_W-1:0] prod;

  svpe_shift #(.NBIT(NBIT)) u_shift (.x(x), .code(code), .prod(prod));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  psum_out <= '0;
    else if (en) psum_out <= psum_in + ACC_W'(prod);
  end

endmodule
