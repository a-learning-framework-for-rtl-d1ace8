// svpe_shift: the SHIFT unit that stands in for a multiplier in the SVPE array.
//
// It applies an n-bit power-of-two weight code (see nbq_pkg) to a signed 16-bit
// activation. A zero weight gives 0, a weight +-2^-i gives +-(x << (FRAC - i)),
// i.e. the exact product scaled by 2^FRAC. Only left shifts and a negation are
// used, no DSP multiplier. That the product needs no multiplier and that all
// shifts are left shifts follows the paper; the code packing and the 2^FRAC
// scaling are this design's own way of keeping the shifts left-only and exact.
//
// Interface: x (signed DATA_W), code (NBIT) -> prod (signed PROD_W).
// Timing: purely combinational.
module svpe_shift
  import nbq_pkg::*;
#(
  parameter int unsigned NBIT   = 3,
  parameter int unsigned FRAC   = frac_bits(NBIT),
  parameter int unsigned PROD_W = DATA_W + FRAC + 1
) (
  input  logic signed [DATA_W-1:0] x,
  input  logic        [NBIT-1:0]   code,
  output logic signed [PROD_W-1:0] prod
);

  logic signed [PROD_W-1:0] mag;
  logic                     neg;

  if (NBIT == 1) begin : g_sign
    // n = 1: staircase() degrades to sign(): the weight is +-1.
    assign neg = code[0];
    assign mag = PROD_W'(x);
  end else begin : g_pow2
    localparam int unsigned MW = NBIT - 1;
    logic [MW-1:0] m;
    assign neg = code[NBIT-1];
    assign m   = code[MW-1:0];
    always_comb begin
      if (m == '0) mag = '0;
      else         mag = PROD_W'(x) <<< (FRAC - (int'(m) - 1));
    end
  end

  assign prod = neg ? -mag : mag;

endmodule
