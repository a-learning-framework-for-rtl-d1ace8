// nbq_pkg: constants, types and helper functions shared by the shift-vector
// processing element (SVPE) accelerator.
//
// Weight code. A weight of an n-bit network takes one of the values
// {+-2^0, +-2^-1, ..., +-2^-(r-1), 0} with r = 2^(n-1) - 1 (for n = 1 only +-1).
// This design packs it into n bits as {sign, magnitude}: the magnitude field
// has n-1 bits, magnitude 0 means the weight is zero and magnitude m >= 1 means
// 2^-(m-1). For n = 1 the single bit is the sign of a +-1 weight. The packing
// is this design's own choice; the value set is the paper's.
//
// Fixed point. Only left shifts are used: a product w*x is formed as
// x << (FRAC - (m-1)), i.e. scaled by 2^FRAC with FRAC = r - 1, so every
// partial sum is an exact integer. The load/store unit removes the scale
// (arithmetic shift right by FRAC, saturation to 16 bits) when it writes the
// final 16-bit activations.
package nbq_pkg;

  // Activations and the data buses are 16 bits wide.
  localparam int unsigned DATA_W = 16;

  // Pipeline latencies, used to align side-band coordinates with the data.
  localparam int unsigned LB_LAT  = 1;  // line buffer: input pixel -> column of k pixels
  localparam int unsigned ARR_LAT = 2;  // SVPE array: column of k pixels -> window sum

  // Fraction bits of the products for an n-bit weight code (r - 1, at least 0).
  function automatic int unsigned frac_bits(input int unsigned nbit);
    if (nbit <= 2) return 0;
    return (1 << (nbit - 1)) - 2;
  endfunction

  // Accumulator width: 16-bit data, FRAC fraction bits and 14 bits of headroom
  // (2^14 = 16384 products of full magnitude may be summed without overflow).
  function automatic int unsigned acc_bits(input int unsigned nbit);
    return DATA_W + frac_bits(nbit) + 14;
  endfunction

  // Command word of the CTRL register (offset 0x00).
  typedef struct packed {
    logic pad_en;      // [6] zero-pad by (ksize-1)/2 on every side ("same" convolution)
    logic pool_en;     // [5] 2x2/2 max pooling of the final outputs
    logic last_pass;   // [4] this pass finishes the output channels: requantise and store 16-bit
    logic first_pass;  // [3] this pass starts the partial sums (no read of earlier sums)
    logic wload_en;    // [2] load the weight memory into the idle weight bank, swap at the end
    logic stream_en;   // [1] stream the image through the clusters
    logic start;       // [0] start the command (write 1)
  } cmd_t;

  // Register offsets (byte addresses on the AXI-GP port).
  localparam logic [7:0] REG_CTRL   = 8'h00;
  localparam logic [7:0] REG_STATUS = 8'h04;
  localparam logic [7:0] REG_IMG_W  = 8'h08;
  localparam logic [7:0] REG_IMG_H  = 8'h0C;
  localparam logic [7:0] REG_KSIZE  = 8'h10;
  localparam logic [7:0] REG_CYCLES = 8'h14;

endpackage
