// bram_dp: simple dual-port on-chip block RAM (one write port, one read port).
//
// Used for the on-chip data buffers of the accelerator: input feature maps,
// weights, partial sums and output feature maps. The read is synchronous
// (registered address to data in one cycle), which maps onto FPGA block RAM.
// The contents are not reset; a read of a location returns what was last
// written there. The paper only names the on-chip BRAM; the port arrangement
// is this design's choice.
//
// Interface: we/waddr/wdata, raddr -> rdata. Timing: rdata one cycle after
// raddr; a read of the address being written returns the old data.
module bram_dp #(
  parameter int unsigned DW    = 16,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
