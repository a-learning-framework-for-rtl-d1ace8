// load_store_unit: loads and stores the intermediate results of a layer.
//
// A layer with more input channels than clusters (M > PM) is computed in
// M/PM passes over the image. For every window sum of PN output channels that
// leaves the cluster interface the unit
//   1. reads the partial sums stored for that output position by the previous
//      pass (not on the first pass), adds them and stores the new partial sums
//      (partial-sum memory, word orow*wo+ocol, PN lanes of ACC_W bits);
//   2. on the last pass also requantises them to 16-bit activations: an
//      arithmetic shift right by FRAC removes the 2^FRAC scale of the shift
//      products, then the value saturates to the 16-bit range;
//   3. writes the activations to the output memory, either directly (word
//      orow*wo+ocol) or, with pool_en, through the 2x2/2 max pooling unit
//      (word prow*(wo/2)+pcol).
// That this unit loads and stores intermediate results is the paper's; the
// read-add-write sequence, the truncating requantisation with saturation and
// placing the pooling step on the store path are this design's choices.
//
// Timing: partial-sum write one cycle after the input, output-memory write two
// cycles after it (three with pooling). One position per cycle; successive
// positions have distinct addresses, so the read-add-write needs no bypass.
module load_store_unit
  import nbq_pkg::*;
#(
  parameter int unsigned NBIT  = 3,
  parameter int unsigned PN    = 8,
  parameter int unsigned W_MAX = 34,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned ACC_W = acc_bits(NBIT),
  parameter int unsigned CW    = $clog2(W_MAX + 1),
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration of the pass
  input  logic [CW-1:0]            wo,
  input  logic                     first_pass,
  input  logic                     last_pass,
  input  logic                     pool_en,
  // DATA OUT of the cluster interface
  input  logic                     in_valid,
  input  logic [CW-1:0]            orow,
  input  logic [CW-1:0]            ocol,
  input  logic signed [ACC_W-1:0]  sums [PN],
  // partial-sum memory
  output logic [AW-1:0]            ps_raddr,
  input  logic [PN*ACC_W-1:0]      ps_rdata,
  output logic                     ps_we,
  output logic [AW-1:0]            ps_waddr,
  output logic [PN*ACC_W-1:0]      ps_wdata,
  // output memory
  output logic                     out_we,
  output logic [AW-1:0]            out_waddr,
  output logic [PN*DATA_W-1:0]     out_wdata,
  // event flag: some lane saturated in this cycle's requantisation
  output logic                     sat_event
);

  localparam int unsigned FRAC = frac_bits(NBIT);
  localparam logic signed [ACC_W-1:0] QMAX = ACC_W'((1 << (DATA_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] QMIN = -ACC_W'(1 << (DATA_W - 1));

  logic                    v1, v2;
  logic [AW-1:0]           a1, a2;
  logic [CW-1:0]           r1, c1, r2, c2;
  logic signed [ACC_W-1:0] s1  [PN];
  logic signed [ACC_W-1:0] acc [PN];
  logic signed [ACC_W-1:0] shr [PN];
  logic signed [DATA_W-1:0] q  [PN];
  logic signed [DATA_W-1:0] q2 [PN];
  logic [PN-1:0]           sat;

  assign ps_raddr = AW'(32'(orow) * 32'(wo) + 32'(ocol));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0;
      a1 <= '0; a2 <= '0; r1 <= '0; c1 <= '0; r2 <= '0; c2 <= '0;
      for (int n = 0; n < PN; n++) begin s1[n] <= '0; q2[n] <= '0; end
    end else begin
      v1 <= in_valid;
      a1 <= ps_raddr;
      r1 <= orow;
      c1 <= ocol;
      s1 <= sums;
      v2 <= v1 && last_pass;
      a2 <= a1;
      r2 <= r1;
      c2 <= c1;
      q2 <= q;
    end
  end

  // Stage 1: add the stored partial sum, requantise.
  always_comb begin
    for (int n = 0; n < PN; n++) begin
      acc[n] = first_pass ? s1[n] : s1[n] + $signed(ps_rdata[n*ACC_W +: ACC_W]);
      shr[n] = acc[n] >>> FRAC;
      sat[n] = (shr[n] > QMAX) || (shr[n] < QMIN);
      if (shr[n] > QMAX)      q[n] = QMAX[DATA_W-1:0];
      else if (shr[n] < QMIN) q[n] = QMIN[DATA_W-1:0];
      else                    q[n] = shr[n][DATA_W-1:0];
      ps_wdata[n*ACC_W +: ACC_W] = acc[n];
    end
  end

  assign ps_we     = v1;
  assign ps_waddr  = a1;
  assign sat_event = v1 && last_pass && (|sat);

  // Stage 2: pooling or direct store of the activations.
  logic                     pl_valid;
  logic [CW-1:0]            pl_row, pl_col;
  logic signed [DATA_W-1:0] pl_dout [PN];
  logic [CW-1:0]            wo_half;

  assign wo_half = wo >> 1;

  pool_unit #(.PN(PN), .W_MAX(W_MAX), .CW(CW)) u_pool (
    .clk(clk), .rst_n(rst_n), .in_valid(v2 && pool_en), .row(r2), .col(c2), .din(q2),
    .out_valid(pl_valid), .prow(pl_row), .pcol(pl_col), .dout(pl_dout)
  );

  always_comb begin
    if (pool_en) begin
      out_we    = pl_valid;
      out_waddr = AW'(32'(pl_row) * 32'(wo_half) + 32'(pl_col));
      for (int n = 0; n < PN; n++) out_wdata[n*DATA_W +: DATA_W] = pl_dout[n];
    end else begin
      out_we    = v2;
      out_waddr = a2;
      for (int n = 0; n < PN; n++) out_wdata[n*DATA_W +: DATA_W] = q2[n];
    end
  end

endmodule
