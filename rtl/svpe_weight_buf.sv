// svpe_weight_buf: two-bank weight store of one SVPE array.
//
// The array's k*k weight codes are buffered on chip before a convolution
// starts. This buffer has two banks: the array computes from the bank selected
// by `bank`, while a load (`we`, one k*k word per write) always goes to the
// other, idle bank. Flipping `bank` then switches the array to the new weights
// in one cycle, so the weights of the next pass can be loaded while the current
// pass runs. That weights are buffered on chip ahead of the computation follows
// the paper; the two banks and the swap are this design's reading of the
// "memory banks" drawn for the weights.
//
// Interface: we/wdata write the idle bank; bank selects the active bank;
// codes is the active bank (tap r*k+j at bits [(r*k+j)*NBIT +: NBIT]).
// Timing: a write is visible after the next clock edge once bank is flipped.
module svpe_weight_buf #(
  parameter int unsigned NBIT = 3,
  parameter int unsigned K    = 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  we,
  input  logic [K*K*NBIT-1:0]   wdata,
  input  logic                  bank,
  output logic [K*K*NBIT-1:0]   codes
);

  logic [K*K*NBIT-1:0] mem [2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem[0] <= '0;
      mem[1] <= '0;
    end else if (we) begin
      mem[~bank] <= wdata;
    end
  end

  assign codes = mem[bank];

endmodule
