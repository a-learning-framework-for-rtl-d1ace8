// reg_if: the register interface of the accelerator, an AXI4-Lite slave on the
// processor's general-purpose (AXI-GP) port.
//
// The processor writes the layer shape (image width and height, kernel size)
// and then a command word to CTRL; bit 0 of that write starts the command and
// the whole word is presented on `cmd` for one cycle (start = 1) only. STATUS
// reads back busy (bit 0), a sticky done flag (bit 1, cleared by the next
// start) and the active weight bank (bit 2). CYCLES holds the length in clock
// cycles of the last completed command. That the network structure and the
// control signals arrive over AXI-GP through a register interface follows the
// paper; the register map (nbq_pkg) is this design's.
//
// AXI4-Lite: 32-bit data, byte addresses in the low 8 bits, OKAY responses
// only, write strobes ignored (whole-word writes). A write is accepted when
// address and data are both valid and no response is pending; a read when no
// read data is pending. Timing: one cycle from a request to its response.
// Lint notes: s_wstrb and the upper bits of s_wdata are unused because every
// register is narrower than 8 bits and written whole; rst_n is seen both as
// the asynchronous reset of the registers and as the synchronous disable of
// the two AXI handshake assertions at the end, which is intended.
module reg_if
  import nbq_pkg::*;
#(
  parameter int unsigned CW = 6,
  parameter int unsigned KW = 2
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI4-Lite slave
  input  logic [7:0]    s_awaddr,
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [31:0]   s_wdata,
  input  logic [3:0]    s_wstrb,
  input  logic          s_wvalid,
  output logic          s_wready,
  output logic [1:0]    s_bresp,
  output logic          s_bvalid,
  input  logic          s_bready,
  input  logic [7:0]    s_araddr,
  input  logic          s_arvalid,
  output logic          s_arready,
  output logic [31:0]   s_rdata,
  output logic [1:0]    s_rresp,
  output logic          s_rvalid,
  input  logic          s_rready,
  // towards the accelerator
  output cmd_t          cmd,
  output logic [CW-1:0] img_w,
  output logic [CW-1:0] img_h,
  output logic [KW-1:0] ksize,
  input  logic          busy,
  input  logic          done,
  input  logic          w_bank
);

  logic        done_flag;
  logic [31:0] cycles, cyc_cnt;
  logic        wr_fire, rd_fire;

  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign wr_fire   = s_awready;
  assign s_bresp   = 2'b00;
  assign s_arready = !s_rvalid;
  assign rd_fire   = s_arvalid && s_arready;
  assign s_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd       <= '0;
      img_w     <= '0;
      img_h     <= '0;
      ksize     <= KW'(3);
      done_flag <= 1'b0;
      cycles    <= '0;
      cyc_cnt   <= '0;
      s_bvalid  <= 1'b0;
      s_rvalid  <= 1'b0;
      s_rdata   <= '0;
    end else begin
      cmd <= '0;
      // write channel
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        case (s_awaddr)
          REG_CTRL:  if (s_wdata[0] && !busy) begin
                       cmd       <= cmd_t'(s_wdata[6:0]);
                       done_flag <= 1'b0;
                       cyc_cnt   <= '0;
                     end
          REG_IMG_W: img_w <= s_wdata[CW-1:0];
          REG_IMG_H: img_h <= s_wdata[CW-1:0];
          REG_KSIZE: ksize <= s_wdata[KW-1:0];
          default: ;
        endcase
      end else if (s_bvalid && s_bready) begin
        s_bvalid <= 1'b0;
      end
      // read channel
      if (rd_fire) begin
        s_rvalid <= 1'b1;
        case (s_araddr)
          REG_STATUS: s_rdata <= {29'd0, w_bank, done_flag, busy};
          REG_IMG_W:  s_rdata <= 32'(img_w);
          REG_IMG_H:  s_rdata <= 32'(img_h);
          REG_KSIZE:  s_rdata <= 32'(ksize);
          REG_CYCLES: s_rdata <= cycles;
          default:    s_rdata <= '0;
        endcase
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
      // run statistics
      if (busy) cyc_cnt <= cyc_cnt + 1'b1;
      if (done) begin
        done_flag <= 1'b1;
        cycles    <= cyc_cnt + 1'b1;
      end
    end
  end

  // AXI4-Lite: a response, once raised, stays until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n) s_bvalid && !s_bready |=> s_bvalid);
  assert property (@(posedge clk) disable iff (!rst_n) s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
