// fetch_unit: fetches the weights and the input feature maps from on-chip
// memory into the SVPE cluster interface and sequences one command.
//
// A command (nbq_pkg::cmd_t, issued through the register interface) runs up to
// two engines at the same time:
//  * weight loader (wload_en): reads the PM*PN weight words (word m*PN+n holds
//    the k*k codes of cluster m, array n) and writes each into the idle bank of
//    that array's weight buffer;
//  * pixel streamer (stream_en): walks the padded frame in raster order, one
//    position per cycle. Pixel (y, x) of the stored image is word y*img_w+x of
//    the image memory, lane m being input channel m. With pad_en the frame has
//    a border of (ksize-1)/2 zero pixels on every side, produced here without a
//    memory read.
// When both engines are done the unit waits DRAIN cycles for the pipeline to
// empty, flips the active weight bank if weights were loaded, and pulses done.
// So a run takes (img_h+2p)*(img_w+2p) cycles for the stream (one pixel of each
// of the PM channels per cycle, the H*W*(M/Pm) term of the paper's timing
// model) plus DRAIN + 2. The paper gives the unit's task; the memory layout,
// padding, bank swap and drain are this design's choices.
//
// Memory ports: 1-cycle synchronous reads (bram_dp).
module fetch_unit
  import nbq_pkg::*;
#(
  parameter int unsigned NBIT  = 3,
  parameter int unsigned K     = 3,
  parameter int unsigned PM    = 32,
  parameter int unsigned PN    = 8,
  parameter int unsigned W_MAX = 34,
  parameter int unsigned IMG_DEPTH = 1024,
  parameter int unsigned DRAIN = 16,
  parameter int unsigned CW    = $clog2(W_MAX + 1),
  parameter int unsigned IAW   = $clog2(IMG_DEPTH),
  parameter int unsigned WAW   = (PM*PN > 1) ? $clog2(PM*PN) : 1,
  parameter int unsigned MSW   = (PM > 1) ? $clog2(PM) : 1,
  parameter int unsigned NSW   = (PN > 1) ? $clog2(PN) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // command and layer shape
  input  cmd_t                     cmd,
  input  logic [CW-1:0]            img_w,
  input  logic [CW-1:0]            img_h,
  input  logic [$clog2(K+1)-1:0]   ksize,
  output logic                     busy,
  output logic                     done,
  output logic [CW-1:0]            wo,       // output width: padded width - ksize + 1
  // image memory read port
  output logic [IAW-1:0]           img_raddr,
  input  logic [PM*DATA_W-1:0]     img_rdata,
  // weight memory read port
  output logic [WAW-1:0]           wt_raddr,
  input  logic [K*K*NBIT-1:0]      wt_rdata,
  // DATA IN and CTRL of the cluster interface
  output logic                     px_valid,
  output logic signed [DATA_W-1:0] px [PM],
  output logic [CW-1:0]            px_row,
  output logic [CW-1:0]            px_col,
  output logic                     w_bank,
  output logic                     w_we,
  output logic [MSW-1:0]           w_cl,
  output logic [NSW-1:0]           w_sel,
  output logic [K*K*NBIT-1:0]      w_data,
  // latched command bits for the load/store unit
  output logic                     first_pass,
  output logic                     last_pass,
  output logic                     pool_en
);

  typedef enum logic [1:0] {IDLE, RUN, DRAINING} state_t;
  state_t state;

  logic            do_wload, pad_en;
  logic            st_busy, wl_busy;
  logic [CW-1:0]   r, c, hp, wp, pad;
  logic [WAW:0]    wi;
  logic            st_v, st_in;
  logic [CW-1:0]   st_r, st_c;
  logic            wl_v;
  logic [WAW-1:0]  wl_i;
  logic [$clog2(DRAIN+1)-1:0] dcnt;

  assign pad = pad_en ? CW'((32'(ksize) - 1) / 2) : '0;
  assign hp  = img_h + (pad << 1);
  assign wp  = img_w + (pad << 1);
  assign wo  = wp - CW'(ksize) + 1'b1;

  // Position inside the stored image?
  logic in_img;
  assign in_img = (r >= pad) && (r < pad + img_h) && (c >= pad) && (c < pad + img_w);
  assign img_raddr = IAW'(32'(r - pad) * 32'(img_w) + 32'(c - pad));
  assign wt_raddr  = WAW'(wi);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      do_wload <= 1'b0; pad_en <= 1'b0;
      first_pass <= 1'b0; last_pass <= 1'b0; pool_en <= 1'b0;
      st_busy <= 1'b0; wl_busy <= 1'b0;
      r <= '0; c <= '0; wi <= '0;
      st_v <= 1'b0; st_in <= 1'b0; st_r <= '0; st_c <= '0;
      wl_v <= 1'b0; wl_i <= '0;
      dcnt <= '0; w_bank <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      // one-cycle delayed copies that meet the memory read data
      st_v  <= st_busy;
      st_in <= in_img;
      st_r  <= r;
      st_c  <= c;
      wl_v  <= wl_busy;
      wl_i  <= WAW'(wi);
      case (state)
        IDLE: if (cmd.start) begin
          do_wload   <= cmd.wload_en;
          pad_en     <= cmd.pad_en;
          first_pass <= cmd.first_pass;
          last_pass  <= cmd.last_pass;
          pool_en    <= cmd.pool_en;
          st_busy    <= cmd.stream_en;
          wl_busy    <= cmd.wload_en;
          r <= '0; c <= '0; wi <= '0;
          state <= RUN;
        end
        RUN: begin
          if (st_busy) begin
            if (c == wp - 1'b1) begin
              c <= '0;
              if (r == hp - 1'b1) st_busy <= 1'b0;
              else                r <= r + 1'b1;
            end else begin
              c <= c + 1'b1;
            end
          end
          if (wl_busy) begin
            if (32'(wi) == PM*PN - 1) wl_busy <= 1'b0;
            wi <= wi + 1'b1;
          end
          if (!st_busy && !wl_busy) begin
            dcnt  <= '0;
            state <= DRAINING;
          end
        end
        DRAINING: begin
          dcnt <= dcnt + 1'b1;
          if (32'(dcnt) == DRAIN - 1) begin
            if (do_wload) w_bank <= ~w_bank;
            done  <= 1'b1;
            state <= IDLE;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign busy = (state != IDLE);

  // DATA IN: pixel of every channel, zero in the padding border.
  assign px_valid = st_v;
  assign px_row   = st_r;
  assign px_col   = st_c;
  for (genvar m = 0; m < PM; m++) begin : g_px
    assign px[m] = st_in ? img_rdata[m*DATA_W +: DATA_W] : '0;
  end

  // CTRL: weight writes into the idle bank.
  assign w_we   = wl_v;
  assign w_cl   = MSW'(32'(wl_i) / PN);
  assign w_sel  = NSW'(32'(wl_i) % PN);
  assign w_data = wt_rdata;

endmodule
