// swu: sliding-window unit in front of a convolutional layer's MVTU.
//
// It receives a binary activation map as a raster stream of pixels (row by
// row, left to right), one IFM_CH-bit pixel per beat, and re-orders it into
// the input vectors the MVTU needs: for every output pixel (raster order)
// the K x K x IFM_CH window, as IFM_CH/SIMD words of SIMD bits per window
// position, in the order ky, kx, channel word. Channel c of a pixel sits in
// bit c. The convolution is stride 1 without padding, so the output map is
// (IFM_DIM-K+1) x (IFM_DIM-K+1), as the layer sizes of the network require
// (32 -> 30 -> 28, 14 -> 12 -> 10, 5 -> 3 -> 1).
//
// Storage is two whole-frame banks used in ping-pong: one frame is written
// while the windows of the previous frame are read, so consecutive images
// overlap in the layer pipeline. Writing accepts one pixel per cycle while
// a bank is free; reading emits one word per cycle while a bank is full.
// A frame's windows start the cycle after its last pixel is written.
//
// The paper gives the unit's purpose (reshape the binarized map into a wide
// input memory the MVTU can read); the frame-sized ping-pong buffer and the
// word order are this design's choices. A line buffer of K rows would need
// less memory; the frame buffer was kept for its simplicity.
module swu
  import bincop_pkg::*;
#(
  parameter int unsigned IFM_DIM = 32,
  parameter int unsigned IFM_CH  = 3,
  parameter int unsigned K       = 3,
  parameter int unsigned SIMD    = 3,
  localparam int unsigned OFM_DIM = IFM_DIM - K + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [IFM_CH-1:0] in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [SIMD-1:0]   out_data
);

  localparam int unsigned NPIX = IFM_DIM * IFM_DIM;
  localparam int unsigned CF   = IFM_CH / SIMD;
  localparam int unsigned PA_W = idx_w(NPIX);
  localparam int unsigned D_W  = idx_w(IFM_DIM);
  localparam int unsigned K_W  = idx_w(K);
  localparam int unsigned CF_W = idx_w(CF);

  if (IFM_CH % SIMD != 0) begin : g_chk1 $error("swu: IFM_CH must be a multiple of SIMD"); end
  if (K > IFM_DIM)        begin : g_chk2 $error("swu: kernel larger than the map"); end

  logic [IFM_CH-1:0] mem [2][NPIX];
  logic [1:0]        full_q;
  logic              wbank_q, rbank_q;
  logic [PA_W-1:0]   waddr_q;
  logic [D_W-1:0]    oy_q, ox_q;
  logic [K_W-1:0]    ky_q, kx_q;
  logic [CF_W-1:0]   cc_q;
  logic [PA_W-1:0]   raddr;
  logic [IFM_CH-1:0] rpix;
  logic              wr, rd, rd_last;
  logic              last_cc, last_kx, last_ky, last_ox, last_oy;

  assign in_ready  = !full_q[wbank_q];
  assign wr        = in_valid && in_ready;
  assign out_valid = full_q[rbank_q];
  assign rd        = out_valid && out_ready;

  assign last_cc = (cc_q == CF_W'(CF - 1));
  assign last_kx = (kx_q == K_W'(K - 1));
  assign last_ky = (ky_q == K_W'(K - 1));
  assign last_ox = (ox_q == D_W'(OFM_DIM - 1));
  assign last_oy = (oy_q == D_W'(OFM_DIM - 1));
  assign rd_last = last_cc && last_kx && last_ky && last_ox && last_oy;

  always_comb begin
    raddr    = PA_W'((int'(oy_q) + int'(ky_q)) * IFM_DIM + int'(ox_q) + int'(kx_q));
    rpix     = mem[rbank_q][raddr];
    out_data = rpix[int'(cc_q) * SIMD +: SIMD];
  end

  always_ff @(posedge clk) begin
    if (wr) mem[wbank_q][waddr_q] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q  <= '0;
      wbank_q <= 1'b0;
      rbank_q <= 1'b0;
      waddr_q <= '0;
      oy_q    <= '0;
      ox_q    <= '0;
      ky_q    <= '0;
      kx_q    <= '0;
      cc_q    <= '0;
    end else begin
      if (wr) begin
        if (waddr_q == PA_W'(NPIX - 1)) begin
          waddr_q         <= '0;
          full_q[wbank_q] <= 1'b1;
          wbank_q         <= !wbank_q;
        end else begin
          waddr_q <= waddr_q + 1'b1;
        end
      end
      if (rd) begin
        cc_q <= last_cc ? '0 : cc_q + 1'b1;
        if (last_cc) begin
          kx_q <= last_kx ? '0 : kx_q + 1'b1;
          if (last_kx) begin
            ky_q <= last_ky ? '0 : ky_q + 1'b1;
            if (last_ky) begin
              ox_q <= last_ox ? '0 : ox_q + 1'b1;
              if (last_ox) oy_q <= last_oy ? '0 : oy_q + 1'b1;
            end
          end
        end
        if (rd_last) begin
          full_q[rbank_q] <= 1'b0;
          rbank_q         <= !rbank_q;
        end
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
