// maxpool_or: 2x2, stride-2 max-pooling of a binary activation map.
//
// With activations encoded -1 -> 0 and +1 -> 1, the maximum of a pooling
// window is 1 as soon as one element is 1, so max-pooling is a bitwise OR
// over the window, independently for every channel. Pixels arrive as a
// raster stream (IFM_DIM x IFM_DIM, IFM_CH bits each, channel c in bit c);
// a row buffer of IFM_DIM/2 partial results collects the OR of each window
// over its two rows, and the pooled pixel is sent when the bottom-right
// pixel of its window arrives. Output is a raster stream of
// (IFM_DIM/2) x (IFM_DIM/2) pixels through a one-entry output register:
// the result is valid the cycle after the window's last pixel.
//
// OR-based pooling follows the paper. The 2x2 window with stride 2 is
// inferred from the layer sizes (28 -> 14 and 10 -> 5; the paper states the
// output of Conv2_2 is 5x5); the stream interface is this design's choice.
module maxpool_or
  import bincop_pkg::*;
#(
  parameter int unsigned IFM_DIM = 28,
  parameter int unsigned IFM_CH  = 16,
  localparam int unsigned OFM_DIM = IFM_DIM / 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [IFM_CH-1:0] in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [IFM_CH-1:0] out_data
);

  localparam int unsigned D_W = idx_w(IFM_DIM);
  localparam int unsigned O_W = idx_w(OFM_DIM);

  if (IFM_DIM % 2 != 0) begin : g_chk1 $error("maxpool_or: IFM_DIM must be even"); end

  logic [IFM_CH-1:0] rowacc [OFM_DIM];
  logic [D_W-1:0]    x_q, y_q;
  logic [O_W-1:0]    j;
  logic [IFM_CH-1:0] merged;
  logic              acc_in;

  assign in_ready = !out_valid || out_ready;
  assign acc_in   = in_valid && in_ready;
  assign j        = O_W'(x_q >> 1);
  assign merged   = (!x_q[0] && !y_q[0]) ? in_data : (rowacc[j] | in_data);

  always_ff @(posedge clk) begin
    if (acc_in) rowacc[j] <= merged;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q       <= '0;
      y_q       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (acc_in) begin
        if (x_q[0] && y_q[0]) begin
          out_data  <= merged;
          out_valid <= 1'b1;
        end
        if (x_q == D_W'(IFM_DIM - 1)) begin
          x_q <= '0;
          y_q <= (y_q == D_W'(IFM_DIM - 1)) ? '0 : y_q + 1'b1;
        end else begin
          x_q <= x_q + 1'b1;
        end
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
