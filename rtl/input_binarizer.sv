// input_binarizer: converts the 8-bit camera image into the binary input
// activations of the first convolution.
//
// The network binarizes every layer's input as sign(BatchNorm(A)), and a
// batch-norm followed by sign() reduces to comparing the value with one
// threshold per channel. This unit applies that rule to the input image:
// output bit c is 1 when channel c of the pixel is >= threshold c.
// Pixels arrive one per beat, channel c at [c*PIX_W +: PIX_W] (R, G, B for
// c = 0, 1, 2); the CH-bit result leaves through a one-entry output register
// one cycle later (valid/ready, full throughput). Thresholds are written
// through the cfg_* port (cfg_addr selects the channel) before images flow.
//
// Applying the threshold rule to the image itself follows the paper's
// equations, which binarize A^{l-1} for every layer l including the first.
// The unsigned comparison, pixel format and load port are this design's.
module input_binarizer
  import bincop_pkg::*;
#(
  parameter int unsigned CH    = 3,
  parameter int unsigned PIX_W = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cfg_we,
  input  logic [CFG_ADDR_W-1:0] cfg_addr,
  input  logic [CFG_DATA_W-1:0] cfg_data,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [CH*PIX_W-1:0]   in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [CH-1:0]         out_data
);

  logic [PIX_W-1:0] thr [CH];
  logic [CH-1:0]    bits;

  always_ff @(posedge clk) begin
    for (int c = 0; c < CH; c++)
      if (cfg_we && cfg_addr == CFG_ADDR_W'(c)) thr[c] <= cfg_data[PIX_W-1:0];
  end

  always_comb begin
    for (int c = 0; c < CH; c++)
      bits[c] = (in_data[c*PIX_W +: PIX_W] >= thr[c]);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        out_data  <= bits;
        out_valid <= 1'b1;
      end
    end
  end

endmodule
