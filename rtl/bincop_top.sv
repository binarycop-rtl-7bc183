// bincop_top: the BinaryCoP face-mask classifier accelerator, a streaming
// binary neural network pipeline that sorts a 32x32 RGB face crop into four
// classes (mask correct, nose exposed, nose+mouth exposed, chin exposed).
//
// Dataflow (default parameters = the paper's n-CNV prototype):
//   input_binarizer                      32x32x3 pixels -> 3 bits/pixel
//   Conv1_1  swu + mvtu  [3,16]   PE 16 SIMD  3   32 -> 30
//   Conv1_2  swu + mvtu  [16,16]  PE 16 SIMD 16   30 -> 28
//   maxpool_or (OR)                                28 -> 14
//   Conv2_1  swu + mvtu  [16,32]  PE 16 SIMD 16   14 -> 12
//   Conv2_2  swu + mvtu  [32,32]  PE 16 SIMD 32   12 -> 10
//   maxpool_or (OR)                                10 -> 5
//   Conv3_1  swu + mvtu  [32,64]  PE  4 SIMD 32    5 -> 3
//   Conv3_2  swu + mvtu  [64,64]  PE  1 SIMD 32    3 -> 1
//   FC1      dwc + mvtu  [64,128] PE  1 SIMD  4
//   FC2      dwc + mvtu  [128,128]PE  1 SIMD  8
//   FC3      dwc + mvtu  [128,4]  PE  1 SIMD  1   no threshold: class scores
// Every layer is its own hardware stage, so in steady state each stage
// works on a different image and the frame interval is set by the slowest
// stage (Conv1_1: 900 output pixels x 9 words x 1 fold = 8100 cycles).
// Overriding the channel, PE and SIMD parameters gives the larger CNV
// prototype, which has the same layer sequence. N_CONV = 5 and N_FC = 2 give
// the smaller mu-CNV sequence: Conv3_1 (3x3x64 map) feeds FC1 directly and
// the second FC layer is the classifier. PE_L/SIMD_L then list the layers in
// that order (entries beyond the last layer are unused).
//
// Interfaces:
//   in_*   one RGB pixel per beat (R at [7:0], G [15:8], B [23:16]), raster
//          order, 1024 beats per image, valid/ready.
//   out_*  one beat per image: NCLS signed SCORE_W-bit scores, class c at
//          [c*SCORE_W +: SCORE_W]; each is the +-1 dot product of FC3 row c.
//          Picking the largest is left to the host, as in the paper.
//   cfg_*  parameter load, done while no image is in flight. cfg_layer
//          0..N_CONV+N_FC-1 selects the MVTU of the layer in pipeline order
//          (0..8 = Conv1_1..FC3 by default; cfg_kind, cfg_pe and cfg_addr as
//          in mvtu); cfg_layer 9 selects the input thresholds.
// The host processor drives all three ports; it is outside this design.
module bincop_top
  import bincop_pkg::*;
#(
  parameter int unsigned IMG     = 32,
  parameter int unsigned PIX_W   = 8,
  parameter int unsigned K       = 3,
  parameter int unsigned C_IN    = 3,
  parameter int unsigned C1_1    = 16,
  parameter int unsigned C1_2    = 16,
  parameter int unsigned C2_1    = 32,
  parameter int unsigned C2_2    = 32,
  parameter int unsigned C3_1    = 64,
  parameter int unsigned C3_2    = 64,
  parameter int unsigned FC1_N   = 128,
  parameter int unsigned FC2_N   = 128,
  parameter int unsigned NCLS    = 4,
  parameter int unsigned N_CONV  = 6,   // 6, or 5 to drop Conv3_2 (mu-CNV)
  parameter int unsigned N_FC    = 3,   // 3, or 2 to drop FC2's successor (mu-CNV)
  parameter int unsigned PE_L [9]   = '{16, 16, 16, 16, 4, 1, 1, 1, 1},
  parameter int unsigned SIMD_L [9] = '{3, 16, 16, 32, 32, 32, 4, 8, 1},
  parameter int unsigned SCORE_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // parameter load
  input  logic                    cfg_we,
  input  logic [3:0]              cfg_layer,
  input  cfg_kind_e               cfg_kind,
  input  logic [CFG_PE_W-1:0]     cfg_pe,
  input  logic [CFG_ADDR_W-1:0]   cfg_addr,
  input  logic [CFG_DATA_W-1:0]   cfg_data,
  // image stream
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [C_IN*PIX_W-1:0]   in_data,
  // class scores
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [NCLS*SCORE_W-1:0] out_data
);

  // Map sizes along the pipeline (valid 3x3 convolutions, 2x2 pools).
  localparam int unsigned D1_1 = IMG - K + 1;
  localparam int unsigned D1_2 = D1_1 - K + 1;
  localparam int unsigned P1   = D1_2 / 2;
  localparam int unsigned D2_1 = P1 - K + 1;
  localparam int unsigned D2_2 = D2_1 - K + 1;
  localparam int unsigned P2   = D2_2 / 2;
  localparam int unsigned D3_1 = P2 - K + 1;
  localparam int unsigned D3_2 = D3_1 - K + 1;
  localparam int unsigned C_LAST = (N_CONV == 6) ? C3_2 : C3_1;
  localparam int unsigned D_LAST = (N_CONV == 6) ? D3_2 : D3_1;
  localparam int unsigned FC_IN  = D_LAST * D_LAST * C_LAST;
  // PE_L/SIMD_L and cfg_layer index of each FC layer: right after the convs
  localparam int unsigned L_FC1 = N_CONV;
  localparam int unsigned L_FC2 = N_CONV + 1;
  localparam int unsigned L_FC3 = N_CONV + 2;

  if (N_CONV != 5 && N_CONV != 6) begin : g_chk1 $error("bincop_top: N_CONV must be 5 or 6"); end
  if (N_FC != 2 && N_FC != 3)     begin : g_chk2 $error("bincop_top: N_FC must be 2 or 3"); end

  // Per-layer input channels, output channels and matrix widths.
  localparam int unsigned CI [6] = '{C_IN, C1_1, C1_2, C2_1, C2_2, C3_1};
  localparam int unsigned CO [6] = '{C1_1, C1_2, C2_1, C2_2, C3_1, C3_2};
  localparam int unsigned DI [6] = '{IMG, D1_1, P1, D2_1, P2, D3_1};

  logic [9:0] cfg_sel;
  always_comb
    for (int l = 0; l < 10; l++) cfg_sel[l] = cfg_we && (cfg_layer == 4'(l));

  // ---------------- input binarization ----------------
  logic          b_valid, b_ready;
  logic [C_IN-1:0] b_data;

  input_binarizer #(.CH(C_IN), .PIX_W(PIX_W)) u_bin (
    .clk, .rst_n,
    .cfg_we(cfg_sel[9]), .cfg_addr, .cfg_data,
    .in_valid, .in_ready, .in_data,
    .out_valid(b_valid), .out_ready(b_ready), .out_data(b_data)
  );

  // ---------------- convolutional layers ----------------
  // Stream into conv layer l (pixel of CI[l] bits) and out of it (CO[l]).
  // Widths differ per layer, so each layer's signals live in its generate
  // scope; the stream into layer l is chosen below.
  logic [5:0] cin_valid, cin_ready, cout_valid, cout_ready;
  logic              last_valid, last_ready;
  logic [C_LAST-1:0] last_data;

  for (genvar l = 0; l < N_CONV; l++) begin : g_conv
    logic [CI[l]-1:0]     in_pix;
    logic [CO[l]-1:0]     out_pix;
    logic                 w_valid, w_ready;
    logic [SIMD_L[l]-1:0] w_data;

    swu #(.IFM_DIM(DI[l]), .IFM_CH(CI[l]), .K(K), .SIMD(SIMD_L[l])) u_swu (
      .clk, .rst_n,
      .in_valid(cin_valid[l]), .in_ready(cin_ready[l]), .in_data(in_pix),
      .out_valid(w_valid), .out_ready(w_ready), .out_data(w_data)
    );

    mvtu #(.MW(K*K*CI[l]), .MH(CO[l]), .SIMD(SIMD_L[l]), .PE(PE_L[l]),
           .OUT_ACC(1'b0), .SCORE_W(SCORE_W)) u_mvtu (
      .clk, .rst_n,
      .cfg_we(cfg_sel[l]), .cfg_kind, .cfg_pe, .cfg_addr, .cfg_data,
      .in_valid(w_valid), .in_ready(w_ready), .in_data(w_data),
      .out_valid(cout_valid[l]), .out_ready(cout_ready[l]), .out_data(out_pix)
    );
  end

  // Conv1_1 <- binarizer
  assign cin_valid[0]         = b_valid;
  assign b_ready              = cin_ready[0];
  assign g_conv[0].in_pix     = b_data;
  // Conv1_2 <- Conv1_1
  assign cin_valid[1]         = cout_valid[0];
  assign cout_ready[0]        = cin_ready[1];
  assign g_conv[1].in_pix     = g_conv[0].out_pix;

  // Conv1_2 -> pool 1 -> Conv2_1
  maxpool_or #(.IFM_DIM(D1_2), .IFM_CH(C1_2)) u_pool1 (
    .clk, .rst_n,
    .in_valid(cout_valid[1]), .in_ready(cout_ready[1]), .in_data(g_conv[1].out_pix),
    .out_valid(cin_valid[2]), .out_ready(cin_ready[2]), .out_data(g_conv[2].in_pix)
  );

  // Conv2_2 <- Conv2_1
  assign cin_valid[3]         = cout_valid[2];
  assign cout_ready[2]        = cin_ready[3];
  assign g_conv[3].in_pix     = g_conv[2].out_pix;

  // Conv2_2 -> pool 2 -> Conv3_1
  maxpool_or #(.IFM_DIM(D2_2), .IFM_CH(C2_2)) u_pool2 (
    .clk, .rst_n,
    .in_valid(cout_valid[3]), .in_ready(cout_ready[3]), .in_data(g_conv[3].out_pix),
    .out_valid(cin_valid[4]), .out_ready(cin_ready[4]), .out_data(g_conv[4].in_pix)
  );

  if (N_CONV == 6) begin : g_conv3_2
    // Conv3_2 <- Conv3_1, FC1 <- Conv3_2
    assign cin_valid[5]     = cout_valid[4];
    assign cout_ready[4]    = cin_ready[5];
    assign g_conv[5].in_pix = g_conv[4].out_pix;
    assign last_valid       = cout_valid[5];
    assign cout_ready[5]    = last_ready;
    assign last_data        = g_conv[5].out_pix;
  end else begin : g_no_conv3_2
    // FC1 <- Conv3_1
    assign last_valid       = cout_valid[4];
    assign cout_ready[4]    = last_ready;
    assign last_data        = g_conv[4].out_pix;
    assign cin_valid[5]     = 1'b0;
    assign cout_valid[5]    = 1'b0;
    assign cin_ready[5]     = 1'b0;
    assign cout_ready[5]    = 1'b0;
  end

  // ---------------- fully-connected layers ----------------
  logic                      f1w_valid, f1w_ready, f1_valid, f1_ready;
  logic [SIMD_L[L_FC1]-1:0]  f1w_data;
  logic [FC1_N-1:0]          f1_data;
  logic                      f2w_valid, f2w_ready;
  logic [SIMD_L[L_FC2]-1:0]  f2w_data;

  stream_dwc #(.IN_W(C_LAST), .OUT_W(SIMD_L[L_FC1])) u_dwc1 (
    .clk, .rst_n,
    .in_valid(last_valid), .in_ready(last_ready), .in_data(last_data),
    .out_valid(f1w_valid), .out_ready(f1w_ready), .out_data(f1w_data)
  );

  mvtu #(.MW(FC_IN), .MH(FC1_N), .SIMD(SIMD_L[L_FC1]), .PE(PE_L[L_FC1]),
         .OUT_ACC(1'b0), .SCORE_W(SCORE_W)) u_fc1 (
    .clk, .rst_n,
    .cfg_we(cfg_sel[L_FC1]), .cfg_kind, .cfg_pe, .cfg_addr, .cfg_data,
    .in_valid(f1w_valid), .in_ready(f1w_ready), .in_data(f1w_data),
    .out_valid(f1_valid), .out_ready(f1_ready), .out_data(f1_data)
  );

  stream_dwc #(.IN_W(FC1_N), .OUT_W(SIMD_L[L_FC2])) u_dwc2 (
    .clk, .rst_n,
    .in_valid(f1_valid), .in_ready(f1_ready), .in_data(f1_data),
    .out_valid(f2w_valid), .out_ready(f2w_ready), .out_data(f2w_data)
  );

  if (N_FC == 3) begin : g_fc3
    logic                      f2_valid, f2_ready;
    logic [FC2_N-1:0]          f2_data;
    logic                      f3w_valid, f3w_ready;
    logic [SIMD_L[L_FC3]-1:0]  f3w_data;

    mvtu #(.MW(FC1_N), .MH(FC2_N), .SIMD(SIMD_L[L_FC2]), .PE(PE_L[L_FC2]),
           .OUT_ACC(1'b0), .SCORE_W(SCORE_W)) u_fc2 (
      .clk, .rst_n,
      .cfg_we(cfg_sel[L_FC2]), .cfg_kind, .cfg_pe, .cfg_addr, .cfg_data,
      .in_valid(f2w_valid), .in_ready(f2w_ready), .in_data(f2w_data),
      .out_valid(f2_valid), .out_ready(f2_ready), .out_data(f2_data)
    );

    stream_dwc #(.IN_W(FC2_N), .OUT_W(SIMD_L[L_FC3])) u_dwc3 (
      .clk, .rst_n,
      .in_valid(f2_valid), .in_ready(f2_ready), .in_data(f2_data),
      .out_valid(f3w_valid), .out_ready(f3w_ready), .out_data(f3w_data)
    );

    // final layer: no threshold, class scores
    mvtu #(.MW(FC2_N), .MH(NCLS), .SIMD(SIMD_L[L_FC3]), .PE(PE_L[L_FC3]),
           .OUT_ACC(1'b1), .SCORE_W(SCORE_W)) u_last (
      .clk, .rst_n,
      .cfg_we(cfg_sel[L_FC3]), .cfg_kind, .cfg_pe, .cfg_addr, .cfg_data,
      .in_valid(f3w_valid), .in_ready(f3w_ready), .in_data(f3w_data),
      .out_valid, .out_ready, .out_data
    );
  end else begin : g_fc2
    // final layer: no threshold, class scores
    mvtu #(.MW(FC1_N), .MH(NCLS), .SIMD(SIMD_L[L_FC2]), .PE(PE_L[L_FC2]),
           .OUT_ACC(1'b1), .SCORE_W(SCORE_W)) u_last (
      .clk, .rst_n,
      .cfg_we(cfg_sel[L_FC2]), .cfg_kind, .cfg_pe, .cfg_addr, .cfg_data,
      .in_valid(f2w_valid), .in_ready(f2w_ready), .in_data(f2w_data),
      .out_valid, .out_ready, .out_data
    );
  end

endmodule
