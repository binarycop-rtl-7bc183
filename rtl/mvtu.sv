// mvtu: matrix-vector-threshold unit, the compute engine of one BNN layer.
//
// The unit multiplies a binary input vector of MW bits by a binary MH x MW
// weight matrix with XNOR/popcount arithmetic, then thresholds every row to
// one output bit (hidden layers) or outputs the signed +-1 dot product of
// every row (final classifier layer, OUT_ACC = 1). PE processing elements
// work in parallel, each on SIMD columns per cycle, so the matrix is folded:
//   SF = MW / SIMD   synapse-fold words per row,
//   NF = MH / PE     neuron folds (PE rows each) per input vector.
// Row n is handled by PE (n % PE) in fold (n / PE).
//
// Input:  a stream of SIMD-bit words (valid/ready); SF consecutive words
//         form one input vector, lowest columns first. For a convolution the
//         SWU produces them, one vector per output pixel.
// Output: one word per input vector (valid/ready): MH threshold bits, bit n
//         for row n, or MH signed SCORE_W-bit dot products, row n at
//         [n*SCORE_W +: SCORE_W].
// Timing: one (fold, word) step per cycle. During neuron fold 0 the unit
//         consumes the incoming words and stores them in an input buffer;
//         folds 1..NF-1 re-read that buffer. A vector thus takes SF*NF
//         cycles, the per-pixel latency the paper's estimates use, and the
//         result appears one cycle after the last step. The unit stalls only
//         when the previous result has not been taken.
// Parameters are loaded through the cfg_* port: CFG_WEIGHT writes the
// SIMD-bit word at address nf*SF+sf of PE cfg_pe, CFG_THRESH writes the
// threshold (a match count) of fold cfg_addr of PE cfg_pe.
//
// The PE/SIMD folding and the thresholding follow the paper; the stream
// handshake, the input buffer and the load port are this design's choices.
module mvtu
  import bincop_pkg::*;
#(
  parameter int unsigned MW      = 576,  // matrix width  (K*K*Ci or FC inputs)
  parameter int unsigned MH      = 64,   // matrix height (output channels)
  parameter int unsigned SIMD    = 32,
  parameter int unsigned PE      = 1,
  parameter bit          OUT_ACC = 1'b0, // 1: output dot products, no threshold
  parameter int unsigned SCORE_W = 16,
  localparam int unsigned SF    = MW / SIMD,
  localparam int unsigned NF    = MH / PE,
  localparam int unsigned ACC_W = cnt_w(MW),
  localparam int unsigned OUT_W = OUT_ACC ? MH * SCORE_W : MH
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // parameter load
  input  logic                  cfg_we,
  input  cfg_kind_e             cfg_kind,
  input  logic [CFG_PE_W-1:0]   cfg_pe,
  input  logic [CFG_ADDR_W-1:0] cfg_addr,
  input  logic [CFG_DATA_W-1:0] cfg_data,
  // input vector stream
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [SIMD-1:0]       in_data,
  // output stream
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [OUT_W-1:0]      out_data
);

  localparam int unsigned NF_W = idx_w(NF);
  localparam int unsigned SF_W = idx_w(SF);
  localparam int unsigned WA_W = idx_w(NF * SF);

  if (MW % SIMD != 0) begin : g_chk1 $error("mvtu: MW must be a multiple of SIMD"); end
  if (MH % PE != 0)   begin : g_chk2 $error("mvtu: MH must be a multiple of PE"); end
  if (SIMD > CFG_DATA_W) begin : g_chk3 $error("mvtu: SIMD wider than the load bus"); end
  if (OUT_ACC && (ACC_W + 1 > SCORE_W)) begin : g_chk4 $error("mvtu: SCORE_W too narrow"); end

  logic [NF_W-1:0] nf_q;
  logic [SF_W-1:0] sf_q;
  logic [SIMD-1:0] ibuf [SF];
  logic [SIMD-1:0] act;
  logic            last_sf, last_step, stall, step;

  logic [PE-1:0]            pe_bit;
  logic signed [ACC_W:0]    pe_dot [PE];
  logic [OUT_W-1:0]         build_q, build_d;

  assign last_sf   = (sf_q == SF_W'(SF - 1));
  assign last_step = last_sf && (nf_q == NF_W'(NF - 1));
  assign stall     = last_step && out_valid && !out_ready;
  assign in_ready  = (nf_q == '0) && !stall;
  assign step      = !stall && ((nf_q != '0) || in_valid);
  assign act       = (nf_q == '0) ? in_data : ibuf[sf_q];

  for (genvar p = 0; p < PE; p++) begin : g_pe
    logic [ACC_W-1:0] pe_sum;
    bnn_pe #(.SIMD(SIMD), .SF(SF), .NF(NF)) u_pe (
      .clk   (clk),
      .w_we  (cfg_we && cfg_kind == CFG_WEIGHT && cfg_pe == CFG_PE_W'(p)),
      .w_addr(WA_W'(cfg_addr)),
      .w_data(cfg_data[SIMD-1:0]),
      .t_we  (cfg_we && cfg_kind == CFG_THRESH && cfg_pe == CFG_PE_W'(p)),
      .t_addr(NF_W'(cfg_addr)),
      .t_data(cfg_data[ACC_W-1:0]),
      .step  (step),
      .nf    (nf_q),
      .sf    (sf_q),
      .act   (act),
      .sum   (pe_sum),
      .dot   (pe_dot[p]),
      .bit_o (pe_bit[p])
    );
  end

  // Result word with the current neuron fold's PE outputs merged in.
  if (OUT_ACC) begin : g_build_acc
    always_comb begin
      build_d = build_q;
      for (int p = 0; p < PE; p++)
        build_d[(int'(nf_q) * PE + p) * SCORE_W +: SCORE_W] = SCORE_W'(pe_dot[p]);
    end
  end else begin : g_build_bit
    always_comb begin
      build_d = build_q;
      for (int p = 0; p < PE; p++)
        build_d[int'(nf_q) * PE + p] = pe_bit[p];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nf_q      <= '0;
      sf_q      <= '0;
      build_q   <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (step) begin
        if (last_sf) begin
          sf_q    <= '0;
          build_q <= build_d;
          nf_q    <= last_step ? '0 : nf_q + 1'b1;
          if (last_step) begin
            out_data  <= build_d;
            out_valid <= 1'b1;
          end
        end else begin
          sf_q <= sf_q + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (step && nf_q == '0) ibuf[sf_q] <= in_data;
  end

  // A result, once offered, stays put until it is taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
