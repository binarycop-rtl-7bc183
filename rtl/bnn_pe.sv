// bnn_pe: one processing element (PE) of a matrix-vector-threshold unit.
//
// Each cycle in which `step` is high the PE takes SIMD binary activations,
// XNORs them with the SIMD-bit weight word of the current (neuron fold,
// synapse fold) position, counts the ones (popcount) and adds the count to
// its accumulator. With the encoding -1 -> 0 and +1 -> 1, the number of
// matching bits m over a row of MW bits gives the +-1 dot product 2m - MW.
// On the last synapse fold of a row the PE compares the running match count
// with the row's threshold: the output bit is 1 when matches >= threshold.
// That comparison replaces batch normalisation followed by sign(), as the
// threshold is derived from the batch-norm statistics offline. The signed
// dot product is also provided for a final layer that has no threshold.
//
// Weights (NF*SF words of SIMD bits) and thresholds (NF entries) live in the
// PE's own memories and are written through the w_*/t_* ports before use
// (weight-stationary). Reads are combinational: `sum`, `dot` and `bit_o`
// are valid in the same cycle as `step`, `nf`, `sf` and `act`, and describe
// the row after adding the current word. The accumulator updates at the
// clock edge.
//
// The XNOR / popcount / threshold structure follows the paper; the memory
// organisation (one weight word per fold position, compare as
// "matches >= threshold") and the load ports are this design's choices.
module bnn_pe
  import bincop_pkg::*;
#(
  parameter int unsigned SIMD = 32,   // synapses processed per cycle
  parameter int unsigned SF   = 18,   // synapse fold: words per matrix row
  parameter int unsigned NF   = 64,   // neuron fold: rows handled by this PE
  localparam int unsigned MW    = SF * SIMD,      // matrix width (row length)
  localparam int unsigned ACC_W = cnt_w(MW),       // holds 0..MW
  localparam int unsigned WA_W  = idx_w(NF * SF),
  localparam int unsigned NF_W  = idx_w(NF),
  localparam int unsigned SF_W  = idx_w(SF)
) (
  input  logic              clk,
  // parameter load
  input  logic              w_we,
  input  logic [WA_W-1:0]   w_addr,    // nf*SF + sf
  input  logic [SIMD-1:0]   w_data,
  input  logic              t_we,
  input  logic [NF_W-1:0]   t_addr,    // nf
  input  logic [ACC_W-1:0]  t_data,
  // compute
  input  logic              step,      // consume one SIMD word this cycle
  input  logic [NF_W-1:0]   nf,
  input  logic [SF_W-1:0]   sf,
  input  logic [SIMD-1:0]   act,
  output logic [ACC_W-1:0]  sum,       // matches so far including `act`
  output logic signed [ACC_W:0] dot,   // 2*sum - MW (the +-1 dot product)
  output logic              bit_o      // sum >= threshold[nf]
);

  logic [SIMD-1:0]  wmem [NF*SF];
  logic [ACC_W-1:0] tmem [NF];
  logic [ACC_W-1:0] acc;
  logic [SIMD-1:0]  xnor_v;
  logic [WA_W-1:0]  rd_addr;

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_addr] <= w_data;
    if (t_we) tmem[t_addr] <= t_data;
  end

  always_comb begin
    rd_addr = WA_W'(nf * SF + sf);
    xnor_v  = ~(act ^ wmem[rd_addr]);
    sum     = ((sf == '0) ? '0 : acc) + ACC_W'($countones(xnor_v));
    dot     = $signed({1'b0, sum}) + $signed({1'b0, sum}) - $signed((ACC_W+1)'(MW));
    bit_o   = (sum >= tmem[nf]);
  end

  always_ff @(posedge clk) begin
    if (step) acc <= sum;
  end

endmodule
