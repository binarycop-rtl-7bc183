// stream_dwc: stream data-width converter (wide to narrow).
//
// Splits every IN_W-bit input beat into IN_W/OUT_W output beats of OUT_W
// bits, least significant slice first. It sits in front of each
// fully-connected MVTU, turning the previous layer's output word (all its
// channels) into the SIMD-wide words the MVTU consumes; successive input
// beats simply continue the vector, which also flattens a multi-pixel map.
// One output beat per cycle; a new input beat is accepted in the cycle the
// last slice of the previous one leaves, so there is no bubble.
// The paper does not describe this glue; it is this design's own.
module stream_dwc #(
  parameter int unsigned IN_W  = 64,
  parameter int unsigned OUT_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [IN_W-1:0]  in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [OUT_W-1:0] out_data
);

  localparam int unsigned N   = IN_W / OUT_W;
  localparam int unsigned C_W = (N > 1) ? $clog2(N) : 1;

  if (IN_W % OUT_W != 0) begin : g_chk1 $error("stream_dwc: IN_W must be a multiple of OUT_W"); end

  logic [IN_W-1:0] buf_q;
  logic [C_W-1:0]  cnt_q;
  logic            busy_q, last;

  assign last      = (cnt_q == C_W'(N - 1));
  assign out_valid = busy_q;
  assign out_data  = buf_q[int'(cnt_q) * OUT_W +: OUT_W];
  assign in_ready  = !busy_q || (out_ready && last);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q  <= '0;
      cnt_q  <= '0;
      busy_q <= 1'b0;
    end else begin
      if (out_valid && out_ready) begin
        cnt_q <= last ? '0 : cnt_q + 1'b1;
        if (last) busy_q <= 1'b0;
      end
      if (in_valid && in_ready) begin
        buf_q  <= in_data;
        cnt_q  <= '0;
        busy_q <= 1'b1;
      end
    end
  end

endmodule
