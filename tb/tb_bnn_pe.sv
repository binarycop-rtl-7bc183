// tb_bnn_pe: self-checking test of one processing element.
// Loads random weights and thresholds into a PE (SIMD 8, SF 3, NF 4), then
// for every row streams SF random activation words and compares the running
// match count, the +-1 dot product and the threshold bit with a reference
// computed here bit by bit. Thresholds are drawn around MW/2 and include the
// exact match count of some rows so both sides of ">=" are exercised.
module tb_bnn_pe;
  import bincop_pkg::*;
  localparam int SIMD = 8, SF = 3, NF = 4, MW = SIMD * SF;

  logic clk = 0, w_we = 0, t_we = 0, step = 0;
  logic [idx_w(NF*SF)-1:0] w_addr = '0;
  logic [SIMD-1:0] w_data = '0, act = '0;
  logic [idx_w(NF)-1:0] t_addr = '0, nf = '0;
  logic [cnt_w(MW)-1:0] t_data = '0, sum;
  logic [idx_w(SF)-1:0] sf = '0;
  logic signed [cnt_w(MW):0] dot;
  logic bit_o;
  int checks = 0, failures = 0;
  logic [SIMD-1:0] W [NF][SF];
  int T [NF];

  bnn_pe #(.SIMD(SIMD), .SF(SF), .NF(NF)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int n = 0; n < NF; n++) begin
      for (int s = 0; s < SF; s++) W[n][s] = SIMD'($urandom);
      T[n] = MW / 2 - 3 + int'($urandom_range(0, 6));
    end
    @(negedge clk);
    for (int n = 0; n < NF; n++)
      for (int s = 0; s < SF; s++) begin
        w_we = 1; w_addr = 4'(n * SF + s); w_data = W[n][s]; @(negedge clk);
      end
    w_we = 0;
    for (int n = 0; n < NF; n++) begin
      t_we = 1; t_addr = 2'(n); t_data = 5'(T[n]); @(negedge clk);
    end
    t_we = 0;
    for (int rep = 0; rep < 40; rep++) begin
      int n, m;
      n = rep % NF; m = 0;
      for (int s = 0; s < SF; s++) begin
        step = 1; nf = 2'(n); sf = 2'(s); act = SIMD'($urandom);
        for (int b = 0; b < SIMD; b++) m += (act[b] == W[n][s][b]) ? 1 : 0;
        #1;
        check(int'(sum) == m, $sformatf("sum row %0d fold %0d: %0d vs %0d", n, s, sum, m));
        if (s == SF - 1) begin
          check(int'(dot) == 2 * m - MW, $sformatf("dot row %0d: %0d vs %0d", n, dot, 2*m-MW));
          check(bit_o == (m >= T[n]), $sformatf("bit row %0d m=%0d T=%0d", n, m, T[n]));
        end
        @(negedge clk);
      end
      step = 0;
      // an idle cycle must not disturb the next row
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
