// tb_maxpool_or: self-checking test of the OR max-pool. Streams three random
// 6x6x5 binary maps with random input gaps and output back-pressure, and
// compares every pooled pixel with the OR of its 2x2 window computed here.
module tb_maxpool_or;
  localparam int D = 6, CH = 5, NFR = 3;
  logic clk = 0, rst_n = 0, in_valid = 0, out_ready = 0;
  logic [CH-1:0] in_data = '0, out_data;
  logic in_ready, out_valid;
  int checks = 0, failures = 0;
  logic [CH-1:0] map [NFR][D][D];
  logic [CH-1:0] expq [$];

  maxpool_or #(.IFM_DIM(D), .IFM_CH(CH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [CH-1:0] e;
    e = expq.pop_front();
    checks++;
    if (out_data !== e) begin failures++; $display("FAIL got %b exp %b", out_data, e); end
  end

  initial begin
    for (int f = 0; f < NFR; f++) begin
      for (int y = 0; y < D; y++)
        for (int x = 0; x < D; x++) map[f][y][x] = CH'($urandom) & CH'($urandom);
      for (int y = 0; y < D; y += 2)
        for (int x = 0; x < D; x += 2)
          expq.push_back(map[f][y][x] | map[f][y][x+1] | map[f][y+1][x] | map[f][y+1][x+1]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      for (int f = 0; f < NFR; f++)
        for (int y = 0; y < D; y++)
          for (int x = 0; x < D; x++) begin
            while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
            in_valid = 1; in_data = map[f][y][x];
            @(posedge clk);
            while (!in_ready) @(posedge clk);
            @(negedge clk);
            in_valid = 0;
          end
      forever begin out_ready = ($urandom_range(0, 2) != 0); @(negedge clk); end
    join_any
    out_ready = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
