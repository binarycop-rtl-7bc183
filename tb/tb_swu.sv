// tb_swu: self-checking test of the sliding-window unit. Streams four random
// 5x5x4 binary maps (K 3, SIMD 2) with random input gaps and output
// back-pressure and compares every output word with the window word
// (oy, ox, ky, kx, channel word) taken from the reference map. It also
// checks that a frame is written while the previous one is still being
// read (both ping-pong banks full at once) and that an idle unit with a
// full bank streams one word per cycle.
module tb_swu;
  localparam int D = 5, CH = 4, K = 3, SIMD = 2, NFR = 4;
  localparam int OD = D - K + 1, CF = CH / SIMD;
  logic clk = 0, rst_n = 0, in_valid = 0, out_ready = 0;
  logic [CH-1:0] in_data = '0;
  logic [SIMD-1:0] out_data;
  logic in_ready, out_valid;
  int checks = 0, failures = 0, both_full = 0, rate_words = 0;
  logic [CH-1:0] map [NFR][D][D];
  logic [SIMD-1:0] expq [$];

  swu #(.IFM_DIM(D), .IFM_CH(CH), .K(K), .SIMD(SIMD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (dut.full_q == 2'b11) both_full++;
    if (out_valid && out_ready) begin
      logic [SIMD-1:0] e;
      e = expq.pop_front();
      checks++;
      if (out_data !== e) begin failures++; $display("FAIL got %b exp %b", out_data, e); end
    end
  end

  initial begin
    for (int f = 0; f < NFR; f++) begin
      for (int y = 0; y < D; y++)
        for (int x = 0; x < D; x++) map[f][y][x] = CH'($urandom);
      for (int oy = 0; oy < OD; oy++)
        for (int ox = 0; ox < OD; ox++)
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++)
              for (int c = 0; c < CF; c++)
                expq.push_back(map[f][oy+ky][ox+kx][c*SIMD +: SIMD]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // frame 0 alone, output held off: then the full bank must stream at
    // one word per cycle
    for (int y = 0; y < D; y++)
      for (int x = 0; x < D; x++) begin
        in_valid = 1; in_data = map[0][y][x]; @(negedge clk);
      end
    in_valid = 0;
    out_ready = 1;
    for (int i = 0; i < OD*OD*K*K*CF; i++) begin
      @(posedge clk); if (out_valid) rate_words++;
      @(negedge clk);
    end
    checks++;
    if (rate_words != OD*OD*K*K*CF) begin
      failures++; $display("FAIL %0d words in %0d cycles", rate_words, OD*OD*K*K*CF);
    end
    fork
      for (int f = 1; f < NFR; f++)
        for (int y = 0; y < D; y++)
          for (int x = 0; x < D; x++) begin
            while ($urandom_range(0, 5) == 0) begin in_valid = 0; @(negedge clk); end
            in_valid = 1; in_data = map[f][y][x];
            @(posedge clk);
            while (!in_ready) @(posedge clk);
            @(negedge clk);
            in_valid = 0;
          end
      forever begin out_ready = ($urandom_range(0, 2) != 0); @(negedge clk); end
    join_any
    disable fork;
    out_ready = 1;
    repeat (OD*OD*K*K*CF*2 + 10) @(negedge clk);
    checks++;
    if (expq.size() != 0 || both_full == 0) begin
      failures++; $display("FAIL %0d words missing, both banks full %0d cycles", expq.size(), both_full);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
