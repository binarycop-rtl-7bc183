// tb_input_binarizer: self-checking test of the per-channel input
// thresholding. Loads three thresholds, sends random pixels (including
// values equal to a threshold) with random valid gaps and random output
// back-pressure, and compares each output bit with pixel >= threshold.
module tb_input_binarizer;
  import bincop_pkg::*;
  localparam int CH = 3, PW = 8;
  logic clk = 0, rst_n = 0, cfg_we = 0, in_valid = 0, out_ready = 0;
  logic [CFG_ADDR_W-1:0] cfg_addr = '0;
  logic [CFG_DATA_W-1:0] cfg_data = '0;
  logic [CH*PW-1:0] in_data = '0;
  logic in_ready, out_valid;
  logic [CH-1:0] out_data;
  int checks = 0, failures = 0, stalls = 0;
  int thr [CH];
  logic [CH-1:0] expq [$];

  input_binarizer #(.CH(CH), .PIX_W(PW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard
  always @(posedge clk) if (rst_n) begin
    if (out_valid && !out_ready) stalls++;
    if (out_valid && out_ready) begin
      logic [CH-1:0] e;
      e = expq.pop_front();
      checks++;
      if (out_data !== e) begin failures++; $display("FAIL got %b exp %b", out_data, e); end
    end
  end

  initial begin
    for (int c = 0; c < CH; c++) thr[c] = int'($urandom_range(40, 220));
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < CH; c++) begin
      cfg_we = 1; cfg_addr = 16'(c); cfg_data = 32'(thr[c]); @(negedge clk);
    end
    cfg_we = 0;
    fork
      begin
        for (int i = 0; i < 400; i++) begin
          logic [CH-1:0] e;
          in_valid = ($urandom_range(0, 3) != 0);
          for (int c = 0; c < CH; c++) begin
            int v;
            v = ($urandom_range(0, 7) == 0) ? thr[c] : int'($urandom_range(0, 255));
            in_data[c*PW +: PW] = PW'(v);
            e[c] = (v >= thr[c]);
          end
          @(posedge clk);
          if (in_valid && in_ready) expq.push_back(e);
          @(negedge clk);
        end
        in_valid = 0;
      end
      begin
        for (int i = 0; i < 500; i++) begin
          out_ready = ($urandom_range(0, 2) != 0);
          @(negedge clk);
        end
        out_ready = 1;
      end
    join
    repeat (5) @(negedge clk);
    checks++;
    if (expq.size() != 0 || stalls == 0) begin
      failures++; $display("FAIL leftover %0d stalls %0d", expq.size(), stalls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
