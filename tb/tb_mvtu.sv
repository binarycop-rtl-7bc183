// tb_mvtu: self-checking test of the matrix-vector-threshold unit.
// Two instances share the stimulus: one thresholding (hidden layer) and one
// producing signed dot products (final layer), both with MW 24, MH 8,
// SIMD 4, PE 2 (SF 6, NF 4). Random weights and thresholds are loaded through
// the configuration port; random input vectors are streamed, first back to
// back with the output always ready (to measure the SF*NF = 24 cycle
// interval between results), then with random gaps and back-pressure.
// Every result is compared with a reference matrix-vector product.
module tb_mvtu;
  import bincop_pkg::*;
  localparam int MW = 24, MH = 8, SIMD = 4, PE = 2, SW = 16;
  localparam int SF = MW / SIMD, NF = MH / PE, NVEC = 30;

  logic clk = 0, rst_n = 0, cfg_we = 0, in_valid = 0, out_ready = 0;
  cfg_kind_e cfg_kind = CFG_WEIGHT;
  logic [CFG_PE_W-1:0] cfg_pe = '0;
  logic [CFG_ADDR_W-1:0] cfg_addr = '0;
  logic [CFG_DATA_W-1:0] cfg_data = '0;
  logic [SIMD-1:0] in_data = '0;
  logic in_ready_t, in_ready_a, out_valid_t, out_valid_a;
  logic [MH-1:0] out_t;
  logic [MH*SW-1:0] out_a;

  int checks = 0, failures = 0, stalls = 0;
  logic [MW-1:0] W [MH];
  int T [MH];
  logic [MW-1:0] vec [NVEC];
  int nout = 0;
  longint t_out [NVEC];
  longint cyc = 0;

  mvtu #(.MW(MW), .MH(MH), .SIMD(SIMD), .PE(PE), .OUT_ACC(1'b0)) dut_t (
    .clk, .rst_n, .cfg_we, .cfg_kind, .cfg_pe, .cfg_addr, .cfg_data,
    .in_valid, .in_ready(in_ready_t), .in_data,
    .out_valid(out_valid_t), .out_ready, .out_data(out_t));
  mvtu #(.MW(MW), .MH(MH), .SIMD(SIMD), .PE(PE), .OUT_ACC(1'b1), .SCORE_W(SW)) dut_a (
    .clk, .rst_n, .cfg_we, .cfg_kind, .cfg_pe, .cfg_addr, .cfg_data,
    .in_valid, .in_ready(in_ready_a), .in_data,
    .out_valid(out_valid_a), .out_ready, .out_data(out_a));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int row_matches(int n, int v);
    int m = 0;
    for (int c = 0; c < MW; c++) m += (W[n][c] == vec[v][c]) ? 1 : 0;
    return m;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (out_valid_t && !out_ready) stalls++;
    if (out_valid_t != out_valid_a) begin
      checks++; failures++; $display("FAIL the two instances disagree on timing");
    end
    if (out_valid_t && out_ready) begin
      for (int n = 0; n < MH; n++) begin
        int m;
        m = row_matches(n, nout);
        checks += 2;
        if (out_t[n] != (m >= T[n])) begin
          failures++; $display("FAIL vec %0d row %0d bit %0b m %0d T %0d", nout, n, out_t[n], m, T[n]);
        end
        if ($signed(out_a[n*SW +: SW]) != 2*m - MW) begin
          failures++; $display("FAIL vec %0d row %0d dot %0d exp %0d", nout, n, $signed(out_a[n*SW +: SW]), 2*m-MW);
        end
      end
      t_out[nout] = cyc;
      nout++;
    end
  end

  task automatic cfg(cfg_kind_e k, int pe, int addr, logic [31:0] d);
    cfg_we = 1; cfg_kind = k; cfg_pe = 8'(pe); cfg_addr = 16'(addr); cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic send(int v, bit gaps);
    for (int s = 0; s < SF; s++) begin
      while (gaps && $urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_data = vec[v][s*SIMD +: SIMD];
      @(posedge clk);
      while (!in_ready_t) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0;
  endtask

  initial begin
    for (int n = 0; n < MH; n++) begin
      for (int c = 0; c < MW; c++) W[n][c] = 1'($urandom);
      T[n] = MW / 2 - 3 + int'($urandom_range(0, 6));
    end
    for (int v = 0; v < NVEC; v++)
      for (int c = 0; c < MW; c++) vec[v][c] = 1'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < MH; n++) begin
      for (int s = 0; s < SF; s++) cfg(CFG_WEIGHT, n % PE, (n / PE) * SF + s, 32'(W[n][s*SIMD +: SIMD]));
      cfg(CFG_THRESH, n % PE, n / PE, 32'(T[n]));
    end
    // phase 1: back to back, output always ready
    out_ready = 1;
    for (int v = 0; v < 10; v++) send(v, 0);
    while (nout < 10) @(negedge clk);
    for (int v = 1; v < 10; v++) begin
      checks++;
      if (t_out[v] - t_out[v-1] != SF * NF) begin
        failures++; $display("FAIL interval %0d, expected %0d", t_out[v] - t_out[v-1], SF*NF);
      end
    end
    // phase 2: random gaps and back-pressure
    fork
      for (int v = 10; v < NVEC; v++) send(v, 1);
      forever begin out_ready = ($urandom_range(0, 3) == 0); @(negedge clk); end
    join_any
    disable fork;
    out_ready = 1;
    repeat (200) @(negedge clk);
    checks++;
    if (nout != NVEC || stalls == 0) begin
      failures++; $display("FAIL %0d of %0d results, %0d stall cycles", nout, NVEC, stalls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
