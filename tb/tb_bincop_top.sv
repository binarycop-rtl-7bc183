// tb_bincop_top: end-to-end test of the whole accelerator at its default
// (n-CNV) size. It draws random binary weights for all nine layers, random
// thresholds around the middle of each layer's range and random 8-bit
// images, loads every parameter through the configuration port, streams the
// images in and compares the four class scores of every image with a
// reference model of the network computed here (threshold the pixels,
// six 3x3 valid convolutions with thresholds, two 2x2 OR pools, three
// fully-connected layers, the last without threshold).
//
// Phase A sends images back to back with the output always ready and checks
// that in steady state one result leaves every RATE cycles, the cycle count
// of the slowest layer (for n-CNV Conv1_1: 900 pixels x 9 words = 8100). Phase B adds
// output back-pressure, first held off for two frame intervals after a result appears. The test counts the pipeline's mechanisms and fails
// if one never happened: input stalls, several images in flight, both
// ping-pong banks of a sliding-window unit full, output back-pressure
// stalling the last MVTU, and threshold outputs of both values.
module tb_bincop_top;
  import bincop_pkg::*;
  localparam int IMG = 32, NCLS = 4, SW = 16, NA = 4, NB = 2, NIMG = NA + NB;
  // network: number of conv and FC layers, channels of the input and of each
  // conv layer's output, FC widths, and PE / SIMD per layer in pipeline order
  localparam int NCONV = 6, NFC = 3, NL = NCONV + NFC;
  localparam int C [7] = '{3, 16, 16, 32, 32, 64, 64};
  localparam int FC1_N = 128, FC2_N = 128;
  localparam int PE_L [9]   = '{16, 16, 16, 16, 4, 1, 1, 1, 1};
  localparam int SIMD_L [9] = '{3, 16, 16, 32, 32, 32, 4, 8, 1};
  // derived sizes (valid 3x3 convolutions, 2x2 pools after Conv1_2, Conv2_2)
  localparam int DI [6]  = '{32, 30, 14, 12, 5, 3};
  localparam int DLAST = DI[NCONV - 1] - 2;
  localparam int FC_IN = DLAST * DLAST * C[NCONV];
  function automatic int mw_of(int l);
    if (l < NCONV) return 9 * C[l];
    if (l == NCONV) return FC_IN;
    if (l == NCONV + 1) return FC1_N;
    return FC2_N;
  endfunction
  function automatic int mh_of(int l);
    if (l < NCONV) return C[l + 1];
    if (l == NL - 1) return NCLS;
    if (l == NCONV) return FC1_N;
    return FC2_N;
  endfunction
  function automatic int max_mw();
    int r = 0;
    for (int l = 0; l < NL; l++) if (mw_of(l) > r) r = mw_of(l);
    return r;
  endfunction
  function automatic int max_mh();
    int r = 0;
    for (int l = 0; l < NL; l++) if (mh_of(l) > r) r = mh_of(l);
    return r;
  endfunction
  localparam int MAXH = max_mh();
  localparam int MAXW = max_mw();
  localparam int MAXC = C[NCONV];
  // cycles per image of each MVTU: output pixels x synapse fold x neuron fold
  function automatic int layer_cycles(int l);
    int px = (l < NCONV) ? (DI[l] - 2) * (DI[l] - 2) : 1;
    return px * (mw_of(l) / SIMD_L[l]) * (mh_of(l) / PE_L[l]);
  endfunction
  function automatic int slowest();
    int r = 0;
    for (int l = 0; l < NL; l++) if (layer_cycles(l) > r) r = layer_cycles(l);
    return r;
  endfunction
  localparam int RATE = slowest();

  logic clk = 0, rst_n = 0, cfg_we = 0, in_valid = 0, out_ready = 0;
  logic [3:0] cfg_layer = '0;
  cfg_kind_e cfg_kind = CFG_WEIGHT;
  logic [CFG_PE_W-1:0] cfg_pe = '0;
  logic [CFG_ADDR_W-1:0] cfg_addr = '0;
  logic [CFG_DATA_W-1:0] cfg_data = '0;
  logic [23:0] in_data = '0;
  logic in_ready, out_valid;
  logic [NCLS*SW-1:0] out_data;

  bincop_top dut (.*);

  int checks = 0, failures = 0;
  // Runtime copies of the sizes: loop bounds that are variables keep the
  // reference model compact when compiled.
  int c_v [7], di_v [6], mw_v [9], mh_v [9], pe_v [9], simd_v [9], img_v, img_n, nconv_v, nl_v;
  bit W [9][MAXH][MAXW];
  int T [9][MAXH];
  int PT [3];
  logic [7:0] pix [NIMG][IMG][IMG][3];
  bit m [9][32][32][MAXC];
  bit v [3][MAXH];
  int exp_score [NIMG][NCLS];
  int ones = 0, zeros = 0;
  int nin = 0, nout = 0;
  longint cyc = 0, t_out [NIMG], t_in0 = 0;
  int n_in_stall = 0, n_overlap = 0, n_pingpong = 0, n_out_bp = 0, n_mvtu_stall = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (60000 + (NIMG + 20) * RATE) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d results", nout, NIMG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  task automatic ref_conv(int si, int so, int l);
    int d = di_v[l], od = di_v[l] - 2, ci = c_v[l];
    for (int y = 0; y < od; y++)
      for (int x = 0; x < od; x++)
        for (int n = 0; n < c_v[l+1]; n++) begin
          int mt = 0;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++)
              for (int c = 0; c < ci; c++)
                mt += (m[si][y+ky][x+kx][c] == W[l][n][(ky*3+kx)*ci + c]) ? 1 : 0;
          m[so][y][x][n] = (mt >= T[l][n]);
          if (mt >= T[l][n]) ones++; else zeros++;
        end
    if (d < 3) $display("bad size");
  endtask

  task automatic ref_pool(int si, int so, int d, int ch);
    for (int y = 0; y < d / 2; y++)
      for (int x = 0; x < d / 2; x++)
        for (int c = 0; c < ch; c++)
          m[so][y][x][c] = m[si][2*y][2*x][c] | m[si][2*y][2*x+1][c] |
                           m[si][2*y+1][2*x][c] | m[si][2*y+1][2*x+1][c];
  endtask

  task automatic ref_image(int i);
    bit vin [MAXW];
    int last, dl;
    for (int y = 0; y < img_v; y++)
      for (int x = 0; x < img_v; x++)
        for (int c = 0; c < 3; c++) m[0][y][x][c] = (int'(pix[i][y][x][c]) >= PT[c]);
    ref_conv(0, 1, 0);        // Conv1_1 32 -> 30
    ref_conv(1, 2, 1);        // Conv1_2 30 -> 28
    ref_pool(2, 3, di_v[1] - 2, c_v[2]);   // 28 -> 14
    ref_conv(3, 4, 2);        // Conv2_1 14 -> 12
    ref_conv(4, 5, 3);        // Conv2_2 12 -> 10
    ref_pool(5, 6, di_v[3] - 2, c_v[4]);   // 10 -> 5
    ref_conv(6, 7, 4);        // Conv3_1 5 -> 3
    if (nconv_v == 6) ref_conv(7, 8, 5);   // Conv3_2 3 -> 1
    last = (nconv_v == 6) ? 8 : 7;
    dl = di_v[nconv_v - 1] - 2;
    // flatten: pixel-major, channel-minor, as the width converter delivers it
    for (int y = 0; y < dl; y++)
      for (int x = 0; x < dl; x++)
        for (int c = 0; c < c_v[nconv_v]; c++) vin[(y*dl + x)*c_v[nconv_v] + c] = m[last][y][x][c];
    for (int l = nconv_v; l < nl_v; l++) begin
      int k = l - nconv_v;
      for (int n = 0; n < mh_v[l]; n++) begin
        int mt = 0;
        for (int c = 0; c < mw_v[l]; c++)
          mt += (((k == 0) ? vin[c] : v[k-1][c]) == W[l][n][c]) ? 1 : 0;
        if (l < nl_v - 1) v[k][n] = (mt >= T[l][n]);
        else exp_score[i][n] = 2 * mt - mw_v[l];
      end
    end
  endtask

  // ---------------- parameter load ----------------
  task automatic cfg(int layer, cfg_kind_e k, int pe, int addr, logic [31:0] d);
    cfg_we = 1; cfg_layer = 4'(layer); cfg_kind = k; cfg_pe = 8'(pe);
    cfg_addr = 16'(addr); cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load_all();
    for (int c = 0; c < 3; c++) cfg(9, CFG_WEIGHT, 0, c, 32'(PT[c]));
    for (int l = 0; l < nl_v; l++) begin
      int sf_n = mw_v[l] / simd_v[l];
      for (int n = 0; n < mh_v[l]; n++) begin
        for (int s = 0; s < sf_n; s++) begin
          logic [31:0] wd = '0;
          for (int b = 0; b < simd_v[l]; b++) wd[b] = W[l][n][s*simd_v[l] + b];
          cfg(l, CFG_WEIGHT, n % pe_v[l], (n / pe_v[l]) * sf_n + s, wd);
        end
        if (l < nl_v - 1) cfg(l, CFG_THRESH, n % pe_v[l], n / pe_v[l], 32'(T[l][n]));
      end
    end
  endtask

  // ---------------- monitors ----------------
  logic last_stall;
  if (NFC == 3) begin : g_mon3
    assign last_stall = dut.g_fc3.u_last.stall;
  end else begin : g_mon2
    assign last_stall = dut.g_fc2.u_last.stall;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) n_in_stall++;
    if (nin - nout > 1) n_overlap++;
    if (dut.g_conv[0].u_swu.full_q == 2'b11 || dut.g_conv[1].u_swu.full_q == 2'b11) n_pingpong++;
    if (out_valid && !out_ready) n_out_bp++;
    if (last_stall) n_mvtu_stall++;
    if (out_valid && out_ready) begin
      for (int c = 0; c < NCLS; c++) begin
        checks++;
        if ($signed(out_data[c*SW +: SW]) != exp_score[nout][c]) begin
          failures++;
          $display("FAIL image %0d class %0d: %0d, expected %0d", nout, c,
                   $signed(out_data[c*SW +: SW]), exp_score[nout][c]);
        end
      end
      t_out[nout] = cyc;
      nout++;
    end
  end

  task automatic send_image(int i);
    for (int y = 0; y < img_v; y++)
      for (int x = 0; x < img_v; x++) begin
        in_valid = 1;
        in_data = {pix[i][y][x][2], pix[i][y][x][1], pix[i][y][x][0]};
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        if (y == 0 && x == 0 && i == 0) t_in0 = cyc;
        @(negedge clk);
      end
    in_valid = 0;
    nin++;
  endtask

  task automatic expect_count(string what, int n);
    checks++;
    $display("%-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", what); end
  endtask

  initial begin
    img_v = IMG; img_n = NIMG; nconv_v = NCONV; nl_v = NL;
    for (int l = 0; l < 7; l++) c_v[l] = C[l];
    for (int l = 0; l < 6; l++) di_v[l] = DI[l];
    for (int l = 0; l < 9; l++) begin
      mw_v[l] = mw_of(l); mh_v[l] = mh_of(l); pe_v[l] = PE_L[l]; simd_v[l] = SIMD_L[l];
    end
    for (int c = 0; c < 3; c++) PT[c] = int'($urandom_range(96, 160));
    for (int l = 0; l < nl_v; l++)
      for (int n = 0; n < mh_v[l]; n++) begin
        for (int c = 0; c < mw_v[l]; c++) W[l][n][c] = 1'($urandom);
        T[l][n] = mw_v[l] / 2 - 2 + int'($urandom_range(0, 4));
      end
    for (int i = 0; i < NIMG; i++)
      for (int y = 0; y < img_v; y++)
        for (int x = 0; x < img_v; x++)
          for (int c = 0; c < 3; c++) pix[i][y][x][c] = 8'($urandom);
    for (int i = 0; i < img_n; i++) ref_image(i);
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_all();
    // phase A: back to back, output always ready
    out_ready = 1;
    for (int i = 0; i < NA; i++) send_image(i);
    while (nout < NA) @(negedge clk);
    $display("first-image latency %0d cycles", t_out[0] - t_in0);
    for (int i = 2; i < NA; i++) begin
      checks++;
      $display("interval %0d -> %0d: %0d cycles", i - 1, i, t_out[i] - t_out[i-1]);
      if (t_out[i] - t_out[i-1] < RATE || t_out[i] - t_out[i-1] > RATE + 4) begin
        failures++; $display("FAIL frame interval, expected %0d", RATE);
      end
    end
    // phase B: output back-pressure
    fork
      for (int i = NA; i < NIMG; i++) send_image(i);
      begin
        // hold the output off long enough for two results to back up
        out_ready = 0;
        wait (out_valid);
        repeat (2 * RATE) @(negedge clk);
        forever begin
          out_ready = ($urandom_range(0, 7) == 0);
          @(negedge clk);
        end
      end
    join_any
    while (nout < NIMG) @(negedge clk);
    disable fork;
    out_ready = 1;
    expect_count("input stall cycles", n_in_stall);
    expect_count("cycles >1 image in flight", n_overlap);
    expect_count("SWU both banks full", n_pingpong);
    expect_count("output back-pressure", n_out_bp);
    expect_count("last MVTU stall cycles", n_mvtu_stall);
    expect_count("threshold outputs = 1", ones);
    expect_count("threshold outputs = 0", zeros);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
