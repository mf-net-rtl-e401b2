// tb_lenet_conv1 -- workload test: the first convolution layer of a LeNet-5
// style MNIST network on the macro at its default size.
// The layer has 6 filters of 5x5 weights over a one-channel 28x28 image.
// Each filter is flattened to 25 elements and stored in one half of a uArray
// (filters 0..5 in uArrays 0..2, left then right half; uArray 3 is unused).
// The 5x5 window of the image at an output position is shifted into uArray 0
// only, and uArrays 1..3 take all 31 column words from the uArray below
// through the stitching bits, so every window is loaded once for all six
// filters.  Columns 25..30 hold zero weights and zero inputs.
// The image and weights are generated with $urandom: 8-bit sign-magnitude
// values, the image zero-centred as after input normalisation.  For all
// 24x24 output positions every one of the six feature-map values must equal the
// multiplication-free correlation sum sign(x)|w| + sign(w)|x| computed here,
// and each operation must take (2*(8-1) + 21) * (1 + 2*5) = 385 clocks.
module tb_lenet_conv1;
  localparam int NUA = 4, M = 31, K = 5, IMG = 28, NF = 6;
  localparam int OUT_ROWS = IMG - K + 1, OUT_COLS = IMG - K + 1;  // whole 24x24 map
  logic clk = 0, rst_n = 0;
  logic we = 0, whalf = 0;
  logic [1:0] wsel = 0;
  logic [2:0] waddr = 0, raddr = 0, ap = 5;
  logic [M-1:0] wdata = '0, cfg_d = '0;
  logic [2*M-1:0] rdata [NUA];
  logic [NUA-1:0] si = '0, si_en = '0, cfg_we = '0, so_en = '0, so;
  logic [15:0] wsum_l [NUA], wsum_r [NUA];
  logic start = 0, busy, done, all_done;
  logic [3:0] wp = 8;
  logic signed [15:0] res_l [NUA], res_r [NUA];
  logic pl_cal_start = 0, comp_cal_start = 0;
  logic [6:0] cnt_lo = 7'd24, cnt_hi = 7'd28;
  logic [NUA-1:0] pl_cal_done, comp_cal_done;
  logic [2*M-1:0] pad_mask [NUA];
  logic [7:0] comp_trim [NUA];
  logic signed [7:0] cap_dev [NUA][2*M];
  logic signed [31:0] offset_n_uv [NUA], offset_p_uv [NUA];
  int checks = 0, failures = 0;

  mf_macro dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int img [IMG][IMG];
  int filt [NF][K*K];
  int x [M];
  int n_windows, n_values;

  function automatic int mag(input int v); return v < 0 ? -v : v; endfunction
  function automatic int sgn(input int v); return v < 0 ? -1 : 1; endfunction

  // weight of filter slot (uArray a, half h), column j
  function automatic int wgt(input int a, input int h, input int j);
    int f;
    f = 2 * a + h;
    return (f < NF && j < K*K) ? filt[f][j] : 0;
  endfunction

  task automatic write_weights(input int a);
    for (int h = 0; h < 2; h++)
      for (int r = 0; r < 8; r++) begin
        @(negedge clk);
        we = 1; wsel = 2'(a); whalf = h[0]; waddr = 3'(r);
        for (int j = 0; j < M; j++)
          wdata[j] = (r == 0) ? (wgt(a, h, j) < 0) : 1'((mag(wgt(a, h, j)) >> (r - 1)) & 1);
      end
    @(negedge clk) we = 0;
  endtask

  // scan the window into uArray 0: x[M-1] first, MSB first
  task automatic load_window(input int r, input int c);
    foreach (x[j]) x[j] = 0;
    for (int dy = 0; dy < K; dy++)
      for (int dx = 0; dx < K; dx++) x[dy * K + dx] = img[r + dy][c + dx];
    for (int j = M - 1; j >= 0; j--) begin
      logic [7:0] word;
      word = {x[j] < 0, 7'(mag(x[j]))};
      for (int b = 7; b >= 0; b--) begin
        @(negedge clk); si = '0; si[0] = word[b]; si_en = '0; si_en[0] = 1'b1;
      end
    end
    @(negedge clk) si_en = '0;
    n_windows++;
  endtask

  initial begin
    for (int a = 0; a < NUA; a++) begin
      offset_n_uv[a] = 0; offset_p_uv[a] = 0;
      for (int j = 0; j < 2 * M; j++) cap_dev[a][j] = 0;
    end
    n_windows = 0; n_values = 0;
    foreach (img[i, j]) img[i][j] = int'($urandom_range(254)) - 127;
    foreach (filt[f, k]) filt[f][k] = int'($urandom_range(254)) - 127;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // weights and the weight statistics sum |w| per half
    for (int a = 0; a < NUA; a++) begin
      int s0, s1;
      write_weights(a);
      s0 = 0; s1 = 0;
      for (int j = 0; j < M; j++) begin s0 += mag(wgt(a, 0, j)); s1 += mag(wgt(a, 1, j)); end
      wsum_l[a] = 16'(s0); wsum_r[a] = 16'(s1);
    end
    // uArrays 1..3 take every column from below
    for (int a = 1; a < NUA; a++) begin
      @(negedge clk); cfg_we = '0; cfg_we[a] = 1'b1; cfg_d = '1;
    end
    @(negedge clk) cfg_we = '0;

    for (int r = 0; r < OUT_ROWS; r++)
      for (int c = 0; c < OUT_COLS; c++) begin
        int cyc;
        load_window(r, c);
        @(negedge clk) start = 1;
        @(negedge clk) start = 0;
        cyc = 0;
        while (!all_done && cyc < 2000) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc != 385) begin failures++; $display("position %0d,%0d: %0d cycles", r, c, cyc); end
        for (int f = 0; f < NF; f++) begin
          int e, got;
          e = 0;
          for (int k = 0; k < K*K; k++) e += sgn(x[k]) * mag(filt[f][k]) + sgn(filt[f][k]) * mag(x[k]);
          got = f[0] ? int'(res_r[f / 2]) : int'(res_l[f / 2]);
          checks++;
          n_values++;
          if (got != e) begin
            failures++; $display("filter %0d at %0d,%0d: got %0d expected %0d", f, r, c, got, e);
          end
        end
      end

    checks++;
    if (n_values != OUT_ROWS * OUT_COLS * NF) failures++;
    $display("feature-map values %0d from %0d windows, each loaded once for %0d filters",
             n_values, n_windows, NF);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
