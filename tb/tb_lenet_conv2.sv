// tb_lenet_conv2 -- workload test: the second convolution layer of a LeNet-5
// style MNIST network, whose filters are wider than one uArray half.
// A filter has 5x5x6 = 150 weights over a 6-channel 12x12 feature map.  It is
// flattened channel-major (element e = ch*25 + dy*5 + dx) and partitioned
// into five segments of 30 elements; segment s goes to column positions
// 0..29 of a uArray (column 30 stays zero).  Two filters share a uArray, one
// per half, and both see the same input segment.  With four uArrays a filter
// pair takes two passes over the feature map: segments 0..3 in uArrays 0..3,
// then segment 4 rewritten into uArray 0.  Each uArray loads its own input
// segment through its own scan chain, all four in parallel.  The five partial
// results of a filter are added here, outside the macro, and must equal the
// multiplication-free correlation over all 150 elements, since the operator
// is a plain sum over elements.  Weights and inputs come from $urandom as
// 8-bit sign-magnitude values.  The feature-map size and channel count are
// those of the classic LeNet-5; all 16 filters (eight pairs) are run over
// the whole 8x8 output map.
module tb_lenet_conv2;
  localparam int NUA = 4, M = 31, K = 5, CH = 6, IMG = 12, SEG = 30;
  localparam int E = K * K * CH, NSEG = (E + SEG - 1) / SEG;
  localparam int NPAIR = 8, OUT = IMG - K + 1;   // all 16 filters, 8x8 map
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
    repeat (1500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int fmap [CH][IMG][IMG];
  int filt [2*NPAIR][E];
  int seg_of [NUA];            // segment held by each uArray, -1 = none
  int part [2][OUT][OUT];      // partial sums of the current filter pair
  int n_passes, n_partials;

  function automatic int mag(input int v); return v < 0 ? -v : v; endfunction
  function automatic int sgn(input int v); return v < 0 ? -1 : 1; endfunction

  function automatic int elem_x(input int e, input int r, input int c);
    return fmap[e / (K*K)][r + (e % (K*K)) / K][c + e % K];
  endfunction

  // weight of filter f at column j of a uArray holding segment s
  function automatic int wcol(input int f, input int s, input int j);
    int e;
    e = s * SEG + j;
    return (s >= 0 && j < SEG && e < E) ? filt[f][e] : 0;
  endfunction

  task automatic write_segment(input int a, input int s, input int pair);
    int s0, s1;
    seg_of[a] = s;
    for (int h = 0; h < 2; h++)
      for (int r = 0; r < 8; r++) begin
        @(negedge clk);
        we = 1; wsel = 2'(a); whalf = h[0]; waddr = 3'(r);
        for (int j = 0; j < M; j++) begin
          int v;
          v = wcol(2 * pair + h, s, j);
          wdata[j] = (r == 0) ? (v < 0) : 1'((mag(v) >> (r - 1)) & 1);
        end
      end
    @(negedge clk) we = 0;
    s0 = 0; s1 = 0;
    for (int j = 0; j < M; j++) begin
      s0 += mag(wcol(2 * pair, s, j)); s1 += mag(wcol(2 * pair + 1, s, j));
    end
    wsum_l[a] = 16'(s0); wsum_r[a] = 16'(s1);
  endtask

  // every uArray scans in its own segment of the window, in parallel
  task automatic load_windows(input int r, input int c);
    logic [7:0] word [NUA];
    for (int j = M - 1; j >= 0; j--) begin
      for (int a = 0; a < NUA; a++) begin
        int e, v;
        e = seg_of[a] * SEG + j;
        v = (seg_of[a] >= 0 && j < SEG && e < E) ? elem_x(e, r, c) : 0;
        word[a] = {v < 0, 7'(mag(v))};
      end
      for (int b = 7; b >= 0; b--) begin
        @(negedge clk);
        for (int a = 0; a < NUA; a++) si[a] = word[a][b];
        si_en = '1;
      end
    end
    @(negedge clk) si_en = '0;
  endtask

  // one pass over all output positions with the segments now stored
  task automatic run_pass();
    for (int r = 0; r < OUT; r++)
      for (int c = 0; c < OUT; c++) begin
        int cyc;
        load_windows(r, c);
        @(negedge clk) start = 1;
        @(negedge clk) start = 0;
        cyc = 0;
        while (!all_done && cyc < 2000) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc != 385) begin failures++; $display("pass %0d: %0d cycles", n_passes, cyc); end
        for (int a = 0; a < NUA; a++)
          if (seg_of[a] >= 0) begin
            part[0][r][c] += int'(res_l[a]);
            part[1][r][c] += int'(res_r[a]);
            n_partials += 2;
          end
      end
    n_passes++;
  endtask

  initial begin
    for (int a = 0; a < NUA; a++) begin
      offset_n_uv[a] = 0; offset_p_uv[a] = 0;
      for (int j = 0; j < 2 * M; j++) cap_dev[a][j] = 0;
    end
    n_passes = 0; n_partials = 0;
    foreach (fmap[ch, i, j]) fmap[ch][i][j] = int'($urandom_range(254)) - 127;
    foreach (filt[f, e]) filt[f][e] = int'($urandom_range(254)) - 127;
    repeat (2) @(negedge clk);
    rst_n = 1;

    for (int p = 0; p < NPAIR; p++) begin
      foreach (part[h, r, c]) part[h][r][c] = 0;
      // pass 1: segments 0..3
      for (int a = 0; a < NUA; a++) write_segment(a, a, p);
      run_pass();
      // pass 2: segment 4 in uArray 0, the others idle with zero weights
      write_segment(0, NUA, p);
      for (int a = 1; a < NUA; a++) write_segment(a, -1, p);
      run_pass();
      for (int h = 0; h < 2; h++)
        for (int r = 0; r < OUT; r++)
          for (int c = 0; c < OUT; c++) begin
            int e;
            e = 0;
            for (int k = 0; k < E; k++)
              e += sgn(elem_x(k, r, c)) * mag(filt[2*p+h][k]) + sgn(filt[2*p+h][k]) * mag(elem_x(k, r, c));
            checks++;
            if (part[h][r][c] != e) begin
              failures++; $display("filter %0d at %0d,%0d: got %0d expected %0d", 2*p+h, r, c, part[h][r][c], e);
            end
          end
    end

    checks++;
    if (n_partials != NPAIR * OUT * OUT * NSEG * 2) begin
      failures++; $display("%0d partial results", n_partials);
    end
    $display("filters of %0d elements split into %0d segments: %0d passes, %0d partial results",
             E, NSEG, n_passes, n_partials);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
