// tb_mf_macro -- end-to-end test of the macro at its default size (4 uArrays
// of 8 x 62 cells).
// The workload is a slice of a LeNet-5 style first convolution layer: 8
// filters of 5x5 = 25 weights, two per uArray (one per half), applied to
// random 8-bit input patches.  The patch is shifted into uArray 0 only;
// uArrays 1 and 2 take every column from the uArray below through the
// stitching bits, uArray 3 stitches columns 0..14 and loads 15..30 itself.
// Every filter output must equal sum sign(x)|w| + sign(w)|x| computed in the
// testbench.  The run also exercises: PL calibration, which must pad two
// deviating columns of uArray 2; comparator calibration, which must trim
// +30 mV / -30 mV offsets in uArray 1; reduced weight and ADC precision;
// the half swap; serial read-out of every uArray on so.  Each mechanism is
// counted, and one that never happened counts as a failure.
module tb_mf_macro;
  localparam int NUA = 4, M = 31, K = 25;
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
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_stitched, n_padded, n_trimmed, n_reduced, n_swaps, n_serial, n_outputs;
  logic half_d;
  always @(posedge clk) begin
    half_d <= dut.g_ua[0].u_ua.half;
    if (dut.g_ua[0].u_ua.half != half_d && rst_n) n_swaps++;
  end

  int w [NUA][2][M];
  int x [M];
  logic [M-1:0] skip [NUA];   // columns stitched from below
  int col_of [K];             // filter element -> column

  function automatic int mag(input int v); return v < 0 ? -v : v; endfunction
  function automatic int sgn(input int v); return v < 0 ? -1 : 1; endfunction

  task automatic write_weights(input int a);
    for (int h = 0; h < 2; h++)
      for (int r = 0; r < 8; r++) begin
        @(negedge clk);
        we = 1; wsel = 2'(a); whalf = h[0]; waddr = 3'(r);
        for (int j = 0; j < M; j++)
          wdata[j] = (r == 0) ? (w[a][h][j] < 0) : 1'((mag(w[a][h][j]) >> (r - 1)) & 1);
      end
    @(negedge clk) we = 0;
  endtask

  task automatic load_x(input int a);
    for (int j = M - 1; j >= 0; j--)
      if (!skip[a][j]) begin
        logic [7:0] word;
        word = {x[j] < 0, 7'(mag(x[j]))};
        for (int b = 7; b >= 0; b--) begin
          @(negedge clk); si = '0; si[a] = word[b]; si_en = '0; si_en[a] = 1'b1;
        end
      end
    @(negedge clk) si_en = '0;
  endtask

  task automatic set_cfg(input int a, input logic [M-1:0] c);
    skip[a] = c;
    @(negedge clk); cfg_we = '0; cfg_we[a] = 1'b1; cfg_d = c;
    @(negedge clk); cfg_we = '0;
    n_stitched += $countones(c);
  endtask

  // one filter pass: expected outputs from the integers
  task automatic run_pass(input int wpi, input int api, input bit exact, input string what);
    int e, ws, wmask, cyc;
    wmask = 127 & ~((1 << (8 - wpi)) - 1);
    for (int a = 0; a < NUA; a++) begin
      for (int h = 0; h < 2; h++) begin
        ws = 0;
        for (int j = 0; j < M; j++) ws += mag(w[a][h][j]) & wmask;
        if (h == 0) wsum_l[a] = 16'(ws); else wsum_r[a] = 16'(ws);
      end
    end
    wp = 4'(wpi); ap = 3'(api);
    if (wpi < 8 || api < 5) n_reduced++;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;
    while (!all_done && cyc < 5000) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != (2 * (wpi - 1) + 21) * (1 + 2 * api)) begin failures++; $display("%s: %0d cycles", what, cyc); end
    for (int a = 0; a < NUA; a++)
      for (int h = 0; h < 2; h++) begin
        int got;
        e = 0;
        for (int j = 0; j < M; j++) e += sgn(x[j]) * (mag(w[a][h][j]) & wmask) + sgn(w[a][h][j]) * mag(x[j]);
        got = h ? int'(res_r[a]) : int'(res_l[a]);
        checks++;
        n_outputs++;
        if (exact ? (got != e) : (mag(got - e) > 4 * 2 * 127 * 3)) begin
          failures++; $display("%s: uArray %0d half %0d got %0d expected %0d", what, a, h, got, e);
        end
      end
    // serial read-out of all uArrays in parallel
    @(negedge clk);
    begin
      logic [31:0] sh [NUA];
      for (int b = 31; b >= 0; b--) begin
        for (int a = 0; a < NUA; a++) sh[a][b] = so[a];
        so_en = '1; @(negedge clk); so_en = '0;
      end
      for (int a = 0; a < NUA; a++) begin
        checks++;
        if (sh[a] !== {res_r[a], res_l[a]}) begin failures++; $display("so of uArray %0d", a); end
        else n_serial++;
      end
    end
  endtask

  task automatic new_filters();
    for (int a = 0; a < NUA; a++)
      for (int h = 0; h < 2; h++)
        for (int j = 0; j < M; j++) w[a][h][j] = 0;
    for (int a = 0; a < NUA; a++)
      for (int h = 0; h < 2; h++)
        for (int k = 0; k < K; k++) w[a][h][col_of[k]] = int'($urandom_range(254)) - 127;
    for (int a = 0; a < NUA; a++) write_weights(a);
  endtask

  task automatic new_patch();
    foreach (x[j]) x[j] = 0;
    for (int k = 0; k < K; k++) x[col_of[k]] = int'($urandom_range(254)) - 127;
    load_x(0);
    load_x(3);
  endtask

  initial begin
    for (int k = 0; k < K; k++) col_of[k] = k;
    for (int a = 0; a < NUA; a++) begin
      skip[a] = '0;
      offset_n_uv[a] = 0; offset_p_uv[a] = 0;
      for (int j = 0; j < 2 * M; j++) cap_dev[a][j] = 0;
    end
    n_stitched = 0; n_padded = 0; n_trimmed = 0; n_reduced = 0; n_swaps = 0; n_serial = 0; n_outputs = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // process variation and calibration first
    cap_dev[2][27] = -8'sd120;
    cap_dev[2][M + 28] = 8'sd127;
    offset_n_uv[1] = 30000; offset_p_uv[1] = -30000;
    @(negedge clk) pl_cal_start = 1;
    @(negedge clk) pl_cal_start = 0;
    while (pl_cal_done != '1) @(negedge clk);
    for (int a = 0; a < NUA; a++) begin
      checks++;
      n_padded += $countones(pad_mask[a]);
      if ((a == 2) ? (pad_mask[a] !== ((62'd1 << 27) | (62'd1 << (M + 28)))) : (pad_mask[a] !== '0)) begin
        failures++; $display("pad mask of uArray %0d: %h", a, pad_mask[a]);
      end
    end
    @(negedge clk) comp_cal_start = 1;
    @(negedge clk) comp_cal_start = 0;
    while (comp_cal_done != '1) @(negedge clk);
    checks++;
    if (comp_trim[1] != 8'b10_00_00_10) begin failures++; $display("trim %b", comp_trim[1]); end
    else n_trimmed++;

    // stitching
    set_cfg(1, '1);
    set_cfg(2, '1);
    set_cfg(3, 31'h0000_7fff);

    for (int p = 0; p < 4; p++) begin
      new_filters();
      new_patch();
      run_pass(8, 5, 1, "8b/5b");
    end
    new_patch();
    run_pass(4, 5, 1, "wp=4");
    new_patch();
    run_pass(8, 4, 0, "ap=4");

    checks += 6;
    if (n_stitched == 0) begin failures++; $display("no stitching"); end
    if (n_padded == 0)   begin failures++; $display("no padding"); end
    if (n_trimmed == 0)  begin failures++; $display("no comparator trim"); end
    if (n_reduced == 0)  begin failures++; $display("no reduced precision"); end
    if (n_swaps == 0)    begin failures++; $display("no half swap"); end
    if (n_serial == 0)   begin failures++; $display("no serial read-out"); end
    $display("mechanisms: stitched columns %0d, padded columns %0d, trimmed comparators %0d, reduced-precision passes %0d, half swaps %0d, serial read-outs %0d, filter outputs %0d",
             n_stitched, n_padded, n_trimmed, n_reduced, n_swaps, n_serial, n_outputs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
