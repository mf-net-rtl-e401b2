// tb_uarray -- self-checking test of one uArray end to end.
// Weights for both halves are written as sign-magnitude bit planes, the input
// vector is shifted into the uChannel, and an operation is started.  The
// results must equal w (+) x = sum sign(x)|w| + sign(w)|x| worked out from
// the integers in the testbench, and the operation must last
// (2*(wp-1) + 21) * (1 + 2*ap) clocks.  Cases: the mapping example of the
// design (weights 5 2 7 3 -5 1 2 4 0, inputs 2 1 0 -2 4 -5 1 -3 6, both
// within 3-bit magnitude), random full-range vectors, reduced weight
// precision (wp = 4 keeps |w| bits 6..4), reduced ADC precision (ap = 3,
// bounded error), PL calibration with two deviating columns that must be
// padded without changing the exact result, comparator calibration against
// +30 mV / -30 mV offsets after which results are exact again, and the
// serial result output on so.
module tb_uarray;
  localparam int M = 31;
  logic clk = 0, rst_n = 0;
  logic we = 0, whalf = 0;
  logic [2:0] waddr = 0, raddr = 0, ap = 5;
  logic [M-1:0] wdata = '0, cfg_d = '0;
  logic [2*M-1:0] rdata, pad_mask;
  logic si = 0, si_en = 0, cfg_we = 0, so_en = 0, so;
  logic [7:0] x_lower [M];
  logic [7:0] x_up [M];
  logic [15:0] wsum_l, wsum_r;
  logic start = 0, busy, done;
  logic [3:0] wp = 8;
  logic signed [15:0] res_l, res_r;
  logic pl_cal_start = 0, pl_cal_done, comp_cal_start = 0, comp_cal_done;
  logic [6:0] cnt_lo = 7'd24, cnt_hi = 7'd28;
  logic [7:0] comp_trim;
  logic signed [7:0] cap_dev [2*M];
  logic signed [31:0] offset_n_uv = 0, offset_p_uv = 0;
  int checks = 0, failures = 0;

  uarray dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int w [2][M], x [M];

  function automatic int mag(input int v); return v < 0 ? -v : v; endfunction
  function automatic int sgn(input int v); return v < 0 ? -1 : 1; endfunction

  task automatic write_weights();
    for (int h = 0; h < 2; h++)
      for (int r = 0; r < 8; r++) begin
        @(negedge clk);
        we = 1; whalf = h[0]; waddr = 3'(r);
        for (int j = 0; j < M; j++)
          wdata[j] = (r == 0) ? (w[h][j] < 0) : 1'((mag(w[h][j]) >> (r - 1)) & 1);
      end
    @(negedge clk) we = 0;
  endtask

  task automatic load_x();
    for (int j = M - 1; j >= 0; j--) begin
      logic [7:0] word;
      word = {x[j] < 0, 7'(mag(x[j]))};
      for (int b = 7; b >= 0; b--) begin @(negedge clk); si = word[b]; si_en = 1; end
    end
    @(negedge clk) si_en = 0;
  endtask

  // run one operation; exact = 1 demands equality, else |error| <= tol
  task automatic run_op(input int wpi, input int api, input bit exact, input int tol, input string what);
    int e [2], ws [2], wmask, cyc;
    wmask = 127 & ~((1 << (8 - wpi)) - 1);
    for (int h = 0; h < 2; h++) begin
      e[h] = 0; ws[h] = 0;
      for (int j = 0; j < M; j++) begin
        e[h]  += sgn(x[j]) * (mag(w[h][j]) & wmask) + sgn(w[h][j]) * mag(x[j]);
        ws[h] += mag(w[h][j]) & wmask;
      end
    end
    wsum_l = 16'(ws[0]); wsum_r = 16'(ws[1]);
    wp = 4'(wpi); ap = 3'(api);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;
    while (!done && cyc < 5000) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != (2 * (wpi - 1) + 21) * (1 + 2 * api)) begin
      failures++; $display("%s: %0d cycles", what, cyc);
    end
    checks += 2;
    if (exact ? (int'(res_l) != e[0]) : (mag(int'(res_l) - e[0]) > tol)) begin
      failures++; $display("%s: left %0d expected %0d", what, res_l, e[0]);
    end
    if (exact ? (int'(res_r) != e[1]) : (mag(int'(res_r) - e[1]) > tol)) begin
      failures++; $display("%s: right %0d expected %0d", what, res_r, e[1]);
    end
  endtask

  task automatic random_vectors();
    for (int j = 0; j < M; j++) begin
      x[j] = int'($urandom_range(254)) - 127;
      for (int h = 0; h < 2; h++) w[h][j] = int'($urandom_range(254)) - 127;
    end
  endtask

  initial begin
    static int fw [9] = '{5, 2, 7, 3, -5, 1, 2, 4, 0};
    static int fx [9] = '{2, 1, 0, -2, 4, -5, 1, -3, 6};
    logic [31:0] shifted;
    foreach (cap_dev[j]) cap_dev[j] = 0;
    foreach (x_lower[j]) x_lower[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // mapping example, left half; right half holds the negated weights
    for (int j = 0; j < M; j++) begin
      w[0][j] = (j < 9) ? fw[j] : 0;
      w[1][j] = (j < 9) ? -fw[j] : 0;
      x[j]    = (j < 9) ? fx[j] : 0;
    end
    write_weights();
    load_x();
    run_op(8, 5, 1, 0, "example");
    // stored rows read back as written (row 1 = |w| bit 0 of the example)
    raddr = 3'd1; #1;
    checks++;
    if (rdata[8:0] !== 9'b000111101) begin failures++; $display("row 1 %b", rdata[8:0]); end

    // serial result: res_r first, MSB first, loaded the clock after done
    @(negedge clk);
    for (int b = 31; b >= 0; b--) begin
      shifted[b] = so;
      so_en = 1; @(negedge clk); so_en = 0;
    end
    checks++;
    if (shifted !== {res_r, res_l}) begin failures++; $display("so %h res %h %h", shifted, res_r, res_l); end

    for (int t = 0; t < 6; t++) begin
      random_vectors(); write_weights(); load_x();
      run_op(8, 5, 1, 0, "random");
    end
    run_op(4, 5, 1, 0, "wp=4");
    run_op(8, 3, 0, 4 * 2 * 127 * 3, "ap=3");

    // PL calibration: column 3 (-12 %) and column 40 (+12.7 %) leave the band
    cap_dev[3]  = -8'sd120;   // -12.0 %
    cap_dev[40] = 8'sd127;    // +12.7 %
    @(negedge clk) pl_cal_start = 1;
    @(negedge clk) pl_cal_start = 0;
    while (!pl_cal_done) @(negedge clk);
    checks++;
    if (pad_mask[3] !== 1'b1 || pad_mask[40] !== 1'b1 || $countones(pad_mask) != 2) begin
      failures++; $display("pad mask %h", pad_mask);
    end
    // no data is mapped to the padded column positions; re-write so the
    // padded cells store ones
    w[0][3] = 0; w[1][40 - M] = 0; x[3] = 0; x[40 - M] = 0;
    load_x();
    write_weights();
    raddr = 3'd5; #1;
    checks++;
    if (rdata[3] !== 1'b1 || rdata[40] !== 1'b1) begin failures++; $display("padding not written"); end
    run_op(8, 5, 1, 0, "padded");

    // comparator calibration
    offset_n_uv = 30000; offset_p_uv = -30000;
    @(negedge clk) comp_cal_start = 1;
    @(negedge clk) comp_cal_start = 0;
    while (!comp_cal_done) @(negedge clk);
    checks++;
    if (comp_trim != 8'b10_00_00_10) begin failures++; $display("trim %b", comp_trim); end
    random_vectors(); w[0][3] = 0; w[1][40 - M] = 0; x[3] = 0; x[40 - M] = 0;
    write_weights(); load_x();
    run_op(8, 5, 1, 0, "calibrated");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
