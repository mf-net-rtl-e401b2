// tb_pl_cal -- self-checking test of the PL-capacitor calibration.
// The testbench models each column by the pulse count n[j] at which its sum
// line crosses REF (cmp = 1 once that many pulses have been given since the
// reset).  The mask must mark exactly the columns with n outside
// [cnt_lo, cnt_hi], pad_l/pad_r must count them per half, a column that never
// crosses must stop at MAX_CNT, and the run must take sum(n[j] + 2) clocks.
module tb_pl_cal;
  localparam int M = 31;
  logic clk = 0, rst_n = 0, start = 0, cmp;
  logic [6:0] cnt_lo = 7'd22, cnt_hi = 7'd29;
  logic active, sl_rst, pulse, cmp_en, done;
  logic [5:0] col;
  logic [6:0] cnt_last;
  logic [2*M-1:0] mask;
  logic [4:0] pad_l, pad_r;
  int checks = 0, failures = 0;
  int n [2*M];
  int given;

  pl_cal dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_ff @(posedge clk) begin
    if (sl_rst) given <= 0;
    else if (pulse) given <= given + 1;
  end
  assign cmp = cmp_en && (given >= n[col]);

  initial begin
    int cyc, exp_cyc, el, er;
    logic [2*M-1:0] exp_mask;
    for (int j = 0; j < 2 * M; j++) n[j] = 25 + int'($urandom_range(4)) - 2;
    n[3] = 35; n[40] = 18; n[50] = 200; n[7] = 22; n[8] = 29; n[9] = 30;
    exp_mask = '0; el = 0; er = 0; exp_cyc = 0;
    for (int j = 0; j < 2 * M; j++) begin
      int eff;
      eff = (n[j] > 127) ? 127 : n[j];
      exp_cyc += eff + 2;
      if (eff < 22 || eff > 29) begin
        exp_mask[j] = 1'b1;
        if (j < M) el++; else er++;
      end
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;   // counts clocks from the first reset cycle to done
    while (!done && cyc < 20000) begin @(negedge clk); cyc++; end
    for (int j = 0; j < 2 * M; j++) begin
      checks++;
      if (mask[j] !== exp_mask[j]) begin failures++; $display("mask of column %0d (n = %0d)", j, n[j]); end
    end
    checks++;
    if (int'(pad_l) != el || int'(pad_r) != er) begin failures++; $display("pads %0d %0d", pad_l, pad_r); end
    checks++;
    if (cyc != exp_cyc) begin failures++; $display("cycles %0d exp %0d", cyc, exp_cyc); end
    checks++;
    if (int'(cnt_last) != n[2*M-1]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
