// tb_comp_cal -- self-checking test of the comparator calibration.
// A comparator with random N- and P-type offsets of up to +-45 mV and 10 mV of
// uniform noise is modelled in the testbench, using 15 mV per calibration
// transistor (left half pulls toward 0).  After each run the residual offset
// of both modules must be within +-12 mV, the comparator must have seen
// shorted inputs with the right module selected, and done must come.
module tb_comp_cal;
  logic clk = 0, rst_n = 0, start = 0, cmp;
  logic active, short_en, cmp_en, done;
  logic [31:0] short_cm_uv;
  logic [1:0] type_sel, trim_nl, trim_nr, trim_pl, trim_pr;
  int checks = 0, failures = 0;
  int off_n, off_p, noise, wrong_sel;

  comp_cal dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int resid(input int off, input logic [1:0] l, input logic [1:0] r);
    return off - (int'(l) - int'(r)) * 15000;
  endfunction

  always @(negedge clk) noise = int'($urandom_range(20000)) - 10000;
  always_comb begin
    int e;
    e = (type_sel == 2'd1) ? resid(off_n, trim_nl, trim_nr) : resid(off_p, trim_pl, trim_pr);
    cmp = cmp_en && (e + noise >= 0);
  end
  always @(posedge clk)
    if (cmp_en && (!short_en || (type_sel == 2'd1) != (short_cm_uv > 32'd500000))) wrong_sel++;

  initial begin
    wrong_sel = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int rn, rp, cyc;
      off_n = int'($urandom_range(90000)) - 45000;
      off_p = int'($urandom_range(90000)) - 45000;
      if (t == 0) begin off_n = 45000; off_p = -45000; end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 0;
      while (!done && cyc < 10000) begin @(negedge clk); cyc++; end
      rn = resid(off_n, trim_nl, trim_nr);
      rp = resid(off_p, trim_pl, trim_pr);
      checks += 3;
      if (!done) failures++;
      if (rn > 12000 || rn < -12000) begin failures++; $display("N residual %0d (offset %0d)", rn, off_n); end
      if (rp > 12000 || rp < -12000) begin failures++; $display("P residual %0d (offset %0d)", rp, off_p); end
    end
    checks++;
    if (wrong_sel != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
