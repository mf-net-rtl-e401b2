// tb_mf_accumulator -- self-checking test of the post-processing.
// Random weights (two channels) and inputs in sign-magnitude form are turned
// by the testbench into the per-plane counts an ideal array would produce,
// plus random padded columns, and presented as ADC codes q = M - pad - count.
// The results must equal sum sign(x)|w| + sign(w)|x| worked out directly from
// the integers.  A reduced-precision pass (ap = 3) checks bin centring.
module tb_mf_accumulator;
  import mf_pkg::*;
  localparam int M = 31;
  logic clk = 0, rst_n = 0, clear = 0, acc_en = 0, half = 0;
  plane_kind_t kind;
  logic [2:0] plane_bit = 0;
  logic [4:0] code = 0, pad_l = 0, pad_r = 0;
  logic [2:0] ap = 5;
  logic [15:0] wsum_l, wsum_r;
  logic signed [15:0] res_l, res_r;
  int checks = 0, failures = 0;

  mf_accumulator dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int w [2][M], x [M];

  function automatic int mag(input int v); return v < 0 ? -v : v; endfunction
  function automatic int sgn(input int v); return v < 0 ? -1 : 1; endfunction

  task automatic plane(input int h, input plane_kind_t k, input int b, input int count, input int pad, input int p);
    int q;
    q = M - pad - count;
    if (p < 5) q = q & ~((1 << (5 - p)) - 1);
    @(negedge clk);
    half = h[0]; kind = k; plane_bit = 3'(b); code = 5'(q); acc_en = 1;
  endtask

  task automatic run(input int p);
    int exp [2], ws [2], cnt, pl, pr;
    for (int j = 0; j < M; j++) begin
      x[j] = int'($urandom_range(254)) - 127;
      for (int h = 0; h < 2; h++) w[h][j] = int'($urandom_range(254)) - 127;
    end
    pl = int'($urandom_range(3)); pr = int'($urandom_range(3));
    pad_l = 5'(pl); pad_r = 5'(pr); ap = 3'(p);
    for (int h = 0; h < 2; h++) begin
      exp[h] = 0; ws[h] = 0;
      for (int j = 0; j < M; j++) begin
        exp[h] += sgn(x[j]) * mag(w[h][j]) + sgn(w[h][j]) * mag(x[j]);
        ws[h]  += mag(w[h][j]);
      end
    end
    wsum_l = 16'(ws[0]); wsum_r = 16'(ws[1]);
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int h = 0; h < 2; h++) begin
      for (int b = 6; b >= 0; b--) begin
        cnt = 0;
        for (int j = 0; j < M; j++) cnt += (x[j] >= 0 && ((mag(w[h][j]) >> b) & 1)) ? 1 : 0;
        plane(h, PK_WMAG, b, cnt, h ? pr : pl, p);
      end
      for (int b = 6; b >= 0; b--) begin
        cnt = 0;
        for (int j = 0; j < M; j++) cnt += (w[h][j] < 0 && ((mag(x[j]) >> b) & 1)) ? 1 : 0;
        plane(h, PK_WSGN, b, cnt, h ? pr : pl, p);
      end
      if (h == 0)
        for (int b = 6; b >= 0; b--) begin
          cnt = 0;
          for (int j = 0; j < M; j++) cnt += ((mag(x[j]) >> b) & 1);
          plane(0, PK_XSUM, b, cnt, pl, p);
        end
    end
    @(negedge clk) acc_en = 0;
    #1;
    if (p == 5) begin
      checks += 2;
      if (int'(res_l) != exp[0]) begin failures++; $display("left %0d exp %0d", res_l, exp[0]); end
      if (int'(res_r) != exp[1]) begin failures++; $display("right %0d exp %0d", res_r, exp[1]); end
    end else begin
      // each plane count is off by at most half a bin (2 at ap = 3); bound
      // the error by 2 * (2 + 4 + ... ) summed over the weighted planes
      checks += 2;
      if (mag(int'(res_l) - exp[0]) > 2 * 2 * 127 * 3 || mag(int'(res_r) - exp[1]) > 2 * 2 * 127 * 3) begin
        failures++; $display("coarse %0d/%0d vs %0d/%0d", res_l, res_r, exp[0], exp[1]);
      end
    end
  endtask

  initial begin
    kind = PK_WMAG;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) run(5);
    for (int t = 0; t < 5; t++) run(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
