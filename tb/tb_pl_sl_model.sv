// tb_pl_sl_model -- self-checking test of the analog behavioural model.
// With nominal capacitors a sum line must sit at q/(M+1+CSL) * VPCH, where q
// is the number of charged product lines: checked for MAV on either half and
// for the DAC groups (code k charges k PLs); the MAV half adds half a step
// from its dummy PL, so MAV >= reference exactly when q >= k.  The calibration charging must cross REF = 0.5 V after the pulse
// count given by V_n = 1 - (CSL/(CSL+C))^n, and later for a smaller PL.
module tb_pl_sl_model;
  localparam int M = 31;
  localparam real DEN = 32.0 + 36.0;
  logic clk = 0, half_sel = 0, mav_en = 0, dac_en = 0;
  logic cal_en = 0, cal_rst = 0, cal_pulse = 0, short_en = 0;
  logic [2*M-1:0] discharge = '0;
  logic [4:0] dac_code = '0;
  logic [5:0] cal_col = '0;
  logic [31:0] short_cm_uv = 32'd400000;
  logic signed [7:0] cap_dev [2*M];
  logic [31:0] vp_uv, vn_uv;
  int checks = 0, failures = 0;

  pl_sl_model dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit near(input logic [31:0] v, input real exp);
    real d;
    d = real'(v) - exp * 1.0e6;
    return (d < 3.0) && (d > -3.0);
  endfunction

  function automatic int pulses_to_cross(input real c);
    real v;
    int n;
    v = 0.0; n = 0;
    while (v <= 0.5) begin v = (v * 36.0 + c) / (36.0 + c); n++; end
    return n;
  endfunction

  task automatic expect_near(input logic [31:0] v, input real exp, input string what);
    checks++;
    if (!near(v, exp)) begin
      failures++;
      $display("FAIL %s: %0d uV, expected %f V", what, v, exp);
    end
  endtask

  initial begin
    foreach (cap_dev[j]) cap_dev[j] = 0;
    @(negedge clk);
    for (int t = 0; t < 40; t++) begin
      int q, k;
      half_sel = t[0];
      discharge = {$urandom, $urandom};
      q = 0;
      for (int j = 0; j < M; j++) if (!discharge[int'(half_sel) * M + j]) q++;
      k = int'($urandom_range(31));
      dac_code = 5'(k);
      mav_en = 1; dac_en = 1;
      @(negedge clk);
      mav_en = 0; dac_en = 0;
      if (!half_sel) begin
        expect_near(vp_uv, (real'(q) + 0.5) / DEN, "SLL mav");
        expect_near(vn_uv, real'(k) / DEN, "SLR dac");
        checks++;
        if ((q >= k) != (vp_uv >= vn_uv)) begin failures++; $display("order L q=%0d k=%0d", q, k); end
      end else begin
        expect_near(vn_uv, (real'(q) + 0.5) / DEN, "SLR mav");
        expect_near(vp_uv, real'(k) / DEN, "SLL dac");
        checks++;
        if ((q >= k) != (vn_uv >= vp_uv)) begin failures++; $display("order R q=%0d k=%0d", q, k); end
      end
    end
    // calibration charging, nominal and -10 % column
    cap_dev[5] = -8'sd100;
    for (int c = 4; c <= 5; c++) begin
      int n, exp_n;
      cal_en = 1; cal_col = 6'(c);
      cal_rst = 1; @(negedge clk); cal_rst = 0;
      n = 0;
      while (vp_uv <= vn_uv && n < 200) begin
        cal_pulse = 1; @(negedge clk); cal_pulse = 0; n++;
      end
      exp_n = pulses_to_cross(c == 5 ? 0.9 : 1.0);
      checks++;
      if (n != exp_n) begin failures++; $display("cal col %0d: %0d pulses, expected %0d", c, n, exp_n); end
    end
    checks++;
    if (pulses_to_cross(0.9) <= pulses_to_cross(1.0)) failures++;
    cal_en = 0; short_en = 1; #1;
    checks++;
    if (vp_uv != vn_uv || vp_uv != 32'd400000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
