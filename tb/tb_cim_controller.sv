// tb_cim_controller -- self-checking test of the bit-plane sequencer.
// The SA register is replaced by a counter of ap compare cycles.  For several
// (wp, ap) settings the test records every MAV cycle (half, kind, row, plane)
// and checks it against the expected schedule, that each plane lasts
// 1 + 2*ap clocks, and that the whole operation lasts
// (2*(wp-1) + 3*7) * (1 + 2*ap) clocks from the first MAV cycle to done.
module tb_cim_controller;
  import mf_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, sar_last;
  logic [3:0] wp;
  logic busy, done, half, sel_step, mav_en, dac_en, cmp_en, sar_start, sar_step, acc_clear, acc_en;
  ctrl_state_t state;
  plane_kind_t kind;
  logic [2:0] plane_bit;
  logic [8:0] rl;
  int checks = 0, failures = 0;
  int ap_i, steps;

  cim_controller dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stand-in for sar_logic: the ap-th compare is the last
  always_ff @(posedge clk) begin
    if (sar_start) steps <= 0;
    else if (sar_step) steps <= steps + 1;
  end
  assign sar_last = (steps == ap_i - 1);

  task automatic run(input int w, input int a);
    int cyc, planes, mav_at, exp_row, idx;
    int exp_half [$], exp_kind [$], exp_b [$];
    for (int h = 0; h < 2; h++) begin
      for (int b = 6; b >= 7 - (w - 1); b--) begin exp_half.push_back(h); exp_kind.push_back(0); exp_b.push_back(b); end
      for (int b = 6; b >= 0; b--) begin exp_half.push_back(h); exp_kind.push_back(1); exp_b.push_back(b); end
      if (h == 0) for (int b = 6; b >= 0; b--) begin exp_half.push_back(0); exp_kind.push_back(2); exp_b.push_back(b); end
    end
    wp = 4'(w); ap_i = a;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0; planes = 0; mav_at = -1;
    while (!done && cyc < 5000) begin
      if (mav_en) begin
        if (mav_at >= 0) begin
          checks++;
          if (cyc - mav_at != 1 + 2 * a) begin failures++; $display("plane length %0d", cyc - mav_at); end
        end
        mav_at = cyc;
        idx = planes;
        checks++;
        if (idx >= exp_half.size() || int'(half) != exp_half[idx] || int'(kind) != exp_kind[idx] || int'(plane_bit) != exp_b[idx]) begin
          failures++; $display("plane %0d: half %0d kind %0d b %0d", idx, half, kind, plane_bit);
        end else begin
          exp_row = (exp_kind[idx] == 0) ? exp_b[idx] + 1 : (exp_kind[idx] == 1 ? 0 : 8);
          checks++;
          if (rl != (9'd1 << exp_row) || sel_step != (exp_kind[idx] == 0)) begin failures++; $display("row %b", rl); end
        end
        planes++;
      end else begin
        checks++;
        if (rl != '0) begin failures++; $display("row line outside MAV"); end
      end
      @(negedge clk); cyc++;
    end
    checks++;
    if (cyc != (2 * (w - 1) + 21) * (1 + 2 * a) || planes != exp_half.size()) begin
      failures++;
      $display("wp=%0d ap=%0d: %0d cycles, %0d planes; expected %0d", w, a, cyc, planes, (2 * (w - 1) + 21) * (1 + 2 * a));
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(8, 5);
    run(8, 2);
    run(4, 5);
    run(1, 3);
    run(6, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
