// tb_mf_pkg -- self-checking test of the shared constants and types.
// The constants must be consistent with each other: the SA-ADC must resolve
// exactly the M + 1 levels of a half (M columns plus the dummy product line),
// the 8 rows must hold a sign row plus the magnitude rows of an 8-bit weight,
// the result width must hold the largest possible w (+) x of a half,
// 2 * M * (2^(XBITS-1) - 1), with its sign, and the largest SA code must not
// exceed M.  The enums must be distinct and fit their declared widths.
module tb_mf_pkg;
  import mf_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("failed: %s", what); end
  endtask

  initial begin
    int maxres;
    plane_kind_t k;
    ctrl_state_t s;
    @(posedge clk);
    check((1 << ADC_BITS) == M + 1, "2^ADC_BITS levels = M + 1");
    check(ADC_BITS == $clog2(M + 1), "ADC_BITS = log2(M + 1)");
    check(ROWS == XBITS, "one sign row plus XBITS-1 magnitude rows");
    maxres = 2 * M * ((1 << (XBITS - 1)) - 1);
    check(maxres < (1 << (OUT_W - 1)), "largest result fits OUT_W signed");
    check((1 << ADC_BITS) - 1 <= M, "largest code counts at most M lines");
    check(M == 31 && ROWS == 8 && ADC_BITS == 5 && XBITS == 8 && OUT_W == 16,
          "8x62 uArray, 5-bit ADC, 8-bit operands, 16-bit result");
    check(PK_WMAG != PK_WSGN && PK_WSGN != PK_XSUM && PK_WMAG != PK_XSUM, "plane kinds distinct");
    check($bits(plane_kind_t) == 2 && $bits(ctrl_state_t) == 3, "enum widths");
    k = k.first();
    for (int i = 0; i < k.num(); i++) begin
      check(int'(k) == i, $sformatf("plane kind %s encoded %0d", k.name(), i));
      k = k.next();
    end
    s = s.first();
    for (int i = 0; i < s.num(); i++) begin
      check(int'(s) == i, $sformatf("state %s encoded %0d", s.name(), i));
      s = s.next();
    end
    check(ST_IDLE == 3'd0, "reset state encoded 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
