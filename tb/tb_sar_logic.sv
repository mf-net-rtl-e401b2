// tb_sar_logic -- self-checking test of the SA register.
// An ideal comparator in the testbench answers keep = (value >= trial) for a
// hidden value; after ap steps the code must equal the value with its
// unresolved low bits cleared, the first trial must be the MSB, and the
// conversion must take exactly ap steps (2*ap clocks at two clocks per step).
module tb_sar_logic;
  localparam int BITS = 5;
  logic clk = 0, rst_n = 0, start = 0, step = 0, keep;
  logic [2:0] ap;
  logic [BITS-1:0] trial, code, code_next;
  logic last, done;
  int checks = 0, failures = 0;

  sar_logic dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int value;
  assign keep = (value >= int'(trial));

  task automatic convert(input int v, input int p);
    int steps, exp;
    value = v; ap = 3'(p);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    checks++;
    if (trial != 5'b10000) begin failures++; $display("first trial %b", trial); end
    steps = 0;
    while (!done) begin
      step = 1; @(negedge clk); step = 0; steps++;
      @(negedge clk);
      if (steps > 10) break;
    end
    exp = v & ~((1 << (BITS - p)) - 1);
    checks++;
    if (int'(code) != exp || steps != p) begin
      failures++;
      $display("FAIL v=%0d ap=%0d code=%0d exp=%0d steps=%0d", v, p, code, exp, steps);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < 32; v++) convert(v, 5);
    for (int p = 1; p <= 5; p++)
      for (int k = 0; k < 8; k++) convert(int'($urandom_range(31)), p);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
