// tb_imc_bitcell_array -- self-checking test of the 8T cell array.
// Writes random half-rows, keeps a shadow copy, then checks every read row and
// the product port (discharge = OR of selected rows AND CL), including the
// all-ones dummy row, for random row and column-line patterns.
module tb_imc_bitcell_array;
  localparam int ROWS = 8, COLS = 62, H = COLS / 2;
  logic clk = 0, we = 0, whalf = 0;
  logic [2:0] waddr = 0, raddr = 0;
  logic [H-1:0] wdata = 0;
  logic [COLS-1:0] rdata, cl, discharge;
  logic [ROWS:0] rl;
  logic [COLS-1:0] shadow [ROWS];
  int checks = 0, failures = 0;

  imc_bitcell_array dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rl = '0; cl = '0;
    for (int r = 0; r < ROWS; r++)
      for (int h = 0; h < 2; h++) begin
        @(negedge clk);
        we = 1; waddr = 3'(r); whalf = h[0];
        wdata = {$urandom, $urandom};
        if (h == 0) shadow[r][H-1:0] = wdata; else shadow[r][COLS-1:H] = wdata;
      end
    @(negedge clk) we = 0;
    for (int r = 0; r < ROWS; r++) begin
      raddr = 3'(r); #1;
      checks++;
      if (rdata !== shadow[r]) begin failures++; $display("read row %0d", r); end
    end
    for (int t = 0; t < 200; t++) begin
      logic [COLS-1:0] exp;
      int r;
      r = int'($urandom_range(ROWS));
      rl = '0; rl[r] = 1'b1;
      cl = {$urandom, $urandom};
      #1;
      exp = (r == ROWS) ? cl : (shadow[r] & cl);
      checks++;
      if (discharge !== exp) begin failures++; $display("product row %0d", r); end
    end
    rl = '0; #1;
    checks++;
    if (discharge !== '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
