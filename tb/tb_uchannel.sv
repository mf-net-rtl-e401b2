// tb_uchannel -- self-checking test of the uChannel.
// Loads M random sign-magnitude words through the scan chain, then checks the
// stored words (x_up), the column lines for step(x) and for every |x| bit
// plane on both halves, forced ones on padded columns, stitching (a column
// with cfg = 1 shows the lower word and is skipped by the chain, so a reload
// of the other columns needs fewer bits) and the output register shifted out
// on so, MSB first.
module tb_uchannel;
  localparam int M = 31, XB = 8, OW = 16;
  logic clk = 0, rst_n = 0, si = 0, si_en = 0, cfg_we = 0;
  logic [M-1:0] cfg_d = '0;
  logic [XB-1:0] x_lower [M];
  logic [XB-1:0] x_up [M];
  logic sel_step = 0;
  logic [2:0] plane_bit = 0;
  logic [2*M-1:0] pad_mask = '0, cl;
  logic out_load = 0, so_en = 0, so;
  logic [2*OW-1:0] out_d = '0;
  logic [XB-1:0] xw [M];
  int checks = 0, failures = 0;

  uchannel dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // send the words of the columns with skip[j] = 0, last column first, MSB first
  task automatic load(input logic [M-1:0] skip);
    for (int j = M - 1; j >= 0; j--)
      if (!skip[j])
        for (int b = XB - 1; b >= 0; b--) begin
          @(negedge clk); si = xw[j][b]; si_en = 1;
        end
    @(negedge clk); si_en = 0;
  endtask

  task automatic check_cl(input logic [XB-1:0] exp_w [M]);
    sel_step = 1; #1;
    for (int j = 0; j < M; j++) begin
      checks++;
      if (cl[j] !== (~exp_w[j][XB-1] | pad_mask[j]) || cl[M+j] !== (~exp_w[j][XB-1] | pad_mask[M+j])) begin
        failures++; $display("step col %0d", j);
      end
    end
    sel_step = 0;
    for (int b = 0; b < XB - 1; b++) begin
      plane_bit = 3'(b); #1;
      for (int j = 0; j < M; j++) begin
        checks++;
        if (cl[j] !== (exp_w[j][b] | pad_mask[j]) || cl[M+j] !== (exp_w[j][b] | pad_mask[M+j])) begin
          failures++; $display("plane %0d col %0d", b, j);
        end
      end
    end
  endtask

  initial begin
    logic [XB-1:0] exp_w [M];
    logic [M-1:0] cfg;
    foreach (x_lower[j]) x_lower[j] = 8'(j * 7 + 3);
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (xw[j]) xw[j] = 8'($urandom);
    load('0);
    for (int j = 0; j < M; j++) begin
      checks++;
      if (x_up[j] !== xw[j]) begin failures++; $display("word %0d %h vs %h", j, x_up[j], xw[j]); end
    end
    check_cl(xw);
    pad_mask = {$urandom, $urandom};
    check_cl(xw);
    pad_mask = '0;
    // stitching: odd columns from the lower uArray, reload only the others
    cfg = '0;
    for (int j = 1; j < M; j += 2) cfg[j] = 1'b1;
    @(negedge clk); cfg_we = 1; cfg_d = cfg;
    @(negedge clk); cfg_we = 0;
    foreach (xw[j]) xw[j] = 8'($urandom);
    load(cfg);
    for (int j = 0; j < M; j++) begin
      exp_w[j] = cfg[j] ? x_lower[j] : xw[j];
      checks++;
      if (x_up[j] !== exp_w[j]) begin failures++; $display("stitched word %0d", j); end
    end
    check_cl(exp_w);
    // output register
    out_d = {$urandom};
    @(negedge clk); out_load = 1;
    @(negedge clk); out_load = 0;
    for (int b = 2 * OW - 1; b >= 0; b--) begin
      checks++;
      if (so !== out_d[b]) begin failures++; $display("so bit %0d", b); end
      so_en = 1; @(negedge clk); so_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
