// tb_sa_comparator -- self-checking test of the comparator model.
// Checks: sign of the decision for random inputs; no decision without en;
// the N-type offset applies at high common mode and the P-type one at low
// common mode; each calibration transistor moves the threshold by one trim
// step in the stated direction; type_sel overrides the common-mode choice.
// The thermal noise is switched off here (NOISE_UV = 0) so that every
// decision near the threshold is deterministic; the calibration tests run
// the model with its default noise.
module tb_sa_comparator;
  logic clk = 0, en = 1;
  logic [31:0] vp_uv, vn_uv;
  logic [1:0] type_sel = 0, trim_nl = 0, trim_nr = 0, trim_pl = 0, trim_pr = 0;
  logic signed [31:0] offset_n_uv = 0, offset_p_uv = 0;
  logic out;
  int checks = 0, failures = 0;

  sa_comparator #(.NOISE_UV(0)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic exp, input string what);
    #1;
    checks++;
    if (out !== exp) begin failures++; $display("FAIL %s: out=%b", what, out); end
  endtask

  initial begin
    for (int t = 0; t < 100; t++) begin
      vp_uv = $urandom_range(1000000); vn_uv = $urandom_range(1000000);
      chk(vp_uv >= vn_uv, "plain");
    end
    en = 0; vp_uv = 900000; vn_uv = 100000; chk(1'b0, "disabled");
    en = 1;
    offset_n_uv = 20000; offset_p_uv = -20000;
    // high common mode: N-type offset +20 mV
    vp_uv = 800000; vn_uv = 810000; chk(1'b1, "N offset raises");
    vp_uv = 800000; vn_uv = 830000; chk(1'b0, "N offset limit");
    // low common mode: P-type offset -20 mV
    vp_uv = 110000; vn_uv = 100000; chk(1'b0, "P offset lowers");
    vp_uv = 130000; vn_uv = 100000; chk(1'b1, "P offset limit");
    // trims on N-type: left trims pull toward 0
    vp_uv = 800000; vn_uv = 810000;
    trim_nl = 1; chk(1'b0, "N left trim");
    trim_nl = 1; trim_nr = 2; chk(1'b1, "N right trim");
    trim_nl = 0; trim_nr = 0;
    // type_sel forces the P-type module at high common mode
    type_sel = 2; chk(1'b0, "forced P");
    type_sel = 1; chk(1'b1, "forced N");
    type_sel = 0;
    // P-type right trim compensates -20 mV with two 15 mV steps
    vp_uv = 100000; vn_uv = 100000;
    chk(1'b0, "P biased");
    trim_pr = 2; chk(1'b1, "P trimmed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
