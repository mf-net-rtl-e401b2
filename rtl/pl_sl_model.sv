// pl_sl_model -- behavioural model (not synthesizable logic) of the analog
// part of one uArray: the product lines (PL) of both halves, their charge
// averaging onto the sum lines SLL and SLR, the bit-line capacitive DAC of the
// SRAM-immersed SA-ADC, and the sum-line charging used for PL calibration.
//
// Voltages are real numbers inside; the two comparator inputs leave the model
// as integers in microvolts.  Each half has M column PLs plus a dummy PL of
// matching capacitance and a sum-line capacitance CSL_RATIO times a nominal PL.
// Per-column capacitance deviation comes in on cap_dev (units of 0.1 %), which
// stands for process variation.
//
// Operation, all at posedge clk:
//   mav_en   the computing half (half_sel: 0 left, 1 right) precharges its PLs
//            to VPCH, every column with discharge[j] loses its charge, then
//            the PLs are averaged on that half's sum line (one cycle, as in the
//            paper's precharge/product/average instruction).
//   dac_en   the other half charges the PLs of the binary groups selected by
//            dac_code (group g = 2^g PLs, so 2^i capacitors in iteration i),
//            discharges the rest and its dummy, and averages them on its sum
//            line: the SA reference voltage.
//   cal_rst / cal_pulse   PL calibration: the sum line of column cal_col's half
//            is reset, then each pulse charges PL cal_col to VPCH and shares
//            that charge with the sum line.
// Comparator inputs: normally vp = SLL, vn = SLR; in calibration vp = the
// calibrated half's sum line, vn = REF; with short_en both equal short_cm_uv.
// The dummy PL of the computing half is precharged to VPCH/2 and kept, which
// lifts the MAV by half a step: a MAV of q charged lines then lies half a
// step above reference level q and half a step below level q+1, so the SA
// search returns q with half a step of margin either way.
// What follows the paper: PL precharge/discharge, averaging, the binary
// capacitor groups, the dummy PL, the charging-count calibration, VPCH = 1 V.
// This model's own: CSL_RATIO = 36, chosen so that a nominal PL charges the
// sum line to REF = 0.5 V in about 25 pulses as in the paper's calibration
// plot, the group-to-column assignment and the half-step dummy precharge.
// Lint note: the column index of the capacitance helper is an int of which
// only the low bits address the 2*M columns.
module pl_sl_model #(
  parameter int  M         = mf_pkg::M,
  parameter real VPCH      = 1.0,
  parameter real CSL_RATIO = 36.0,
  parameter real REF       = 0.5
) (
  input  logic                     clk,
  input  logic                     half_sel,
  input  logic                     mav_en,
  input  logic [2*M-1:0]           discharge,
  input  logic                     dac_en,
  input  logic [$clog2(M+1)-1:0]   dac_code,
  input  logic                     cal_en,
  input  logic [$clog2(2*M)-1:0]   cal_col,
  input  logic                     cal_rst,
  input  logic                     cal_pulse,
  input  logic                     short_en,
  input  logic [31:0]              short_cm_uv,
  input  logic signed [7:0]        cap_dev [2*M],
  output logic [31:0]              vp_uv,
  output logic [31:0]              vn_uv
);
  localparam int B = $clog2(M + 1);

  real sll, slr, sl_cal;

  function automatic real cap(input int j);
    return 1.0 + real'(cap_dev[j]) / 1000.0;
  endfunction

  // denominator of a half's charge sharing: its M PLs, the dummy, the sum line
  function automatic real den(input int h);
    real s;
    s = 1.0 + CSL_RATIO;
    for (int j = 0; j < M; j++) s += cap(h * M + j);
    return s;
  endfunction

  // binary capacitor group of column j inside a half
  function automatic int group_of(input int j);
    int g;
    g = 0;
    while (g < B - 1 && j >= (1 << (g + 1)) - 1) g++;
    return g;
  endfunction

  initial begin
    sll = 0.0; slr = 0.0; sl_cal = 0.0;
  end

  // charge left on a half's product lines after the product step:
  // the dummy PL at VPCH/2 plus every PL that was not discharged
  function automatic real mav_q(input int h);
    real q;
    q = 0.5;
    for (int j = 0; j < M; j++)
      if (!discharge[h * M + j]) q += cap(h * M + j);
    return q;
  endfunction

  // charge placed on a half's product lines by the binary DAC groups
  function automatic real dac_q(input int h);
    real q;
    q = 0.0;
    for (int j = 0; j < M; j++)
      if (dac_code[group_of(j)]) q += cap(h * M + j);
    return q;
  endfunction

  always @(posedge clk) begin
    if (mav_en) begin
      if (half_sel) slr <= VPCH * mav_q(1) / den(1);
      else          sll <= VPCH * mav_q(0) / den(0);
    end
    if (dac_en) begin
      if (half_sel) sll <= VPCH * dac_q(0) / den(0);
      else          slr <= VPCH * dac_q(1) / den(1);
    end
    if (cal_rst)
      sl_cal <= 0.0;
    else if (cal_pulse)
      sl_cal <= (sl_cal * CSL_RATIO + VPCH * cap(int'(cal_col))) / (CSL_RATIO + cap(int'(cal_col)));
  end

  always_comb begin
    if (short_en) begin
      vp_uv = short_cm_uv;
      vn_uv = short_cm_uv;
    end else if (cal_en) begin
      vp_uv = 32'($rtoi(sl_cal * 1.0e6));
      vn_uv = 32'($rtoi(REF * 1.0e6));
    end else begin
      vp_uv = 32'($rtoi(sll * 1.0e6));
      vn_uv = 32'($rtoi(slr * 1.0e6));
    end
  end

endmodule
