// sa_comparator -- behavioural model (not synthesizable logic) of the
// rail-to-rail cross-coupled comparator of the SRAM-immersed SA-ADC.
//
// The circuit couples an N-type module (inputs on NMOS) and a P-type module
// (inputs on PMOS).  Near ground the P-type module dominates, near VDD the
// N-type one.  The model picks the dominating module from the input common
// mode (or from type_sel during calibration) and applies that module's input
// offset (offset_n_uv / offset_p_uv, process variation stimuli), the
// calibration transistors and thermal noise (uniform, +-NOISE_UV):
//   out = (vp - vn + offset - (trim_l - trim_r) * TRIM_STEP_UV + noise) >= 0
// Adding a calibration transistor to the left half therefore pulls the
// decision toward 0, one on the right half toward 1; each side has a 2-bit
// count of transistors per module, matching the paper's 2-bit calibration.
// The decision is combinational while en is high (the latch is the register
// that samples it); the noise sample is redrawn at every posedge clk.
// From the paper: the two modules, the common-mode dominance, tail-current
// calibration transistors on left and right halves, 2 bits.  This model's
// own: the 15 mV trim step (so that 3 steps cover the paper's initial +-45 mV
// mismatch), the uniform +-2 mV noise model and the sign convention of the
// trims.
module sa_comparator #(
  parameter int VDD_UV       = 1_000_000,
  parameter int TRIM_STEP_UV = 15_000,
  parameter int NOISE_UV     = 2_000
) (
  input  logic               clk,
  input  logic               en,
  input  logic [31:0]        vp_uv,
  input  logic [31:0]        vn_uv,
  input  logic [1:0]         type_sel,   // 0 auto, 1 force N-type, 2 force P-type
  input  logic [1:0]         trim_nl, trim_nr, trim_pl, trim_pr,
  input  logic signed [31:0] offset_n_uv,
  input  logic signed [31:0] offset_p_uv,
  output logic               out
);
  int noise;
  initial noise = 0;

  always @(posedge clk) begin
    if (NOISE_UV > 0)
      noise <= int'($urandom_range(2 * NOISE_UV)) - NOISE_UV;
    else
      noise <= 0;
  end

  always_comb begin
    longint diff, cm;
    logic   use_n;
    cm = (longint'(vp_uv) + longint'(vn_uv)) / 2;
    case (type_sel)
      2'd1:    use_n = 1'b1;
      2'd2:    use_n = 1'b0;
      default: use_n = (cm > longint'(VDD_UV) / 2);
    endcase
    diff = longint'(vp_uv) - longint'(vn_uv) + longint'(noise);
    if (use_n)
      diff += longint'(offset_n_uv) - (longint'(trim_nl) - longint'(trim_nr)) * TRIM_STEP_UV;
    else
      diff += longint'(offset_p_uv) - (longint'(trim_pl) - longint'(trim_pr)) * TRIM_STEP_UV;
    out = en && (diff >= 0);
  end

endmodule
