// uarray -- one uArray of the compute-in-SRAM macro with its uChannel.
//
// The uArray holds two weight channels, one per half of M columns, as
// sign-magnitude bit planes (row 0 sign, rows 1..7 |w| bits 0..6).  An
// operation computes, for the input vector x in the uChannel,
//   res_l = w_left (+) x   and   res_r = w_right (+) x
// with the multiplication-free operator w (+) x = sum sign(x)|w| + sign(w)|x|.
// Only one-bit operands ever meet in a cell: step(x) against a |w| row, or a
// bit plane of |x| against the sign row or the all-ones dummy row.  While one
// half forms a multiply-average on its sum line, the product lines of the
// other half act as the capacitive DAC of a successive-approximation ADC that
// digitizes it; then the halves swap roles.
//
// Parts: imc_bitcell_array (cells), uchannel (inputs, stitching, output
// scan register), cim_controller (bit-plane schedule), sar_logic (SA
// register), mf_accumulator (Eq. 2 post-processing), pl_cal and comp_cal
// (on-chip calibration) and two behavioural models of the analog circuits,
// pl_sl_model (product/sum lines, bit-line DAC) and sa_comparator.
//
// Interface and timing:
//   write    we/waddr/whalf/wdata writes one half-row; in columns marked by
//            the PL calibration the stored bits are forced to one (padding).
//   inputs   si/si_en scan chain, cfg_we/cfg_d stitching bits, x_lower/x_up.
//   compute  start (while idle) -> busy for (2*(wp-1)+21)*(1+2*ap) clocks ->
//            done; res_l/res_r valid while done.  On entering done the two
//            results are copied into the uChannel output register, shifted
//            out MSB first on so with so_en (res_r first, then res_l).
//   calib.   pl_cal_start, comp_cal_start run the two calibrations; they
//            must not overlap each other or an operation.
//   model    cap_dev, offset_n_uv, offset_p_uv are process-variation stimuli
//            of the behavioural analog models, not circuit inputs.
// The structure follows the paper's uArray/uChannel figure; the port-level
// interface, the handshakes and the way the calibrations are wired are this
// design's own.
// Lint notes: the controller state, the SA register's own code/done and the
// last calibration count are observability outputs of the sub-blocks that
// this level does not need (the accumulator takes code_next).  rst_n is used
// both as the asynchronous reset of the flops and, synchronously, in the
// disable clause of the two assertions; the latter is simulation-only.
module uarray #(
  parameter int M        = mf_pkg::M,
  parameter int ROWS     = mf_pkg::ROWS,
  parameter int XBITS    = mf_pkg::XBITS,
  parameter int ADC_BITS = mf_pkg::ADC_BITS,
  parameter int OUT_W    = mf_pkg::OUT_W,
  parameter int CNT_W    = 7
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // SRAM write / read
  input  logic                          we,
  input  logic [$clog2(ROWS)-1:0]       waddr,
  input  logic                          whalf,
  input  logic [M-1:0]                  wdata,
  input  logic [$clog2(ROWS)-1:0]       raddr,
  output logic [2*M-1:0]                rdata,
  // uChannel
  input  logic                          si,
  input  logic                          si_en,
  input  logic                          cfg_we,
  input  logic [M-1:0]                  cfg_d,
  input  logic [XBITS-1:0]              x_lower [M],
  output logic [XBITS-1:0]              x_up    [M],
  input  logic                          so_en,
  output logic                          so,
  // operation
  input  logic [OUT_W-1:0]              wsum_l,
  input  logic [OUT_W-1:0]              wsum_r,
  input  logic                          start,
  input  logic [3:0]                    wp,
  input  logic [$clog2(ADC_BITS+1)-1:0] ap,
  output logic                          busy,
  output logic                          done,
  output logic signed [OUT_W-1:0]       res_l,
  output logic signed [OUT_W-1:0]       res_r,
  // calibration
  input  logic                          pl_cal_start,
  input  logic [CNT_W-1:0]              cnt_lo,
  input  logic [CNT_W-1:0]              cnt_hi,
  output logic                          pl_cal_done,
  output logic [2*M-1:0]                pad_mask,
  input  logic                          comp_cal_start,
  output logic                          comp_cal_done,
  output logic [7:0]                    comp_trim,   // {nl, nr, pl, pr}
  // behavioural-model stimuli (process variation)
  input  logic signed [7:0]             cap_dev [2*M],
  input  logic signed [31:0]            offset_n_uv,
  input  logic signed [31:0]            offset_p_uv
);
  localparam int BW = $clog2(XBITS);

  // controller
  mf_pkg::ctrl_state_t state;
  mf_pkg::plane_kind_t kind;
  logic            half, sel_step, mav_en, dac_en, c_cmp_en;
  logic            sar_start, sar_step, sar_last, acc_clear, acc_en;
  logic [BW-1:0]   plane_bit;
  logic [ROWS:0]   rl;

  // datapath
  logic [2*M-1:0]        cl, discharge;
  logic [ADC_BITS-1:0]   trial, code, code_next;
  logic                  sar_done;
  logic                  cmp_out, keep;
  logic [31:0]           vp_uv, vn_uv;

  // calibration
  logic                    pc_active, pc_rst, pc_pulse, pc_cmp_en;
  logic [$clog2(2*M)-1:0]  pc_col;
  logic [CNT_W-1:0]        pc_cnt_last;
  logic [ADC_BITS-1:0]     pad_l, pad_r;
  logic                    cc_active, cc_short, cc_cmp_en;
  logic [31:0]             cc_cm;
  logic [1:0]              cc_type, t_nl, t_nr, t_pl, t_pr;

  cim_controller #(.ROWS(ROWS), .XBITS(XBITS)) u_ctrl (
    .clk, .rst_n, .start, .wp, .sar_last,
    .busy, .done, .state, .half, .kind, .plane_bit, .rl, .sel_step,
    .mav_en, .dac_en, .cmp_en(c_cmp_en), .sar_start, .sar_step,
    .acc_clear, .acc_en
  );

  // padding: padded columns store ones in every row
  logic [M-1:0] wpad;
  assign wpad = whalf ? pad_mask[2*M-1:M] : pad_mask[M-1:0];

  imc_bitcell_array #(.ROWS(ROWS), .COLS(2*M)) u_cells (
    .clk, .we, .waddr, .whalf, .wdata(wdata | wpad),
    .raddr, .rdata, .rl, .cl, .discharge
  );

  logic done_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_d <= 1'b0;
    else        done_d <= done;
  end

  uchannel #(.M(M), .XBITS(XBITS), .OUT_W(OUT_W)) u_chan (
    .clk, .rst_n, .si, .si_en, .cfg_we, .cfg_d, .x_lower, .x_up,
    .sel_step, .plane_bit, .pad_mask, .cl,
    .out_load(done && !done_d), .out_d({res_r, res_l}), .so_en, .so
  );

  pl_sl_model #(.M(M)) u_analog (
    .clk, .half_sel(half), .mav_en, .discharge,
    .dac_en, .dac_code(trial),
    .cal_en(pc_active), .cal_col(pc_col), .cal_rst(pc_rst), .cal_pulse(pc_pulse),
    .short_en(cc_short), .short_cm_uv(cc_cm),
    .cap_dev, .vp_uv, .vn_uv
  );

  sa_comparator u_comp (
    .clk, .en(c_cmp_en | pc_cmp_en | cc_cmp_en), .vp_uv, .vn_uv,
    .type_sel(cc_type), .trim_nl(t_nl), .trim_nr(t_nr), .trim_pl(t_pl), .trim_pr(t_pr),
    .offset_n_uv, .offset_p_uv, .out(cmp_out)
  );

  // comparator + input is SLL: MAV >= reference is out when the left half
  // computes and NOT out when the right half does
  assign keep = half ? ~cmp_out : cmp_out;

  sar_logic #(.BITS(ADC_BITS)) u_sar (
    .clk, .rst_n, .start(sar_start), .ap, .step(sar_step), .keep,
    .trial, .code, .code_next, .last(sar_last), .done(sar_done)
  );

  mf_accumulator #(.M(M), .BITS(ADC_BITS), .XBITS(XBITS), .OUT_W(OUT_W)) u_acc (
    .clk, .rst_n, .clear(acc_clear), .acc_en, .half, .kind, .plane_bit,
    .code(code_next), .ap, .pad_l, .pad_r, .wsum_l, .wsum_r, .res_l, .res_r
  );

  pl_cal #(.M(M), .CNT_W(CNT_W), .PAD_W(ADC_BITS)) u_plcal (
    .clk, .rst_n, .start(pl_cal_start), .cmp(cmp_out), .cnt_lo, .cnt_hi,
    .active(pc_active), .col(pc_col), .sl_rst(pc_rst), .pulse(pc_pulse),
    .cmp_en(pc_cmp_en), .done(pl_cal_done), .cnt_last(pc_cnt_last),
    .mask(pad_mask), .pad_l, .pad_r
  );

  comp_cal u_ccal (
    .clk, .rst_n, .start(comp_cal_start), .cmp(cmp_out),
    .active(cc_active), .short_en(cc_short), .short_cm_uv(cc_cm),
    .type_sel(cc_type), .cmp_en(cc_cmp_en), .done(comp_cal_done),
    .trim_nl(t_nl), .trim_nr(t_nr), .trim_pl(t_pl), .trim_pr(t_pr)
  );
  assign comp_trim = {t_nl, t_nr, t_pl, t_pr};

  // rules of use: an operation and the calibrations never overlap
  assert property (@(posedge clk) disable iff (!rst_n) !(busy && (pc_active || cc_active)));
  assert property (@(posedge clk) disable iff (!rst_n) !(pc_active && cc_active));

endmodule
