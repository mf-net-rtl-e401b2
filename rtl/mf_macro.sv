// mf_macro -- compute-in-SRAM macro for multiplication-free DNN inference.
//
// A stack of NUA uArrays (8 rows x 62 columns each), every one with its own
// uChannel.  Each uArray stores two weight channels of up to M = 31 elements
// and computes their multiplication-free correlation with one input vector;
// filters wider than 31 elements are split over several uArrays and the
// partial results added outside the macro.  The uChannels are stitched
// bottom to top: a column of uArray k whose reconfiguration bit is set takes
// its input word from the same column of uArray k-1, so an input vector shared
// by several filters is loaded only once (uArray 0 has no lower neighbour and
// sees zeros there).
//
// Interface: one SRAM write port shared by all uArrays (wsel selects the
// uArray), per-uArray serial input (si/si_en), stitching bits, serial output
// (so/so_en) and weight statistics; start, wp (weight precision, 1..8 incl.
// sign) and ap (ADC precision, 1..5) are broadcast.  Every uArray runs the
// same schedule, so all finish together: busy is the OR of all, done is
// that of uArray 0 and all_done the AND of all.  Per-uArray results are also given in parallel.
// The calibration starts are broadcast; each uArray calibrates its own
// columns and comparator.  cap_dev, offset_n_uv and offset_p_uv are
// process-variation stimuli for the behavioural analog models inside.
// From the paper: uArrays with uChannels, column stitching between stacked
// uArrays.  This design's own: NUA = 4 (the paper gives no count), the shared
// write port and the broadcast control.
// Lint note: x_up of the topmost uArray has no uArray above it and is left
// unconnected.
module mf_macro #(
  parameter int NUA      = 4,
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
  input  logic [$clog2(NUA)-1:0]        wsel,
  input  logic [$clog2(ROWS)-1:0]       waddr,
  input  logic                          whalf,
  input  logic [M-1:0]                  wdata,
  input  logic [$clog2(ROWS)-1:0]       raddr,
  output logic [2*M-1:0]                rdata   [NUA],
  // uChannels
  input  logic [NUA-1:0]                si,
  input  logic [NUA-1:0]                si_en,
  input  logic [NUA-1:0]                cfg_we,
  input  logic [M-1:0]                  cfg_d,
  input  logic [NUA-1:0]                so_en,
  output logic [NUA-1:0]                so,
  // operation
  input  logic [OUT_W-1:0]              wsum_l  [NUA],
  input  logic [OUT_W-1:0]              wsum_r  [NUA],
  input  logic                          start,
  input  logic [3:0]                    wp,
  input  logic [$clog2(ADC_BITS+1)-1:0] ap,
  output logic                          busy,
  output logic                          done,
  output logic                          all_done,
  output logic signed [OUT_W-1:0]       res_l   [NUA],
  output logic signed [OUT_W-1:0]       res_r   [NUA],
  // calibration
  input  logic                          pl_cal_start,
  input  logic [CNT_W-1:0]              cnt_lo,
  input  logic [CNT_W-1:0]              cnt_hi,
  output logic [NUA-1:0]                pl_cal_done,
  output logic [2*M-1:0]                pad_mask [NUA],
  input  logic                          comp_cal_start,
  output logic [NUA-1:0]                comp_cal_done,
  output logic [7:0]                    comp_trim [NUA],
  // behavioural-model stimuli
  input  logic signed [7:0]             cap_dev [NUA][2*M],
  input  logic signed [31:0]            offset_n_uv [NUA],
  input  logic signed [31:0]            offset_p_uv [NUA]
);
  logic [NUA-1:0]   busy_v, done_v;

  for (genvar k = 0; k < NUA; k++) begin : g_ua
    logic [XBITS-1:0] xl [M];   // words from the uArray below
    logic [XBITS-1:0] xu [M];   // words passed to the uArray above
    if (k == 0) begin : g_bottom
      assign xl = '{default: '0};
    end else begin : g_stack
      assign xl = g_ua[k-1].xu;
    end
    uarray #(
      .M(M), .ROWS(ROWS), .XBITS(XBITS), .ADC_BITS(ADC_BITS), .OUT_W(OUT_W), .CNT_W(CNT_W)
    ) u_ua (
      .clk, .rst_n,
      .we(we && (int'(wsel) == k)), .waddr, .whalf, .wdata,
      .raddr, .rdata(rdata[k]),
      .si(si[k]), .si_en(si_en[k]), .cfg_we(cfg_we[k]), .cfg_d,
      .x_lower(xl), .x_up(xu),
      .so_en(so_en[k]), .so(so[k]),
      .wsum_l(wsum_l[k]), .wsum_r(wsum_r[k]),
      .start, .wp, .ap, .busy(busy_v[k]), .done(done_v[k]),
      .res_l(res_l[k]), .res_r(res_r[k]),
      .pl_cal_start, .cnt_lo, .cnt_hi, .pl_cal_done(pl_cal_done[k]),
      .pad_mask(pad_mask[k]),
      .comp_cal_start, .comp_cal_done(comp_cal_done[k]), .comp_trim(comp_trim[k]),
      .cap_dev(cap_dev[k]), .offset_n_uv(offset_n_uv[k]), .offset_p_uv(offset_p_uv[k])
    );
  end

  assign busy     = |busy_v;
  assign done     = done_v[0];
  assign all_done = &done_v;

endmodule
