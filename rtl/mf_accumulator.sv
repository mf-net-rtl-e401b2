// mf_accumulator -- digital post-processing of one uArray's ADC codes into the
// multiplication-free correlation
//   w (+) x = sum_i sign(x_i)|w_i| + sign(w_i)|x_i|.
//
// The SA-ADC code q of a plane counts the product lines of the computing half
// that kept their charge.  Padded columns always discharge, so the number of
// (cell AND column-line) products of the plane is  pc = M - pad - q, the
// "correct from the final MAV" step of the column-padding scheme.  When the
// ADC runs at ap < ADC_BITS bits, q is taken at the middle of its bin.
// The planes are summed with their binary weight 2^b into three sums
//   SA[h] = sum step(x)|w|          (PK_WMAG planes)
//   SB[h] = sum sgnbit(w)|x|        (PK_WSGN planes, sgnbit = 1 for w < 0)
//   SX    = sum |x|                 (PK_XSUM planes, shared by both halves)
// and the result of half h is, by the reformulation of the operator,
//   res[h] = (2*SA[h] - sum|w|[h]) + (SX - 2*SB[h])
// where sum|w| is the weight statistic supplied per half (wsum_l / wsum_r,
// pre-computed for the processed weight planes).  The first bracket is
// sum sign(x)|w|, the second sum sign(w)|x| = sum|x| - 2 sum sgnbit(w)|x|,
// which equals the paper's 2 sum step(w)|x| - sum|x|.
// Timing: acc_en adds one plane per clock; clear zeroes the sums.  Results are
// combinational from the sums.  Eq. 1/2, the dummy-row sum and the weight
// statistics are the paper's; the sign-bit form of the second term, the bin
// centring and the 16-bit two's complement result are this design's.
module mf_accumulator #(
  parameter int M     = mf_pkg::M,
  parameter int BITS  = mf_pkg::ADC_BITS,
  parameter int XBITS = mf_pkg::XBITS,
  parameter int OUT_W = mf_pkg::OUT_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        acc_en,
  input  logic                        half,
  input  mf_pkg::plane_kind_t         kind,
  input  logic [$clog2(XBITS)-1:0]    plane_bit,
  input  logic [BITS-1:0]             code,
  input  logic [$clog2(BITS+1)-1:0]   ap,
  input  logic [BITS-1:0]             pad_l,
  input  logic [BITS-1:0]             pad_r,
  input  logic [OUT_W-1:0]            wsum_l,
  input  logic [OUT_W-1:0]            wsum_r,
  output logic signed [OUT_W-1:0]     res_l,
  output logic signed [OUT_W-1:0]     res_r
);
  logic [OUT_W-1:0] sa [2];
  logic [OUT_W-1:0] sb [2];
  logic [OUT_W-1:0] sx;

  logic [BITS:0]    q_est;
  logic [BITS:0]    pc;
  logic [OUT_W-1:0] term;

  always_comb begin
    int unres, pcs;
    unres = BITS - ((int'(ap) == 0) ? 1 : ((int'(ap) > BITS) ? BITS : int'(ap)));
    q_est = {1'b0, code};
    if (unres > 0) q_est = q_est + (BITS+1)'(1 << (unres - 1));
    pcs   = M - (half ? int'(pad_r) : int'(pad_l)) - int'(q_est);
    pc    = (pcs < 0) ? '0 : (BITS+1)'(pcs);
    term  = OUT_W'(pc) << plane_bit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sa <= '{default: '0};
      sb <= '{default: '0};
      sx <= '0;
    end else if (clear) begin
      sa <= '{default: '0};
      sb <= '{default: '0};
      sx <= '0;
    end else if (acc_en) begin
      unique case (kind)
        mf_pkg::PK_WMAG: sa[half] <= sa[half] + term;
        mf_pkg::PK_WSGN: sb[half] <= sb[half] + term;
        default:         sx       <= sx + term;
      endcase
    end
  end

  assign res_l = signed'((sa[0] << 1) - wsum_l + sx - (sb[0] << 1));
  assign res_r = signed'((sa[1] << 1) - wsum_r + sx - (sb[1] << 1));

endmodule
