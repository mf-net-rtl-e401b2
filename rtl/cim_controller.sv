// cim_controller -- compute-in-memory controller and sequential row scanner
// of one uArray.
//
// One operation computes w (+) x for the weight channels stored in both halves
// against the input vector held in the uChannel.  It proceeds by bit planes.
// The left half computes while the right half digitizes, then the halves swap.
// For each half the plane order is:
//   PK_WMAG  |w| rows b = MAG-1 down to MAG-(wp-1), CL = step(x)
//            (wp < XBITS skips the low-significance weight planes)
//   PK_WSGN  sign row against |x| planes b = MAG-1 .. 0
//   PK_XSUM  (left half only) dummy all-ones row against |x| planes
//            b = MAG-1 .. 0: sum |x|, computed once and shared by both halves
// Every plane takes 1 + 2*ap clocks: ST_MAV (precharge, product, average in
// one instruction cycle), then ap conversions of two clocks each: ST_ADC_PCH
// (DAC product lines precharged from the SA register) and ST_ADC_CMP (sum,
// compare, SA update).  The SA register (sar_logic) ends a conversion after
// ap = 1..ADC_BITS bits and tells the controller through sar_last.  One operation
// therefore lasts (2*(wp-1) + 3*MAG) * (1 + 2*ap) clocks; done pulses the
// clock after the last conversion.  Per plane this is the paper's
// T = W_P * (1 + 2 A_P) count (W_P planes, 1 + 2 A_P clocks each).
// From the paper: bit-plane processing, half swapping, one product cycle and
// two clocks per conversion bit, skipping weight planes and SA cycles.  This
// design's own: the plane order (MSB first), the shared dummy-row pass in the
// left-half phase and the handshake (start, busy, done).
module cim_controller #(
  parameter int ROWS     = mf_pkg::ROWS,
  parameter int XBITS    = mf_pkg::XBITS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [3:0]                    wp,        // weight precision incl. sign, 1..XBITS
  input  logic                          sar_last,  // from sar_logic
  output logic                          busy,
  output logic                          done,
  output mf_pkg::ctrl_state_t                   state,
  output logic                          half,      // 0 left computes, 1 right
  output mf_pkg::plane_kind_t                   kind,
  output logic [$clog2(XBITS)-1:0]      plane_bit,
  output logic [ROWS:0]                 rl,        // row lines, bit ROWS = dummy row
  output logic                          sel_step,
  output logic                          mav_en,
  output logic                          dac_en,
  output logic                          cmp_en,
  output logic                          sar_start,
  output logic                          sar_step,
  output logic                          acc_clear,
  output logic                          acc_en
);
  localparam int MAGB = XBITS - 1;
  localparam int BW   = $clog2(XBITS);

  logic [BW-1:0] low_b;     // lowest |w| plane processed
  logic          no_wmag;   // wp <= 1: no magnitude planes at all

  always_comb begin
    int w;
    w       = (wp == 0) ? 1 : ((int'(wp) > XBITS) ? XBITS : int'(wp));
    no_wmag = (w <= 1);
    low_b   = BW'(XBITS - w);   // MAG - (w-1)
  end

  // next plane after the current one
  logic        nx_done;
  logic        nx_half;
  mf_pkg::plane_kind_t nx_kind;
  logic [BW-1:0] nx_b;

  always_comb begin
    nx_done = 1'b0;
    nx_half = half;
    nx_kind = kind;
    nx_b    = plane_bit - 1'b1;
    unique case (kind)
      mf_pkg::PK_WMAG: if (plane_bit == low_b) begin
                 nx_kind = mf_pkg::PK_WSGN;
                 nx_b    = BW'(MAGB - 1);
               end
      mf_pkg::PK_WSGN: if (plane_bit == 0) begin
                 if (half == 1'b0) begin
                   nx_kind = mf_pkg::PK_XSUM;
                   nx_b    = BW'(MAGB - 1);
                 end else begin
                   nx_done = 1'b1;
                 end
               end
      mf_pkg::PK_XSUM: if (plane_bit == 0) begin
                 nx_half = 1'b1;
                 nx_kind = no_wmag ? mf_pkg::PK_WSGN : mf_pkg::PK_WMAG;
                 nx_b    = BW'(MAGB - 1);
               end
      default: nx_done = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= mf_pkg::ST_IDLE;
      half      <= 1'b0;
      kind      <= mf_pkg::PK_WMAG;
      plane_bit <= '0;
    end else begin
      unique case (state)
        mf_pkg::ST_IDLE, mf_pkg::ST_DONE: if (start) begin
          state     <= mf_pkg::ST_MAV;
          half      <= 1'b0;
          kind      <= no_wmag ? mf_pkg::PK_WSGN : mf_pkg::PK_WMAG;
          plane_bit <= BW'(MAGB - 1);
        end else begin
          state <= mf_pkg::ST_IDLE;
        end
        mf_pkg::ST_MAV:     state <= mf_pkg::ST_ADC_PCH;
        mf_pkg::ST_ADC_PCH: state <= mf_pkg::ST_ADC_CMP;
        mf_pkg::ST_ADC_CMP: if (sar_last) begin
          if (nx_done) state <= mf_pkg::ST_DONE;
          else begin
            state     <= mf_pkg::ST_MAV;
            half      <= nx_half;
            kind      <= nx_kind;
            plane_bit <= nx_b;
          end
        end else begin
          state <= mf_pkg::ST_ADC_PCH;
        end
        default: state <= mf_pkg::ST_IDLE;
      endcase
    end
  end

  always_comb begin
    rl = '0;
    if (state == mf_pkg::ST_MAV) begin
      unique case (kind)
        mf_pkg::PK_WMAG: rl[int'(plane_bit) + 1] = 1'b1;
        mf_pkg::PK_WSGN: rl[0]    = 1'b1;
        default: rl[ROWS] = 1'b1;
      endcase
    end
  end

  assign busy      = (state != mf_pkg::ST_IDLE) && (state != mf_pkg::ST_DONE);
  assign done      = (state == mf_pkg::ST_DONE);
  assign sel_step  = (kind == mf_pkg::PK_WMAG);
  assign mav_en    = (state == mf_pkg::ST_MAV);
  assign sar_start = (state == mf_pkg::ST_MAV);
  assign dac_en    = (state == mf_pkg::ST_ADC_PCH);
  assign cmp_en    = (state == mf_pkg::ST_ADC_CMP);
  assign sar_step  = (state == mf_pkg::ST_ADC_CMP);
  assign acc_en    = (state == mf_pkg::ST_ADC_CMP) && sar_last;
  assign acc_clear = (state == mf_pkg::ST_IDLE || state == mf_pkg::ST_DONE) && start;

endmodule
