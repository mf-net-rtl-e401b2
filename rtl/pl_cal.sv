// pl_cal -- on-chip estimate of product-line (PL) capacitance per column and
// selection of the columns to discard.
//
// For every column in turn the sum line of its half is reset, then charged
// through that column's PL one pulse per clock, and the pulses are counted
// until the comparator reports that the sum line has crossed the reference
// REF (cmp = 1), or until MAX_CNT pulses.  A small PL capacitor needs more
// pulses, a large one fewer.  A column whose count lies outside
// [cnt_lo, cnt_hi] (the C_TH band around the nominal count) is marked in
// mask.  The uArray then pads such a column: writes store one in all its
// cells and its column line is held at one, so it always discharges and
// only adds to the denominator of the MAV; pad_l / pad_r count the padded
// columns per half for the correction in mf_accumulator.
//
// Interface/timing: start launches a run over all 2*M columns; per column one
// reset clock, then one clock per pulse, the comparator being sampled in the
// same clock before the pulse is issued.  done is high from the end of the
// run until the next start.  cnt_last holds the count of the last column
// measured (observability).  The charge-count measurement, the threshold band
// and padding instead of a disconnect switch are the paper's; the sequencing,
// the programmable band and MAX_CNT = 127 are this design's own.
module pl_cal #(
  parameter int M       = mf_pkg::M,
  parameter int CNT_W   = 7,
  parameter int MAX_CNT = (1 << CNT_W) - 1,
  parameter int PAD_W   = $clog2(M + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic                     cmp,        // sum line above REF
  input  logic [CNT_W-1:0]         cnt_lo,
  input  logic [CNT_W-1:0]         cnt_hi,
  output logic                     active,
  output logic [$clog2(2*M)-1:0]   col,
  output logic                     sl_rst,
  output logic                     pulse,
  output logic                     cmp_en,
  output logic                     done,
  output logic [CNT_W-1:0]         cnt_last,
  output logic [2*M-1:0]           mask,
  output logic [PAD_W-1:0]         pad_l,
  output logic [PAD_W-1:0]         pad_r
);
  typedef enum logic [1:0] {C_IDLE, C_RST, C_CHARGE, C_DONE} cal_state_t;
  cal_state_t st;
  logic [CNT_W-1:0] cnt;
  logic             finish_col;
  logic             out_band;

  assign finish_col = (st == C_CHARGE) && (cmp || cnt == CNT_W'(MAX_CNT));
  assign out_band   = (cnt < cnt_lo) || (cnt > cnt_hi);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= C_IDLE;
      col      <= '0;
      cnt      <= '0;
      cnt_last <= '0;
      mask     <= '0;
    end else begin
      unique case (st)
        C_IDLE, C_DONE: if (start) begin
          st   <= C_RST;
          col  <= '0;
          mask <= '0;
        end
        C_RST: begin
          cnt <= '0;
          st  <= C_CHARGE;
        end
        C_CHARGE: if (finish_col) begin
          mask[col] <= out_band;
          cnt_last  <= cnt;
          if (int'(col) == 2*M - 1) st <= C_DONE;
          else begin
            col <= col + 1'b1;
            st  <= C_RST;
          end
        end else begin
          cnt <= cnt + 1'b1;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  always_comb begin
    pad_l = '0;
    pad_r = '0;
    for (int j = 0; j < M; j++) begin
      pad_l += PAD_W'(mask[j]);
      pad_r += PAD_W'(mask[M + j]);
    end
  end

  assign active = (st == C_RST) || (st == C_CHARGE);
  assign sl_rst = (st == C_RST);
  assign pulse  = (st == C_CHARGE) && !finish_col;
  assign cmp_en = (st == C_CHARGE);
  assign done   = (st == C_DONE);

endmodule
