// comp_cal -- on-chip offset calibration of the cross-coupled comparator.
//
// The P-type and then the N-type module is selected in turn (type_sel 2, 1).
// Its inputs are shorted at a common mode that makes that module dominate
// (short_cm_uv near ground for P, near VDD for N), which forces the
// comparator to its metastable point; it is then fired NTRIAL times and a
// counter counts the ones.  An unbiased comparator gives about NTRIAL/2 ones
// under thermal noise.  With more than NTRIAL/2 + MARGIN ones the module is
// biased toward 1 and a calibration transistor is removed from the right half
// or, if none is left there, added to the left half; with fewer than
// NTRIAL/2 - MARGIN ones the opposite.  Each side holds a 2-bit count
// (0..3).  The module is finished when the count is inside the margin, when
// the trim cannot move further, or after MAX_IT rounds.
//
// Interface/timing: start begins a run; each round takes NTRIAL clocks, one
// decision per clock, plus one clock to update the trim; done is high from
// the end of the run until the next start.  Trims are kept after the run and
// cleared only by reset.  The metastable-point bias estimate, the ones
// counter and the 2-bit left/right calibration are the paper's; NTRIAL,
// MARGIN, MAX_IT, the common-mode values and the update rule are this
// design's own.
module comp_cal #(
  parameter int          NTRIAL = 64,
  parameter int          MARGIN = 6,
  parameter int          MAX_IT = 8,
  parameter logic [31:0] CM_P   = 32'd100_000,   // uV, near ground
  parameter logic [31:0] CM_N   = 32'd900_000    // uV, near VDD
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        cmp,
  output logic        active,
  output logic        short_en,
  output logic [31:0] short_cm_uv,
  output logic [1:0]  type_sel,
  output logic        cmp_en,
  output logic        done,
  output logic [1:0]  trim_nl, trim_nr, trim_pl, trim_pr
);
  typedef enum logic [1:0] {K_IDLE, K_COUNT, K_ADJ, K_DONE} cc_state_t;
  cc_state_t st;
  logic      sel_n;                       // 0 P-type module, 1 N-type module
  logic [$clog2(NTRIAL+1)-1:0] ones, trials;
  logic [$clog2(MAX_IT+1)-1:0] rounds;

  logic [1:0] tl, tr;
  logic       hi, lo, stuck;
  assign tl    = sel_n ? trim_nl : trim_pl;
  assign tr    = sel_n ? trim_nr : trim_pr;
  assign hi    = int'(ones) > NTRIAL / 2 + MARGIN;
  assign lo    = int'(ones) < NTRIAL / 2 - MARGIN;
  assign stuck = (hi && tr == 2'd0 && tl == 2'd3) || (lo && tl == 2'd0 && tr == 2'd3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= K_IDLE;
      sel_n   <= 1'b0;
      ones    <= '0;
      trials  <= '0;
      rounds  <= '0;
      trim_nl <= '0; trim_nr <= '0; trim_pl <= '0; trim_pr <= '0;
    end else begin
      unique case (st)
        K_IDLE, K_DONE: if (start) begin
          st     <= K_COUNT;
          sel_n  <= 1'b0;
          ones   <= '0;
          trials <= '0;
          rounds <= '0;
        end
        K_COUNT: begin
          ones   <= ones + cmp;
          trials <= trials + 1'b1;
          if (int'(trials) == NTRIAL - 1) st <= K_ADJ;
        end
        K_ADJ: begin
          if ((!hi && !lo) || stuck || int'(rounds) == MAX_IT - 1) begin
            if (sel_n) st <= K_DONE;
            else begin
              sel_n  <= 1'b1;
              rounds <= '0;
              st     <= K_COUNT;
            end
          end else begin
            rounds <= rounds + 1'b1;
            st     <= K_COUNT;
            if (hi) begin
              if (tr != 0) begin
                if (sel_n) trim_nr <= tr - 1'b1; else trim_pr <= tr - 1'b1;
              end else begin
                if (sel_n) trim_nl <= tl + 1'b1; else trim_pl <= tl + 1'b1;
              end
            end else begin
              if (tl != 0) begin
                if (sel_n) trim_nl <= tl - 1'b1; else trim_pl <= tl - 1'b1;
              end else begin
                if (sel_n) trim_nr <= tr + 1'b1; else trim_pr <= tr + 1'b1;
              end
            end
          end
          ones   <= '0;
          trials <= '0;
        end
        default: st <= K_IDLE;
      endcase
    end
  end

  assign active      = (st == K_COUNT) || (st == K_ADJ);
  assign short_en    = active;
  assign short_cm_uv = sel_n ? CM_N : CM_P;
  assign type_sel    = active ? (sel_n ? 2'd1 : 2'd2) : 2'd0;
  assign cmp_en      = (st == K_COUNT);
  assign done        = (st == K_DONE);

endmodule
