// sar_logic -- successive-approximation register of the SRAM-immersed SA-ADC.
//
// A binary search over the bit-line capacitive DAC: start clears the result
// and sets the trial code to the MSB.  The trial code drives the precharge of
// the DAC half's product-line groups (group g holds 2^g PLs).  At each step
// pulse, the comparator decision keep (MAV >= reference) fixes the current
// bit and the trial moves to the next lower bit.  After ap steps (ap = 1..BITS
// is the run-time ADC precision) the search stops; unresolved low bits stay 0.
// code_next is the result including the decision being sampled, so a consumer
// can take the final code on the same edge as the last step.
//
// Timing: one step per ADC bit; the controller spends two clocks per step
// (precharge, then sum/compare/update), so an ap-bit conversion takes 2*ap.
// From the paper: SA logic fed by the comparator updates the digitization
// register and produces the next precharge bits; precision can be cut at run
// time by limiting the SA cycles.  The register layout is this design's own.
module sar_logic #(
  parameter int BITS = mf_pkg::ADC_BITS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [$clog2(BITS+1)-1:0] ap,
  input  logic                     step,
  input  logic                     keep,
  output logic [BITS-1:0]          trial,
  output logic [BITS-1:0]          code,
  output logic [BITS-1:0]          code_next,
  output logic                     last,     // the next step is the final one
  output logic                     done
);
  logic [BITS-1:0]              cur;     // one-hot bit under test
  logic [$clog2(BITS+1)-1:0]    left;    // steps remaining

  assign trial     = code | cur;
  assign code_next = keep ? (code | cur) : code;
  assign last      = (left == 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code <= '0;
      cur  <= '0;
      left <= '0;
      done <= 1'b0;
    end else if (start) begin
      code <= '0;
      cur  <= BITS'(1) << (BITS - 1);
      if (ap == 0)              left <= 1;
      else if (int'(ap) > BITS) left <= ($clog2(BITS+1))'(BITS);
      else                      left <= ap;
      done <= 1'b0;
    end else if (step && left != 0) begin
      code <= code_next;
      cur  <= cur >> 1;
      left <= left - 1;
      done <= (left == 1);
    end
  end

endmodule
