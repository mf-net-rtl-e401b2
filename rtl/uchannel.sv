// uchannel -- the uChannel of one uArray: the digital input/output path.
//
// Input side.  One XBITS-bit input word per column position, kept in
// sign-magnitude form (bit XBITS-1 = sign, 1 = negative; bits 0..XBITS-2 =
// |x|).  The words are loaded bit-serially through a scan chain: with si_en,
// every column register shifts left by one and takes the bit leaving the
// column below it; column 0 takes si.  Sending x[M-1] first, most significant
// bit first, and x[0] last fills the chain in M*XBITS cycles.
// Column stitching: a column whose reconfiguration bit cfg[j] is 1 takes its
// word from the same column of the lower uArray (x_lower) and its register is
// bypassed in the scan chain, so its bits need not be loaded.  x_up passes
// the word each column uses to the uArray above.
// The column lines follow the controller: with sel_step, CL = step(x) =
// NOT sign; otherwise CL = bit plane_bit of |x|.  The same word drives column
// j of the left and of the right half.  Padded columns (pad_mask) get CL = 1.
//
// Output side.  out_load captures both 16-bit results of the uArray (right
// half in the upper 16 bits) in the output register REG; with so_en it shifts
// left one bit per clock and so presents its MSB.
// From the paper: scan-register serial in/serial out path, per-column
// reconfiguration bit with bypass of input loading and feed from the lower
// uArray, REG driving SO, CL = 1 on padded columns, bit planes of |x| and
// step(x) applied on CL.  This design's own: sharing one word per column
// position between the halves, the bit order and the REG layout.
module uchannel #(
  parameter int M     = mf_pkg::M,
  parameter int XBITS = mf_pkg::XBITS,
  parameter int OUT_W = mf_pkg::OUT_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // serial input chain
  input  logic                       si,
  input  logic                       si_en,
  // column-wise reconfiguration bits
  input  logic                       cfg_we,
  input  logic [M-1:0]               cfg_d,
  // stitching
  input  logic [XBITS-1:0]           x_lower [M],
  output logic [XBITS-1:0]           x_up    [M],
  // column lines
  input  logic                       sel_step,
  input  logic [$clog2(XBITS)-1:0]   plane_bit,
  input  logic [2*M-1:0]             pad_mask,
  output logic [2*M-1:0]             cl,
  // output register
  input  logic                       out_load,
  input  logic [2*OUT_W-1:0]         out_d,
  input  logic                       so_en,
  output logic                       so
);
  logic [XBITS-1:0]   xreg [M];
  logic [M-1:0]       cfg;
  logic [M-1:0]       chain;          // chain[j] enters column j
  logic [M-1:0]       colbit;
  logic [2*OUT_W-1:0] oreg;

  assign chain[0] = si;
  for (genvar j = 0; j < M; j++) begin : g_col
    if (j < M - 1) begin : g_link
      assign chain[j+1] = cfg[j] ? chain[j] : xreg[j][XBITS-1];
    end
    assign x_up[j]    = cfg[j] ? x_lower[j] : xreg[j];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                 xreg[j] <= '0;
      else if (si_en && !cfg[j])  xreg[j] <= {xreg[j][XBITS-2:0], chain[j]};
    end
    assign colbit[j]    = sel_step ? ~x_up[j][XBITS-1] : x_up[j][plane_bit];
    assign cl[j]        = colbit[j] | pad_mask[j];
    assign cl[M + j]    = colbit[j] | pad_mask[M + j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      cfg <= '0;
    else if (cfg_we) cfg <= cfg_d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        oreg <= '0;
    else if (out_load) oreg <= out_d;
    else if (so_en)    oreg <= {oreg[2*OUT_W-2:0], 1'b0};
  end
  assign so = oreg[2*OUT_W-1];

endmodule
