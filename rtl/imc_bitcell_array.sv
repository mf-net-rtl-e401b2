// imc_bitcell_array -- the 8T compute-in-memory SRAM cells of one uArray.
//
// ROWS x COLS storage cells, written a half-row at a time through the normal
// 6T write port (WWL / WBL) and read a full row at a time.  Each cell also has
// the two product transistors of the 8T cell: when its row line RL and its
// column line CL are both active and the cell stores a one, it discharges the
// column's product line PL.  The array reports, per column, whether the PL is
// discharged (discharge[j] = OR over selected rows of cell & CL[j]).
// Row index ROWS is the dummy row of the multiplication-free operator, which
// always stores ones; it is built as constant cells rather than a written row.
//
// Interface: write of one half (cols [half*COLS/2 +: COLS/2]) at posedge clk
// when we; combinational read of row raddr; combinational product port.
// Timing: writes take effect on the next cycle, the product port is
// combinational (the analog discharge is modelled by pl_sl_model).
// The cell arrangement (rows = bit planes, columns = vector elements) and the
// RL/CL/PL product are the paper's; the port-level write/read interface and
// the constant dummy row are this design's own choices.
module imc_bitcell_array #(
  parameter int ROWS = mf_pkg::ROWS,
  parameter int COLS = 2 * mf_pkg::M
) (
  input  logic                       clk,
  // write port: one half-row
  input  logic                       we,
  input  logic [$clog2(ROWS)-1:0]    waddr,
  input  logic                       whalf,
  input  logic [COLS/2-1:0]          wdata,
  // read port: one full row
  input  logic [$clog2(ROWS)-1:0]    raddr,
  output logic [COLS-1:0]            rdata,
  // product port
  input  logic [ROWS:0]              rl,        // one-hot row lines, bit ROWS = dummy row
  input  logic [COLS-1:0]            cl,        // column lines
  output logic [COLS-1:0]            discharge  // PL discharged per column
);
  localparam int H = COLS / 2;

  logic [COLS-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    if (we) begin
      if (whalf) cells[waddr][COLS-1:H] <= wdata;
      else       cells[waddr][H-1:0]    <= wdata;
    end
  end

  assign rdata = cells[raddr];

  always_comb begin
    discharge = '0;
    for (int r = 0; r < ROWS; r++)
      if (rl[r]) discharge |= cells[r] & cl;
    if (rl[ROWS]) discharge |= cl;   // dummy row: all cells store one
  end

endmodule
