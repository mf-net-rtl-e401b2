// mf_pkg -- constants and types shared by the multiplication-free
// compute-in-SRAM macro.
//
// A uArray stores weights in sign-magnitude form, one bit plane per SRAM row:
// row 0 holds the sign bits (1 = negative) and rows 1..7 the magnitude bits
// 0..6, least significant first, as in the mapping example of the design.
// A ninth, dummy row reads as all ones and serves the shared sum |x|.
// Each half of a uArray has M = 31 columns plus one dummy product line, so
// the SRAM-immersed SA-ADC resolves M+1 = 32 levels with 5 bits.
// The row count, the 31 columns per half and the 5-bit ADC follow the paper's
// 8x62 uArray; the output width of 16 bits is also the paper's. The row
// order, the dummy-row index and the enums are this design's own choices.
// Lint note: linted on its own, the package reports its constants as unused;
// they are the parameter defaults of the modules that import them.
package mf_pkg;

  localparam int ROWS     = 8;   // weight rows per uArray (sign + 7 magnitude)
  localparam int M        = 31;  // columns per half
  localparam int ADC_BITS = 5;   // SA-ADC resolution, log2(M+1)
  localparam int XBITS    = 8;   // input precision (sign + 7 magnitude)
  localparam int OUT_W    = 16;  // w (+) x result width

  // What a bit plane computes (Eq. 2 of the operator reformulation)
  typedef enum logic [1:0] {
    PK_WMAG = 2'd0,  // step(x) on CL against one |w| row
    PK_WSGN = 2'd1,  // one |x| bit plane on CL against the sign row
    PK_XSUM = 2'd2   // one |x| bit plane on CL against the dummy row
  } plane_kind_t;

  // Controller states; one MAV cycle, then two cycles per ADC bit
  typedef enum logic [2:0] {
    ST_IDLE    = 3'd0,
    ST_MAV     = 3'd1,  // precharge, product, average
    ST_ADC_PCH = 3'd2,  // precharge DAC product lines from the SA register
    ST_ADC_CMP = 3'd3,  // sum, compare, update SA register
    ST_DONE    = 3'd4
  } ctrl_state_t;

endpackage
