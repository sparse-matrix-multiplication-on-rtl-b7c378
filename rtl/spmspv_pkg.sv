// spmspv_pkg -- shared constants and types of the CAM-based sparse matrix by
// sparse vector (SpMSpV) accelerator.
//
// The defaults are the configuration evaluated for the resistive accelerator:
// k = 15 acceleration modules and CAM/RAM arrays of h = 512 rows.  The CAM word
// (index) width is w = 32 bits and the nonzero values are 32-bit IEEE-754 single
// precision numbers, as stated for the design-space exploration.  Memory address
// width and the length field widths are this design's own choices.
package spmspv_pkg;

  localparam int unsigned K_DEF  = 15;   // acceleration modules (k)
  localparam int unsigned H_DEF  = 512;  // CAM/RAM rows (h)
  localparam int unsigned IW_DEF = 32;   // CAM width w = log2(N), index width
  localparam int unsigned DW     = 32;   // value word: single-precision float
  localparam int unsigned AW_DEF = 32;   // memory element-address width (own choice)

  // IEEE-754 single-precision constants used by the FP units.
  localparam logic [31:0] FP_QNAN = 32'h7FC0_0000;

  typedef struct packed {
    logic        sign;
    logic [7:0]  exp;
    logic [22:0] frac;
  } fp32_t;

  // Controller commands.
  typedef enum logic [1:0] {
    CMD_NONE = 2'd0,
    CMD_INIT = 2'd1,   // store vector B in all modules
    CMD_MAIN = 2'd2    // multiply the rows of A by the stored B
  } cmd_e;

  // Controller states.
  typedef enum logic [1:0] {
    ST_IDLE = 2'd0,
    ST_INIT = 2'd1,
    ST_MAIN = 2'd2
  } ctrl_state_e;

endpackage
