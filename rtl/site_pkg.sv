// site_pkg -- shared types and constants of the signed-ternary compute-in-memory core.
//
// A ternary value (weight, input or activation) is carried as a 2-bit differential code, the
// same way the memory stores a weight in its two bit cells M1/M2 and drives an input on its two
// read wordlines: bit 0 is the "positive" side (M1, RWL1), bit 1 the "negative" side (M2, RWL2).
//   2'b00 = 0, 2'b01 = +1, 2'b10 = -1, 2'b11 is never produced and is read as 0.
// The differential code follows the weight/input tables of the cell; the packing into a 2-bit
// enum is this design's own.  Sizes default to the 256x256 array with 16 rows activated per
// access, 32 PCUs per array and 32 arrays.
package site_pkg;

  typedef enum logic [1:0] {
    TRIT_Z = 2'b00,  // 0
    TRIT_P = 2'b01,  // +1  (M1 = 1, M2 = 0 / RWL1 high)
    TRIT_N = 2'b10   // -1  (M1 = 0, M2 = 1 / RWL2 high)
  } trit_e;

  // Which cross-coupling scheme the arrays use.
  typedef enum logic {
    SITE_I  = 1'b0,  // two extra transistors per cell, voltage sensing, two ADCs per column
    SITE_II = 1'b1   // four shared transistors per 16-cell sub-column, current sensing, one ADC
  } flavor_e;

  typedef enum logic [1:0] {
    OP_WRITE = 2'd0,  // program one row of one array
    OP_READ  = 2'd1,  // read one row of one array (single-row access with input +1)
    OP_MAC   = 2'd2   // full dot product of every array with its input vector
  } op_e;

  localparam int unsigned SITE_NR      = 256;  // rows per array
  localparam int unsigned SITE_NC      = 256;  // columns per array
  localparam int unsigned SITE_NA      = 16;   // rows activated per access
  localparam int unsigned SITE_N_PCU   = 32;   // peripheral compute units per array
  localparam int unsigned SITE_N_ARR   = 32;   // arrays in the core
  localparam int unsigned SITE_ADC_MAX = 8;    // largest value the ADC + extra sense amp resolve
  localparam int unsigned SITE_CNT_W   = 5;    // width of a bitline step count (0..NA)
  localparam int unsigned PSUM_W  = 5;    // signed column output, -8..+8
  localparam int unsigned SITE_ACC_W   = 16;   // PCU accumulator width

  // One command to the core. Field widths cover up to 256 arrays and 65536 rows; the
  // controller uses the low bits it needs.
  typedef struct packed {
    op_e         op;
    logic [7:0]  arr;  // target array of WRITE / READ
    logic [15:0] row;  // target row of WRITE / READ
    logic        clr;  // MAC: clear the accumulators first (else keep adding)
  } site_cmd_t;

  // Integer value of a trit.
  function automatic int trit_val(logic [1:0] t);
    case (t)
      2'b01:   return 1;
      2'b10:   return -1;
      default: return 0;
    endcase
  endfunction

  // Trit of an integer in -1..+1 (anything else saturates by sign).
  function automatic logic [1:0] val_trit(int v);
    if (v > 0) return 2'b01;
    if (v < 0) return 2'b10;
    return 2'b00;
  endfunction

endpackage
