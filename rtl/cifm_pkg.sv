// cifm_pkg: types and constants shared by the combined integer / floating-point
// multiplier (CIFM).
//
// The 24x24 multiply block is split into four 12x12 modules (AL*BL, AL*BH,
// AH*BL, AH*BH), each split into nine 4x4 multipliers plus one redundant 4x4
// multiplier. The repair request of one 12x12 module is the triple (Aij, Bij, E)
// of the paper's self-repair scheme; its encoding (a 2-bit group index for A and
// for B, 0 = group 1 = least significant nibble) is this design's choice.
package cifm_pkg;

  // Operating mode of the combined multiplier.
  typedef enum logic {
    MODE_INT = 1'b0,  // unsigned 24x24 -> 48-bit integer product
    MODE_FP  = 1'b1   // IEEE-754 single-precision product
  } mode_e;

  // Repair request for one 12x12 module: replace 4x4 cell (A group a_sel,
  // B group b_sel) by the redundant multiplier when en is set. a_sel/b_sel
  // of 3 name no cell, so nothing is replaced.
  typedef struct packed {
    logic       en;     // E: repair enable
    logic [1:0] a_sel;  // Aij: A nibble index (0 = A1 .. 2 = A3)
    logic [1:0] b_sel;  // Bij: B nibble index (0 = B1 .. 2 = B3)
  } repair_t;

  localparam int unsigned MANT_W   = 24;  // mantissa incl. hidden bit
  localparam int unsigned HALF_W   = 12;  // width of AH, AL, BH, BL
  localparam int unsigned NIB_W    = 4;   // width of a cell operand
  localparam int unsigned N_NIB    = 3;   // nibbles per 12-bit half
  localparam int unsigned N_CELL   = 9;   // 4x4 cells per 12x12 module
  localparam int unsigned N_SUB    = 4;   // 12x12 modules per 24x24 block

  // Index of the 12x12 modules inside the 24x24 block.
  localparam int unsigned SUB_LL = 0;  // AL * BL, weight 2^0
  localparam int unsigned SUB_LH = 1;  // AL * BH, weight 2^12
  localparam int unsigned SUB_HL = 2;  // AH * BL, weight 2^12
  localparam int unsigned SUB_HH = 3;  // AH * BH, weight 2^24


endpackage
