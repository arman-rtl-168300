// arman_pkg -- types and constants shared by the ARMAN accelerator.
//
// The accelerator is four BxB output-stationary systolic arrays (one per
// monolithic-3D tier) that a network of multiplexer/demultiplexer groups can
// join into larger arrays. The package holds the operand widths (8-bit
// multipliers, 32-bit accumulators), the default base size (64), the
// arrangement encoding and the selector table of the ten Mux/DeMux groups.
//
// The eight arrangements and their selector values are the paper's (its
// Table 1); a '-' entry of that table (array unused) is stored here as 1 and
// the array is switched off through the active mask. The numeric encoding of
// the arrangement and the signed 8-bit operand format are this design's own.
package arman_pkg;

  localparam int unsigned DW      = 8;   // multiplier operand width
  localparam int unsigned AW      = 32;  // accumulator / output width
  localparam int unsigned BASE    = 64;  // PEs per side of one array
  localparam int unsigned NGROUPS = 10;  // Mux/DeMux groups of the interconnect
  localparam int unsigned NARR    = 4;   // arrays (tiers)

  // Arrangement: rows x columns of arrays as named in the selector table.
  typedef enum logic [2:0] {
    ARR_2X2 = 3'd0,
    ARR_1X4 = 3'd1,
    ARR_4X1 = 3'd2,
    ARR_1X3 = 3'd3,
    ARR_3X1 = 3'd4,
    ARR_1X2 = 3'd5,
    ARR_2X1 = 3'd6,
    ARR_1X1 = 3'd7
  } arrangement_e;

  // Selector of group g (1..10) is bit g-1.
  typedef logic [NGROUPS-1:0] group_sel_t;

  // Arrays: 0 top-left, 1 top-right, 2 bottom-left, 3 bottom-right.
  typedef logic [NARR-1:0] array_mask_t;

  typedef enum logic [1:0] {
    PE_HOLD    = 2'd0,
    PE_CLEAR   = 2'd1,
    PE_COMPUTE = 2'd2,
    PE_DRAIN   = 2'd3
  } pe_mode_e;

  // Table 1, columns 1..10 written left to right (bit 0 = group 1).
  function automatic group_sel_t sel_table(arrangement_e a);
    logic [9:0]  row;   // row[9] is group 1
    group_sel_t  s;
    case (a)
      ARR_2X2: row = 10'b1_1_1_1_1_1_1_1_1_1;
      ARR_1X4: row = 10'b1_0_1_1_0_1_1_1_1_1;
      ARR_4X1: row = 10'b0_1_1_1_1_0_1_1_1_1;
      ARR_1X3: row = 10'b1_0_1_1_0_1_1_1_1_1; // groups 6..8 are '-'
      ARR_3X1: row = 10'b1_1_1_1_1_0_1_1_1_1; // groups 1..3 are '-'
      ARR_1X2: row = 10'b1_0_1_1_0_1_0_1_1_0;
      ARR_2X1: row = 10'b0_1_0_0_1_0_1_0_0_1;
      default: row = 10'b0_0_0_0_0_0_0_0_0_0; // 1x1 unified
    endcase
    for (int g = 0; g < 10; g++) s[g] = row[9-g];
    return s;
  endfunction

  // Arrays in use: 1x3 leaves the bottom-left array idle, 3x1 the top-left.
  function automatic array_mask_t active_table(arrangement_e a);
    case (a)
      ARR_1X3: return 4'b1011;
      ARR_3X1: return 4'b1110;
      default: return 4'b1111;
    endcase
  endfunction

endpackage
