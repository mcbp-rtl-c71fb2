// mcbp_pkg: sizes and helper functions shared by the MCBP accelerator RTL.
//
// The numbers follow the published configuration where one is given: group size
// m = 4 (so 16 possible 4-bit column vectors), 8-bit sign-magnitude weights,
// 8-bit activations, a 20-bit group-sum register, 64-row / 32-column PE tiles and
// 64-element query vectors for bit-grained prediction. The bit-slice selection
// for two-state coding (slices 3..7 compressed, 1, 2 and 8 stored raw, counted
// from 1 at the LSB) is also the published one.
package mcbp_pkg;

  localparam int unsigned M        = 4;        // group size (rows per group matrix)
  localparam int unsigned N_KEYS   = 1 << M;   // possible column vectors
  localparam int unsigned W_BITS   = 8;        // weight width, sign-magnitude
  localparam int unsigned MAG_BITS = W_BITS - 1;
  localparam int unsigned ACT_W    = 8;        // activation width (unsigned INT8)
  localparam int unsigned Z_W      = 20;       // group-sum register width
  localparam int unsigned Y_W      = Z_W + 3;  // sum of eight group sums
  localparam int unsigned N_GROUPS = 16;       // groups per PE (64 rows / m)
  localparam int unsigned T_M      = N_GROUPS * M;
  localparam int unsigned COLS     = 32;       // columns per CAM load (bitmap slice)
  localparam int unsigned IDX_W    = $clog2(COLS);
  localparam int unsigned ACC_W    = 32;       // output accumulator width

  // 1 for slices (0-based bit position) whose bit-slice matrix is BSTC-coded.
  localparam logic [W_BITS-1:0] BSTC_CODED = 8'b0111_1100;

  typedef logic [M-1:0]     col_t;   // one 4-bit column of a group matrix, bit 3 = row 0
  typedef logic [ACT_W-1:0] act_t;
  typedef logic [Z_W-1:0]   zsum_t;

  // Sum of group-sum registers for output row r of a group: all keys k whose
  // bit (M-1-r) is set. This is the enumeration-matrix product of BRCR.
  function automatic logic key_has_row(input int unsigned key, input int unsigned r);
    return ((key >> (M - 1 - r)) & 1) == 1;
  endfunction

endpackage
