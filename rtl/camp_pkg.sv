// camp_pkg -- types and constants shared by the CAMP (Cartesian Accumulative
// Matrix Pipeline) datapath.
//
// A camp operation multiplies a 4xK tile of A (column-major) by a Kx4 tile of
// B (row-major) held in two vector registers and accumulates the 4x4 product
// into a tile of 32-bit sums. Every lane sees a 64-bit slice of each operand:
// eight 8-bit elements or sixteen 4-bit elements. Element e of a register sits
// at bits [w*e+w-1 : w*e] for element width w (lower index in lower bits).
//
// The lane width, the 4x4 tile and the 32-bit result come from the
// architecture description; the mode encoding and the op bundle are this
// implementation's own choices.
package camp_pkg;

  localparam int LANE_W = 64;           // bits of each operand per lane
  localparam int TILE   = 4;            // m_R = n_R = 4
  localparam int NOUT   = TILE * TILE;  // 16 output elements
  localparam int NMUL   = 32;           // 8-bit hybrid multipliers per lane
  localparam int ACC_W  = 32;           // accumulator / result element width
  localparam int LSUM_W = 18;           // width of one intra-lane sum
  localparam int P8_W   = 16;           // 8x8 signed product
  localparam int P4_W   = 8;            // 4x4 signed product

  // Element width selected by the mode operand of the camp instruction.
  typedef enum logic {
    MODE_INT8 = 1'b0,
    MODE_INT4 = 1'b1
  } camp_mode_e;

  // Control that travels down the pipeline with each operation.
  typedef struct packed {
    logic       valid;     // an operation occupies this stage
    camp_mode_e mode;      // element width
    logic       acc_init;  // first op of a tile: load instead of accumulate
  } camp_op_t;

  typedef logic signed [P8_W-1:0]   p8_t;
  typedef logic signed [P4_W-1:0]   p4_t;
  typedef logic signed [LSUM_W-1:0] lsum_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Output element (r,c) of the 4x4 tile, stored column-major.
  function automatic int out_idx(int r, int c);
    return c * TILE + r;
  endfunction

endpackage
