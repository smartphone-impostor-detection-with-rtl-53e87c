// sid_pkg: types and constants shared by the SID (Smartphone Impostor Detector)
// modules.
//
// The macro-instruction layout follows the paper's 128-bit format: Mode [127:124],
// Length [123:110], Width [109:96], Addr_x [95:64], Addr_y [63:32], Addr_z [31:0].
// The numeric values of the operation modes, the END mode that stops the program
// and the Q16.16 position of the binary point are this design's choices; the paper
// names the modes and says the datapath is 32-bit fixed point.
//
// ctl_t is the per-iteration control word that travels with the data from the
// decode stage down to the write-back stage. It carries no per-lane fields, so it
// does not depend on the number of tracks.
package sid_pkg;

  localparam int DATA_W = 32;   // element width (paper: 32-bit fixed point)
  localparam int FRAC   = 16;   // fraction bits (design choice)
  localparam int INST_W = 128;  // macro-instruction width
  localparam int LEN_W  = 14;   // Length and Width fields
  localparam int ADDR_W = 32;   // Addr_x / Addr_y / Addr_z fields

  // Fixed-point 1.0, written by the set-greater-than modes.
  localparam logic [DATA_W-1:0] FX_ONE = DATA_W'(1) << FRAC;

  typedef logic signed [DATA_W-1:0] word_t;

  typedef enum logic [3:0] {
    M_VADD    = 4'd0,
    M_VSUB    = 4'd1,
    M_VMUL    = 4'd2,
    M_VSGT    = 4'd3,
    M_VSIG    = 4'd4,
    M_VTANH   = 4'd5,
    M_VEXP    = 4'd6,
    M_MVMUL   = 4'd7,
    M_VSSGT   = 4'd8,
    M_VMAXABS = 4'd9,
    M_VSQNORM = 4'd10,
    M_END     = 4'd15
  } mode_e;

  typedef struct packed {
    logic [3:0]        mode;    // [127:124]
    logic [LEN_W-1:0]  length;  // [123:110]
    logic [LEN_W-1:0]  width;   // [109:96]
    logic [ADDR_W-1:0] addr_x;  // [95:64]
    logic [ADDR_W-1:0] addr_y;  // [63:32]
    logic [ADDR_W-1:0] addr_z;  // [31:0]
  } inst_t;

  // One issued iteration (one cycle of the iteration FSM).
  typedef struct packed {
    logic              valid;
    mode_e             mode;
    logic              first;     // first iteration of the instruction
    logic              last;      // last iteration of the instruction
    logic              sl_first;  // first column slice
    logic              sl_last;   // last column slice
    logic [LEN_W-1:0]  row;       // matrix row (scratchpad entry) of this iteration
    logic [LEN_W-1:0]  nval;      // valid lanes in this iteration (<= tracks)
    logic [7:0]        ylane;     // lane of the VSsgt scalar inside its line
    logic [ADDR_W-1:0] zaddr;     // element write address
  } ctl_t;

  // Modes whose result is a single element written after the last slice.
  function automatic logic is_reduce(mode_e m);
    return (m == M_MVMUL) || (m == M_VSQNORM) || (m == M_VMAXABS);
  endfunction

  // Modes that read the y operand.
  function automatic logic uses_y(mode_e m);
    return (m == M_VADD) || (m == M_VSUB) || (m == M_VMUL) || (m == M_VSGT) ||
           (m == M_MVMUL) || (m == M_VSSGT);
  endfunction

  // Modes evaluated through the LUT (slope/intercept interpolation).
  function automatic logic is_lut(mode_e m);
    return (m == M_VSIG) || (m == M_VTANH) || (m == M_VEXP);
  endfunction

endpackage
