// loom_pkg: constants and types shared by the Loom tile.
//
// The tile is a 128 x 16 grid of serial inner-product units (SIPs). Each SIP
// takes 16 one-bit weights and 16 one-bit activations per cycle. These sizes,
// and the 16-bit base precision of weights and activations, follow the paper.
// The output-register width OR_W and the encodings below are this design's own.
package loom_pkg;

  localparam int ROWS  = 128;  // SIP rows = filters processed at once
  localparam int COLS  = 16;   // SIP columns = windows (CVL) or staggered output groups (FCL)
  localparam int LANES = 16;   // weights / activations per SIP
  localparam int PBASE = 16;   // base precision of weights and activations
  localparam int OR_W  = 48;   // output register width
  localparam int PW_W  = $clog2(PBASE + 1);  // width of a precision value 1..16
  localparam int BIT_W = $clog2(PBASE);      // width of a bit position 0..15
  localparam int SET_W = 11;                 // up to 2047 sets of 16 inputs per output

  // Layer type: convolutional (weights shared by all columns) or
  // fully connected (columns staggered by one cycle).
  typedef enum logic [0:0] {MODE_CVL = 1'b0, MODE_FCL = 1'b1} mode_e;

  // What AC2 does with a finished AC1 result x:
  //   LOAD      OR <= x                 (first group of an output)
  //   SHIFT_ADD OR <= (OR << 1) + x     (first set of the next weight bit)
  //   ADD       OR <= OR + x            (further sets of the same weight bit)
  typedef enum logic [1:0] {
    AC2_NONE      = 2'd0,
    AC2_LOAD      = 2'd1,
    AC2_SHIFT_ADD = 2'd2,
    AC2_ADD       = 2'd3
  } ac2_op_e;

  // Control for one SIP column for one cycle.
  typedef struct packed {
    logic             wr_load;    // load the row weight bus into WR
    logic             ac1_first;  // first activation bit of a group
    logic             ac1_last;   // last activation bit of a group
    ac2_op_e          op;         // AC2 operation when the group completes
    logic             neg;        // group belongs to the weight MSB plane
    logic [BIT_W-1:0] abit;       // activation bit position fed this cycle
    logic             tag;        // ABin generation the column reads
    logic [BIT_W-1:0] wplane;     // weight bit plane being loaded
    logic [SET_W-1:0] wset;       // set of 16 inputs being loaded
    logic             cas_add;    // cascade step: OR += neighbour OR
  } col_ctl_t;

  // Layer / tile configuration.
  typedef struct packed {
    mode_e            mode;
    logic [PW_W-1:0]  pw;         // weight precision 1..16
    logic [PW_W-1:0]  pa;         // profile-derived activation precision 1..16 (CVL)
    logic             dyn_en;     // use the run-time detected precision (CVL)
    logic [SET_W-1:0] n_sets;     // sets of 16 inputs per output (per slice in FCL)
    logic [4:0]       sn;         // cascade slices per row: 1, 2, 4, 8 or 16 (FCL)
    logic             pool;       // SIP outputs max(own, left neighbour)
    logic [3:0]       prec;       // SIP output left shift
    logic [5:0]       afu_shift;  // activation function unit right shift
  } cfg_t;

endpackage
