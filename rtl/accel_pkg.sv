// accel_pkg: types and constants shared by the bit-serial CNN accelerator.
//
// The accelerator runs every layer of a 1x1-convolution CNN on one systolic
// array of Selector-Accumulator (SAC) cells. Weights are signed powers of two,
// stored per cell as an 8-bit packed code; data are 8-bit unsigned and travel
// through the array bit-serially, least significant bit first.
//
// Defined here:
//   * wcode_t  - the packed weight: 3-bit channel index, sign, 4-bit magnitude
//                (0 = zero weight, 1..7 = 2^-6 .. 2^0). The field layout and the
//                magnitude table follow the paper's packing figure; sign = 1
//                means positive, read off the printed examples there.
//   * lane_t   - one stage of a column's register chain: 8 channel data bits,
//                8 per-channel "word is zero" flags and a word-start flag. The
//                flags are this design's way of marking word boundaries and
//                zero inputs; the paper does not say how this is done.
//   * instr_t  - the instruction word. Bits 33:0 follow the paper's
//                instruction layout; bit 34 (last tile of a layer) is an
//                addition of this design. All size fields hold size minus one.
//   * shdir_e  - channel shift direction (encoding chosen here).
package accel_pkg;

  localparam int LANES   = 8;   // input channels combined into one column
  localparam int DW      = 8;   // data width in bits
  localparam int NSHIFT  = 7;   // power-of-two weight levels 2^-6 .. 2^0
  localparam int FRAC    = 6;   // -log2 of the smallest weight

  typedef struct packed {
    logic [2:0] idx;   // channel within the column (0..7)
    logic       sign;  // 1 = positive, 0 = negative
    logic [3:0] mag;   // 0 = zero, k = 2^(k-7) for k = 1..7
  } wcode_t;

  typedef struct packed {
    logic             start;  // first bit of a data word
    logic [LANES-1:0] zf;     // whole word of that channel is zero
    logic [LANES-1:0] d;      // data bit of each channel
  } lane_t;

  typedef struct packed {
    logic [1:0] col_split;  // [36:35] this design: log2(8/g), g = channels per column
    logic       last_tile;  // [34]    this design: last tile of the layer
    logic [7:0] in_h;       // [33:26] input height - 1
    logic [7:0] in_w;       // [25:18] input width - 1
    logic [6:0] sa_h;       // [17:11] rows of the tile - 1
    logic [6:0] sa_w;       // [10:4]  columns of the tile - 1
    logic       linear;     // [3]     fully connected layer
    logic       strided;    // [2]     stride-2 convolution
    logic       matmul;     // [1]     matrix multiply
    logic       load;       // [0]     load parameters
  } instr_t;

  typedef enum logic [2:0] {
    SH_NONE  = 3'd0,  // out(h,w) = in(h,w)
    SH_UP    = 3'd1,  // out(h,w) = in(h+1,w)
    SH_DOWN  = 3'd2,  // out(h,w) = in(h-1,w)
    SH_LEFT  = 3'd3,  // out(h,w) = in(h,w+1)
    SH_RIGHT = 3'd4   // out(h,w) = in(h,w-1)
  } shdir_e;

  // Parameter-buffer write select.
  typedef enum logic [1:0] {
    PB_WEIGHT = 2'd0,
    PB_BIAS   = 2'd1,
    PB_DIR    = 2'd2
  } pbsel_e;

  // Weight magnitude code -> tap offset on the register chain (shift amount).
  function automatic logic [2:0] mag_to_shift(input logic [3:0] mag);
    return 3'(mag - 4'd1);
  endfunction

  function automatic logic mag_is_zero(input logic [3:0] mag);
    return (mag == 4'd0) || (mag > 4'd7);
  endfunction

endpackage
