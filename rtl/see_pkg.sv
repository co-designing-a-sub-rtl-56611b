// see_pkg: types and helpers shared by the sparse dataflow accelerator.
//
// Every dataflow module passes one "token-feature" beat per non-zero pixel.
// The token carries the pixel coordinates and an end-of-frame flag; the
// feature vector travels beside it in the same valid/ready beat. Pixels of a
// frame always arrive in raster order (left to right, top to bottom) and the
// frame closes with a beat whose eof bit is set and whose coordinates and
// feature are ignored. The token fields follow the [.x, .y, .end] token of
// the architecture; the 8-bit coordinate widths and the separate end beat are
// choices of this implementation.
package see_pkg;

  parameter int unsigned XW = 8;   // x coordinate width: frames up to 256 wide
  parameter int unsigned YW = 8;   // y coordinate width: frames up to 256 high

  typedef struct packed {
    logic [YW-1:0] y;
    logic [XW-1:0] x;
    logic          eof;   // end of frame: the token's .end field
  } token_t;

  // Feature element and wide sum types. Packed vectors are declared as
  // s8_t [C-1:0] so that each selected element keeps its sign.
  typedef logic signed [7:0]  s8_t;
  typedef logic signed [31:0] s32_t;

  // Depthwise 3x3 kernel offset, row-major: 0 = (dy-1,dx-1) ... 4 = centre ... 8 = (dy+1,dx+1)
  typedef logic [3:0] koff_t;

  // Configuration addresses past the weights of a layer
  parameter int unsigned CFG_SCALE_LO = 0;
  parameter int unsigned CFG_SCALE_HI = 1;
  parameter int unsigned CFG_SHIFT    = 2;

endpackage
