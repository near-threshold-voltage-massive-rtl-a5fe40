// mxu_pkg: types and constants shared by the matrix accelerator.
//
// The accelerator works on fixed-size square tiles of DIM x DIM single
// precision floating-point numbers (IEEE-754 binary32). DIM = 16 is the tile
// size of the accelerator described for the Newton-iteration MIMO detector;
// the number format is this design's choice (the host software works in
// floating point). Matrices are stored and streamed row-major: element
// (row, col) has linear index row*DIM + col.
package mxu_pkg;

  // Tile size (rows = columns) of every matrix the accelerator handles.
  localparam int unsigned DIM    = 16;
  // Width of one matrix element and of the stream data bus.
  localparam int unsigned DATA_W = 32;

  typedef logic [DATA_W-1:0] fp32_t;

  // Operation selected with the start handshake.
  typedef enum logic [1:0] {
    OP_MUL = 2'd0,   // C = A * B
    OP_ADD = 2'd1,   // C = A + B
    OP_SUB = 2'd2    // C = A - B
  } mxu_op_e;

  localparam fp32_t FP32_POS_ZERO = 32'h0000_0000;
  localparam fp32_t FP32_QNAN     = 32'h7FC0_0000;

endpackage
