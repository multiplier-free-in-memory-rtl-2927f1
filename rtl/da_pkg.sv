// da_pkg -- constants shared by the distributed-arithmetic (DA) CONV1 engine.
//
// The engine multiplies a 25-element vector of unsigned 8-bit pixels (one 5x5
// image window) by a fixed 25x6 matrix of signed 8-bit weights (six 5x5
// filters). The matrix is split into three row slices of 8, 8 and 9 rows; each
// slice has its own processing memory array (PMA) that stores, at every
// address, the sums of the weights selected by the address bits, 11 bits per
// column. The numbers below are those of that configuration; all widths of the
// adder chain (12, 13 and 21 bits) follow from them.
package da_pkg;

  localparam int unsigned X_W   = 8;   // pixel width (unsigned)
  localparam int unsigned W_W   = 8;   // weight width (signed INT8)
  localparam int unsigned MR_W  = 11;  // stored sum of weights per column
  localparam int unsigned NCOL  = 6;   // weight-matrix columns = filters
  localparam int unsigned NIN   = 25;  // vector length = 5x5 window
  localparam int unsigned K     = 5;   // filter side
  localparam int unsigned A1    = 8;   // address bits of PMA-1 (X1..X8)
  localparam int unsigned A2    = 8;   // address bits of PMA-2 (X9..X16)
  localparam int unsigned A3    = 9;   // address bits of PMA-3 (X17..X25)
  localparam int unsigned S12_W = 12;  // MR1 + MR2
  localparam int unsigned S13_W = 13;  // MR1 + MR2 + MR3
  localparam int unsigned ACC_W = 21;  // add-and-shift accumulator / Y
  localparam int unsigned IMG   = 32;  // input feature map side
  localparam int unsigned OUT   = IMG - K + 1;  // 28, output feature map side

  typedef logic signed [MR_W-1:0]  mr_t;
  typedef logic signed [ACC_W-1:0] y_t;

endpackage
