// mxu_pkg: widths and sizes shared by the multi-precision systolic array.
//
// The array multiplies 8-bit digits in every processing element and carries
// 32-bit partial sums down each column, as in a TPU-style weight-stationary
// matrix unit. The last row of processing elements (the reconstruction PEs)
// keeps one radix-2^DIGIT_W digit per column and passes the rest of the column
// sum to its right neighbour as a carry. The 128x128 array size is the main
// evaluated configuration; DIGIT_W = 8 follows the statement that each
// reconstruction PE "retains the least significant byte".
package mxu_pkg;
  parameter int unsigned A_W     = 8;    // streaming operand / weight digit width
  parameter int unsigned S_W     = 32;   // column partial-sum width
  parameter int unsigned DIGIT_W = 8;    // digit kept per column by a reconstruction PE
  parameter int unsigned ROWS    = 128;  // array rows (the last one is the RPE row)
  parameter int unsigned COLS    = 128;  // array columns
endpackage
