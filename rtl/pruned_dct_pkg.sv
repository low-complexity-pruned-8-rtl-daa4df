// Shared constants of the pruned 8-point DCT approximation cores.
//
// Both cores take an 8-point vector (N = 8) and return only the K lowest
// transform coefficients: K = 4 for the pruned LODCT (matrix W<4>) and
// K = 6 for the pruned MRDCT (matrix M<6>). Both are built as three register
// stages, so a vector's coefficients leave PIPE_LATENCY clocks after it
// enters, and a new vector may enter every clock. The value of K for each
// transform follows the paper; the output width rule (input width plus
// GROWTH bits, enough for a sum of eight full-scale inputs) is this design's
// own choice.
package pruned_dct_pkg;

  localparam int unsigned N            = 8;  // transform length
  localparam int unsigned K_LODCT      = 4;  // coefficients kept by W<4>
  localparam int unsigned K_MRDCT      = 6;  // coefficients kept by M<6>
  localparam int unsigned PIPE_LATENCY = 3;  // register stages per core
  localparam int unsigned GROWTH       = 3;  // log2(N): worst-case word growth

endpackage
