// dip_pkg -- constants shared by the DiP (diagonal-input, permutated-weight
// stationary) systolic-array core.
//
// The array size and the INT8 operand width are the figures of the main
// configuration (a 64x64 array of INT8 multiply-accumulate PEs). The
// accumulator width is this design's own choice: 32 bits hold the sum of any
// number of 64-term INT8 dot products up to 2^17 tiles without overflow.
// S_MAC is the number of pipeline stages in each PE's multiply-accumulate
// path (multiplier register, then adder register); the latency of one tile
// is 2*N + S_MAC - 2 clock edges.
package dip_pkg;

  parameter int unsigned DIP_N      = 64;  // rows = columns of the PE array
  parameter int unsigned DIP_DATA_W = 8;   // input and weight width (INT8)
  parameter int unsigned DIP_ACC_W  = 32;  // psum / output width
  parameter int unsigned DIP_S_MAC  = 2;   // MAC pipeline stages per PE

  // Latency of one N-row input tile: edges from the one that registers the
  // first input row in row 0 to the one that registers the last output row.
  function automatic int unsigned dip_tile_latency(int unsigned n);
    return 2 * n + DIP_S_MAC - 2;
  endfunction

  // Row index of the natural weight matrix that the weight permutation puts
  // at (row j, column c) of the array: W_perm[j][c] = W[(j + c) mod n][c].
  function automatic int unsigned dip_perm_row(int unsigned j, int unsigned c,
                                               int unsigned n);
    return (j + c) % n;
  endfunction

endpackage
