// pe_pkg: constants shared by the scalable priority-encoder modules.
//
// The encoder treats an L-bit word as a matrix of N rows by COL_M columns,
// bit k sitting at row k / COL_M, column k % COL_M. The column count is fixed
// at four at every level of the hierarchy, the configuration found fastest
// (a flat 4-bit encoder produces the column index). COL_M being a power of two
// lets the index be formed as {row, column} by plain wiring.
package pe_pkg;

  // Columns of the 2-D view at every level (M in k = i * M + j).
  localparam int unsigned COL_M    = 4;
  // Bits of the column index, log2(COL_M).
  localparam int unsigned COL_BITS = 2;

  // True when n is a power of two and at least 1.
  function automatic bit is_pow2(int unsigned n);
    return (n != 0) && ((n & (n - 1)) == 0);
  endfunction

endpackage
