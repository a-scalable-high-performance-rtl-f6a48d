// la_mux: look-ahead row multiplexer.
//
// Picks, out of N rows of W bits, the highest-numbered row whose row-status
// bit is set, and returns it in y. The select lines come from the row status
// dor itself rather than from the encoded row index, so the multiplexer works
// in parallel with the row-index encoder instead of waiting for it.
//
// Structure: a balanced tree of 2:1 multiplexers. A node joining a lower half
// and an upper half of its input range passes the upper half when any row of
// that upper half is non-empty, i.e. its select is the OR of dor over the
// upper half. For N = 8 this gives exactly the published MUX8: the first
// level is selected by DOR7, DOR5, DOR3, DOR1, the second by OR(DOR7:6) and
// OR(DOR3:2), the root by OR(DOR7:4). The same rule is used for every N
// (a power of two); the OR gates of the select tree are shared between levels.
//
// The tree is stored as a heap: node n has children 2n+1 (lower rows) and
// 2n+2 (upper rows); rows occupy nodes N-1 .. 2N-2; node 0 is the root.
// orv[n] is the OR of dor over the rows below node n. When dor is all zero
// the tree passes row 0. Purely combinational.
module la_mux #(
  parameter int unsigned N = 1024,  // rows, a power of two >= 2
  parameter int unsigned W = 4      // bits per row
) (
  input  logic [N*W-1:0] d,    // row i is d[i*W +: W]
  input  logic [N-1:0]   dor,  // row status, normally dor[i] = |row i
  output logic [W-1:0]   y     // selected row
);

  if (!pe_pkg::is_pow2(N) || N < 2) begin : g_bad_n
    $error("la_mux: N must be a power of two >= 2");
  end

  localparam int unsigned NODES = 2 * N - 1;

  logic [W-1:0] mv  [NODES];  // row passed up by each node
  logic         orv [NODES];  // OR of dor below each node

  for (genvar i = 0; i < N; i++) begin : g_leaf
    assign mv[N-1+i]  = d[i*W +: W];
    assign orv[N-1+i] = dor[i];
  end

  for (genvar n = 0; n < N - 1; n++) begin : g_node
    assign orv[n] = orv[2*n+1] | orv[2*n+2];
    assign mv[n]  = orv[2*n+2] ? mv[2*n+2] : mv[2*n+1];
  end

  assign y = mv[0];

endmodule
