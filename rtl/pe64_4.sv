// pe64_4: 64-bit priority encoder by 1-D to 2-D conversion, PE64(4).
//
// q is the index of the highest-numbered set bit of d; match is 1 when d has
// any set bit (q is 0 when it has none).
//
// The 64 bits are viewed as 16 rows of four bits, bit k at row k >> 2,
// column k & 3. Three paths start together from the input:
//   * row_or   - 16 OR4 gates give the row status dor;
//   * PE_N     - the flat 16-bit encoder pe16,
//                encodes dor into the 4-bit row index;
//   * la_mux   - the look-ahead multiplexer, selected by dor itself and not by
//                the row index, passes the highest non-empty row to a flat
//                pe4 (PE_M), which gives the 2-bit column index.
// q = {row, column} is k = row * 4 + column formed by wiring. The longest
// path is one OR4 plus the slower of PE_N and (multiplexer + PE4).
// match is an OR of the row status.
//
// The organisation (four columns, PE_N from the next smaller size down to a
// flat PE16 or PE8, look-ahead select) follows the published architecture;
// the look-ahead multiplexer for 16 rows applies the published 8-row select
// rule to a tree of any power-of-two size. Purely combinational: no clock,
// no reset, no parameters.
module pe64_4
  import pe_pkg::*;
(
  input  logic [63:0] d,
  output logic [5:0] q,
  output logic        match
);

  logic [15:0]          dor;   // row status
  logic [3:0]          row;   // row index from PE_N
  logic [COL_M-1:0]    dmux;  // highest non-empty row
  logic [COL_BITS-1:0] col;   // column index from PE_M

  row_or #(.N(16), .M(COL_M)) u_row_or (
    .d   (d),
    .dor (dor)
  );

  // PE_N: row index from the row status.
  pe16 u_pen (
    .d (dor),
    .q (row)
  );

  la_mux #(.N(16), .W(COL_M)) u_mux (
    .d   (d),
    .dor (dor),
    .y   (dmux)
  );

  // PE_M: column index within the selected row.
  pe4 u_pem (
    .d (dmux),
    .q (col)
  );

  assign q     = {row, col};
  assign match = |dor;

endmodule
