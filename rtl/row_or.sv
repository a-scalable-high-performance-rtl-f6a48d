// row_or: row-status OR gates of the 1-D to 2-D conversion.
//
// The N*M-bit input is viewed as N rows of M bits, row i being
// d[i*M +: M] (bit k lies in row k / M, column k % M). Each row is reduced by
// one M-input OR gate; dor[i] is 1 when row i holds any set bit. With M = 4
// this is the bank of OR4 gates in front of every 1-D to 2-D encoder level.
// Purely combinational.
module row_or #(
  parameter int unsigned N = 1024,  // rows
  parameter int unsigned M = 4      // columns (bits per row)
) (
  input  logic [N*M-1:0] d,
  output logic [N-1:0]   dor
);

  for (genvar i = 0; i < N; i++) begin : g_row
    assign dor[i] = |d[i*M +: M];
  end

endmodule
