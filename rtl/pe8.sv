// pe8: flat 8-bit priority encoder.
//
// Returns in q the index of the highest-numbered set bit of d (d[7] highest
// priority). The equations are the factored sum-of-products forms of the
// 8-bit truth table:
//   Q0 = ~D6 & (~D4 & ~D2 & D1 | ~D4 & D3 | D5) | D7
//   Q1 = ~D5 & ~D4 & (D2 | D3) | D6 | D7
//   Q2 = D4 | D5 | D6 | D7
// d[0] appears in no equation: an all-zero input and an input with only
// bit 0 set both give q = 0. Purely combinational, no clock.
module pe8 (
  input  logic [7:0] d,
  output logic [2:0] q
);

  always_comb begin
    q[0] = (~d[6] & ((~d[4] & ~d[2] & d[1]) | (~d[4] & d[3]) | d[5])) | d[7];
    q[1] = (~d[5] & ~d[4] & (d[2] | d[3])) | d[6] | d[7];
    q[2] = d[4] | d[5] | d[6] | d[7];
  end

endmodule
