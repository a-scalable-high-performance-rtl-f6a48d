// pe4: flat 4-bit priority encoder.
//
// Returns in q the index of the highest-numbered set bit of d; d[3] has the
// highest priority. The two sum-of-products equations are the ones derived
// from the 4-bit truth table:
//   Q0 = ~D2 & D1 | D3
//   Q1 =  D2 | D3
// d[0] appears in no equation: an all-zero input and an input with only
// bit 0 set both give q = 0. Callers that need to tell these apart use a
// separate OR of the input (the match flag of the larger encoders). Purely
// combinational, no clock.
module pe4 (
  input  logic [3:0] d,
  output logic [1:0] q
);

  always_comb begin
    q[0] = (~d[2] & d[1]) | d[3];
    q[1] = d[2] | d[3];
  end

endmodule
