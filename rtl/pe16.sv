// pe16: flat 16-bit priority encoder.
//
// Returns in q the index of the highest-numbered set bit of d (d[15] highest
// priority). It is built directly from the 16-bit truth table as four
// factored sum-of-products equations, written here term for term:
//   Q0 = ~D14~D13~D12 ( ~D11~D10~D9~D8 ( ~D7~D6~D5~D4 (~D2 D1 + D3)
//                                         + (~D6 D5 + D7) )
//                       + ~D10 D9 + D11 )
//        + ~D14 D13 + D15
//   Q1 = ~D13~D12 ( ~D11~D10~D9~D8 ( ~D7~D6~D5~D4 (D2 + D3) + D6 + D7 )
//                   + D10 + D11 ) + D14 + D15
//   Q2 = ~D11~D10~D9~D8 ( (D7 + D6) + ~D7~D6 (D5 + D4) ) + D12 + D13 + D14 + D15
//   Q3 = D8 + ... + D15
// Some factors are redundant for the function (for instance ~D7~D6~D5~D4 in
// Q0); they are kept as published because they describe the gate structure.
// d[0] appears in no equation: an all-zero input and an input with only
// bit 0 set both give q = 0. Purely combinational, no clock.
module pe16 (
  input  logic [15:0] d,
  output logic [3:0]  q
);

  logic hi_zero;   // ~D11 ~D10 ~D9 ~D8
  logic mid_zero;  // ~D7 ~D6 ~D5 ~D4

  always_comb begin
    hi_zero  = ~d[11] & ~d[10] & ~d[9] & ~d[8];
    mid_zero = ~d[7] & ~d[6] & ~d[5] & ~d[4];

    q[0] = (~d[14] & ~d[13] & ~d[12] &
            ((hi_zero & ((mid_zero & ((~d[2] & d[1]) | d[3])) |
                         ((~d[6] & d[5]) | d[7])))
             | (~d[10] & d[9]) | d[11]))
           | (~d[14] & d[13]) | d[15];

    q[1] = (~d[13] & ~d[12] &
            ((hi_zero & ((mid_zero & (d[2] | d[3])) | d[6] | d[7]))
             | d[10] | d[11]))
           | d[14] | d[15];

    q[2] = (hi_zero & ((d[7] | d[6]) | (~d[7] & ~d[6] & (d[5] | d[4]))))
           | d[12] | d[13] | d[14] | d[15];

    q[3] = |d[15:8];
  end

endmodule
