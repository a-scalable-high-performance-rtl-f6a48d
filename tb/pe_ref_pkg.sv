// pe_ref_pkg: reference model for the priority-encoder testbenches.
//
// highest() scans a word of up to 4096 bits from the top down and returns the
// position of the first set bit, or -1 when no bit is set. It is written as a
// plain loop, independent of the gate-level structure under test.
package pe_ref_pkg;

  localparam int unsigned MAXW = 4096;

  function automatic int highest(input logic [MAXW-1:0] v, input int unsigned width);
    for (int i = int'(width) - 1; i >= 0; i--) begin
      if (v[i]) return i;
    end
    return -1;
  endfunction

  // Random word of the given width with 1..4 set bits (sparse) or about half
  // of its bits set (dense).
  function automatic logic [MAXW-1:0] rand_word(input int unsigned width, input bit dense);
    logic [MAXW-1:0] v;
    v = '0;
    if (dense) begin
      for (int i = 0; i < int'(width); i++) v[i] = 1'($urandom_range(0, 1));
    end else begin
      int unsigned k;
      k = $urandom_range(1, 4);
      for (int unsigned j = 0; j < k; j++) v[$urandom_range(0, width - 1)] = 1'b1;
    end
    return v;
  endfunction

endpackage
