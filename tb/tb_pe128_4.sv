// tb_pe128_4: self-checking test of the 128-bit 1-D to 2-D priority encoder.
// Stimuli: the all-zero word (match must be 0, q 0), every one-hot word,
// the all-ones word, pairs of set bits placed in the same row and in different
// rows (the winner's column lower than the loser's, so that a wrong row
// choice in the look-ahead multiplexer shows), and sparse and dense random
// words. q and match are compared with a top-down scan of the word.
module tb_pe128_4;
  import pe_ref_pkg::*;

  localparam int unsigned L  = 128;
  localparam int unsigned QB = 7;

  logic [L-1:0]  d;
  logic [QB-1:0] q;
  logic          match;
  int checks = 0, failures = 0;

  pe128_4 dut (.d(d), .q(q), .match(match));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [L-1:0] v);
    int h;
    d = v;
    #1;
    h = highest(MAXW'(v), L);
    checks++;
    if (match !== (h >= 0) || q !== QB'((h < 0) ? 0 : h)) begin
      failures++;
      $display("FAIL d=%h q=%0d match=%b expected q=%0d match=%b", v, q, match,
               (h < 0) ? 0 : h, h >= 0);
    end
  endtask

  initial begin
    apply('0);
    apply('1);
    for (int i = 0; i < int'(L); i++) apply(L'(1) << i);
    for (int t = 0; t < 1000; t++) begin
      int unsigned a, b;
      logic [L-1:0] v;
      // two bits in different rows: higher row, lower column wins
      a = $urandom_range(1, L / 4 - 1) * 4 + $urandom_range(0, 2);
      b = $urandom_range(0, a / 4 - 1) * 4 + $urandom_range(a % 4 + 1, 3);
      v = '0; v[a] = 1'b1; v[b] = 1'b1;
      apply(v);
      // two bits in one row
      a = $urandom_range(0, L / 4 - 1) * 4;
      v = '0; v[a + $urandom_range(0, 1)] = 1'b1; v[a + $urandom_range(2, 3)] = 1'b1;
      apply(v);
      apply(L'(rand_word(L, 1'b0)));
      apply(L'(rand_word(L, 1'b1)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
