// tb_pe_top: end-to-end test of the registered priority encoder at its
// default size (4096 bits, the PE4K(4) organisation).
//
// A new word is driven on d_in every clock cycle. The word sampled at rising
// edge t must have its index and match flag on q / match after edge t+1, so
// the check compares the outputs with the reference result of the word driven
// two edges earlier. The stream mixes: all-zero words (no match), one-hot
// words, words with several set bits in different rows where the winner sits
// in a lower column than a losing bit (row choice by the look-ahead
// multiplexer), several set bits inside one row (column priority), and
// sparse and dense random words. Each of these situations, each of the four
// winning columns and winners in both halves of the top-level row range are
// counted, and any that never occurs is a failure. A reset asserted in the
// middle of the stream must clear both register stages, and a lone word
// followed by zeros must show its result exactly two edges later.
module tb_pe_top;
  import pe_ref_pkg::*;

  localparam int unsigned L  = 4096;
  localparam int unsigned QB = 12;
  localparam int unsigned CYCLES = 3000;

  logic          clk = 1'b0;
  logic          rst_n;
  logic [L-1:0]  d_in;
  logic [QB-1:0] q;
  logic          match;

  int checks = 0, failures = 0;
  int n_nomatch = 0, n_onehot = 0, n_cross_row = 0, n_same_row = 0;
  int n_col[4] = '{0, 0, 0, 0};
  int n_upper = 0, n_lower = 0, n_reset = 0, n_latency = 0;

  pe_top dut (.clk(clk), .rst_n(rst_n), .d_in(d_in), .q(q), .match(match));

  always #5 clk = ~clk;

  initial begin
    #((CYCLES + 200) * 10);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results of the two most recent words (index 0 = newest)
  int exp_h[2];
  bit exp_v[2];

  task automatic check_out(input int h, input string tag);
    checks++;
    if (match !== (h >= 0) || q !== QB'((h < 0) ? 0 : h)) begin
      failures++;
      $display("FAIL %s: q=%0d match=%b expected q=%0d match=%b", tag, q, match,
               (h < 0) ? 0 : h, h >= 0);
    end
  endtask

  function automatic logic [L-1:0] make_word(input int kind);
    logic [L-1:0] v;
    int unsigned a, b;
    v = '0;
    case (kind)
      0: ;                                                   // no match
      1: v[$urandom_range(0, L - 1)] = 1'b1;                 // one-hot
      2: begin                                               // winner in a higher row, lower column
        a = $urandom_range(1, L / 4 - 1) * 4 + $urandom_range(0, 2);
        b = $urandom_range(0, a / 4 - 1) * 4 + $urandom_range(a % 4 + 1, 3);
        v[a] = 1'b1; v[b] = 1'b1;
        v = v | (L'(rand_word(a, 1'b0)) & ((L'(1) << a) - 1));
      end
      3: begin                                               // several bits in one row
        a = $urandom_range(0, L / 4 - 1) * 4;
        v[a + $urandom_range(0, 1)] = 1'b1; v[a + $urandom_range(2, 3)] = 1'b1;
      end
      4: v = L'(rand_word(L, 1'b0));
      default: v = L'(rand_word(L, 1'b1));
    endcase
    return v;
  endfunction

  task automatic count_kind(input int kind, input int h);
    case (kind)
      0: n_nomatch++;
      1: n_onehot++;
      2: n_cross_row++;
      3: n_same_row++;
      default: ;
    endcase
    if (h >= 0) begin
      n_col[h % 4]++;
      if (h >= int'(L) / 2) n_upper++; else n_lower++;
    end
  endtask

  initial begin
    logic [L-1:0] v;
    int kind, h;
    rst_n = 1'b0;
    d_in  = '1;
    repeat (3) @(posedge clk);
    @(negedge clk);
    check_out(-1, "after reset");
    n_reset++;
    rst_n = 1'b1;
    exp_v = '{0, 0};

    // latency: one word, then zeros
    v = L'(1) << 2749;
    d_in = v;
    @(negedge clk);             // sampled at edge 1
    d_in = '0;
    checks++;
    if (match !== 1'b0) begin failures++; $display("FAIL result one edge early"); end
    @(negedge clk);             // after edge 2
    check_out(2749, "latency");
    n_latency++;

    // streaming: a new word every cycle
    d_in = '0;
    @(negedge clk);             // drain the zero words
    @(negedge clk);
    exp_v = '{0, 0};
    for (int c = 0; c < int'(CYCLES); c++) begin
      if (c == CYCLES / 2) begin
        // reset in the middle of the stream clears both stages
        rst_n = 1'b0;
        #1;
        check_out(-1, "mid-stream reset");
        n_reset++;
        @(negedge clk);
        rst_n = 1'b1;
        exp_v = '{0, 0};
      end
      kind = (c % 7 == 6) ? 1 : $urandom_range(0, 5);
      v = make_word(kind);
      h = highest(MAXW'(v), L);
      count_kind(kind, h);
      d_in = v;
      if (exp_v[1]) check_out(exp_h[1], "stream");
      exp_h[1] = exp_h[0]; exp_v[1] = exp_v[0];
      exp_h[0] = h;        exp_v[0] = 1'b1;
      @(negedge clk);
    end
    // flush the last two words
    d_in = '0;
    for (int i = 0; i < 2; i++) begin
      if (exp_v[1]) check_out(exp_h[1], "flush");
      exp_h[1] = exp_h[0]; exp_v[1] = exp_v[0];
      exp_v[0] = 1'b0;
      @(negedge clk);
    end

    $display("events: no-match %0d, one-hot %0d, cross-row %0d, same-row %0d",
             n_nomatch, n_onehot, n_cross_row, n_same_row);
    $display("events: winning column 0..3 = %0d %0d %0d %0d, upper half %0d, lower half %0d",
             n_col[0], n_col[1], n_col[2], n_col[3], n_upper, n_lower);
    $display("events: resets %0d, latency checks %0d", n_reset, n_latency);
    if (n_nomatch == 0 || n_onehot == 0 || n_cross_row == 0 || n_same_row == 0 ||
        n_col[0] == 0 || n_col[1] == 0 || n_col[2] == 0 || n_col[3] == 0 ||
        n_upper == 0 || n_lower == 0 || n_reset < 2 || n_latency == 0) begin
      failures++;
      $display("FAIL some situation never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
