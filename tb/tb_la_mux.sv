// tb_la_mux: self-checking test of the look-ahead row multiplexer.
// Three instances: 8 rows of 8 bits (the published MUX8), 16 rows of 4 bits
// (the multiplexer of the 64-bit encoder) and the default 1024 rows of 4 bits.
// Two kinds of stimulus are applied. In the first, dor is the true row
// status of random data, and the output must be the highest non-empty row.
// In the second, dor is random and unrelated to the data: the output must be
// the row named by the highest set dor bit, or row 0 when dor is zero, which
// checks every select of the tree on its own.
module tb_la_mux;
  import pe_ref_pkg::*;

  localparam int unsigned N8 = 8,    W8 = 8;
  localparam int unsigned N16 = 16,  W16 = 4;
  localparam int unsigned NK = 1024, WK = 4;

  logic [N8*W8-1:0]   d8;   logic [N8-1:0]  s8;  logic [W8-1:0]  y8;
  logic [N16*W16-1:0] d16;  logic [N16-1:0] s16; logic [W16-1:0] y16;
  logic [NK*WK-1:0]   dk;   logic [NK-1:0]  sk;  logic [WK-1:0]  yk;
  int checks = 0, failures = 0;
  int picked_low = 0, picked_high = 0;

  la_mux #(.N(N8),  .W(W8))  dut8  (.d(d8),  .dor(s8),  .y(y8));
  la_mux #(.N(N16), .W(W16)) dut16 (.d(d16), .dor(s16), .y(y16));
  la_mux                     dutk  (.d(dk),  .dor(sk),  .y(yk));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Row status computed by a loop.
  function automatic logic [MAXW-1:0] status(input logic [MAXW-1:0] v, input int unsigned n,
                                             input int unsigned w);
    logic [MAXW-1:0] s;
    s = '0;
    for (int i = 0; i < int'(n); i++)
      for (int j = 0; j < int'(w); j++) s[i] |= v[i*w+j];
    return s;
  endfunction

  task automatic expect_row(input string tag, input logic [MAXW-1:0] dat,
                            input logic [MAXW-1:0] sel, input int unsigned n,
                            input int unsigned w, input logic [7:0] y);
    int r;
    logic [7:0] e;
    r = highest(sel, n);
    if (r < 0) r = 0;
    if (r < int'(n) / 2) picked_low++; else picked_high++;
    e = '0;
    for (int j = 0; j < int'(w); j++) e[j] = dat[r*w+j];
    checks++;
    if (y !== e) begin
      failures++;
      $display("FAIL %s row %0d y=%h expected %h", tag, r, y, e);
    end
  endtask

  initial begin
    logic [MAXW-1:0] v;
    for (int t = 0; t < 400; t++) begin
      // data with its true row status
      v = rand_word(N8 * W8, t[0]);   d8  = v[N8*W8-1:0];
      s8  = N8'(status(v, N8, W8));
      v = rand_word(N16 * W16, t[0]); d16 = v[N16*W16-1:0];
      s16 = N16'(status(v, N16, W16));
      v = rand_word(NK * WK, t[0]);   dk  = v[NK*WK-1:0];
      sk  = NK'(status(v, NK, WK));
      #1;
      expect_row("mux8 true",    MAXW'(d8),  MAXW'(s8),  N8,  W8,  8'(y8));
      expect_row("mux16 true",   MAXW'(d16), MAXW'(s16), N16, W16, 8'(y16));
      expect_row("mux1024 true", MAXW'(dk),  MAXW'(sk),  NK,  WK,  8'(yk));
      // random select, dense data
      d8  = (N8*W8)'(rand_word(N8 * W8, 1'b1));
      d16 = (N16*W16)'(rand_word(N16 * W16, 1'b1));
      dk  = (NK*WK)'(rand_word(NK * WK, 1'b1));
      s8  = (t % 17 == 0) ? '0 : N8'(rand_word(N8, t[1]));
      s16 = (t % 17 == 0) ? '0 : N16'(rand_word(N16, t[1]));
      sk  = (t % 17 == 0) ? '0 : NK'(rand_word(NK, t[1]));
      #1;
      expect_row("mux8 sel",    MAXW'(d8),  MAXW'(s8),  N8,  W8,  8'(y8));
      expect_row("mux16 sel",   MAXW'(d16), MAXW'(s16), N16, W16, 8'(y16));
      expect_row("mux1024 sel", MAXW'(dk),  MAXW'(sk),  NK,  WK,  8'(yk));
    end
    // every single select bit of the 16-row tree
    for (int i = 0; i < int'(N16); i++) begin
      d16 = (N16*W16)'(rand_word(N16 * W16, 1'b1));
      s16 = N16'(1) << i;
      #1;
      expect_row("mux16 one-hot", MAXW'(d16), MAXW'(s16), N16, W16, 8'(y16));
    end
    if (picked_low == 0 || picked_high == 0) begin
      failures++;
      $display("FAIL coverage: low-half picks %0d, high-half picks %0d", picked_low, picked_high);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
