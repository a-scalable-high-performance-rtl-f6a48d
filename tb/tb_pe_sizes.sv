// tb_pe_sizes: every evaluated encoder size, 4 to 4096 bits.
//
// One registered encoder per size (4, 8, 16, 32, ..., 4096 bits) and one extra
// 4096-bit encoder receive, each cycle, the same random word cut to their
// width; the extra encoder gets the word of a size chosen per cycle,
// zero-extended to 4096 bits, which shows that the full-size encoder returns
// the same result for a smaller word placed in its low bits. All outputs are
// compared two edges after the word was driven with a top-down scan.
module tb_pe_sizes;
  import pe_ref_pkg::*;

  localparam int NS = 11;
  localparam int unsigned SIZES[NS] = '{4, 8, 16, 32, 64, 128, 256, 512, 1024, 2048, 4096};
  localparam int unsigned CYCLES = 1500;

  logic clk = 1'b0;
  logic rst_n;
  logic [MAXW-1:0] word;       // shared stimulus, cut per instance
  logic [MAXW-1:0] word_pad;   // smaller word zero-extended for the full-size copy
  logic [11:0]     q_o[NS];
  logic            m_o[NS];
  logic [11:0]     q_pad;
  logic            m_pad;
  int checks = 0, failures = 0;
  int per_size[NS];

  always #5 clk = ~clk;

  for (genvar s = 0; s < NS; s++) begin : g_size
    localparam int unsigned LS = SIZES[s];
    logic [$clog2(LS)-1:0] q;
    pe_top #(.L(LS)) dut (.clk(clk), .rst_n(rst_n), .d_in(word[LS-1:0]), .q(q), .match(m_o[s]));
    assign q_o[s] = 12'(q);
  end

  pe_top dut_pad (.clk(clk), .rst_n(rst_n), .d_in(word_pad), .q(q_pad), .match(m_pad));

  initial begin
    #((CYCLES + 100) * 10);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(input string tag, input int unsigned l, input logic [11:0] q,
                     input logic m, input int h);
    checks++;
    if (m !== (h >= 0) || q !== 12'((h < 0) ? 0 : h)) begin
      failures++;
      $display("FAIL %s L=%0d: q=%0d match=%b expected q=%0d match=%b", tag, l, q, m,
               (h < 0) ? 0 : h, h >= 0);
    end
  endtask

  logic [MAXW-1:0] hist_w[2];
  int              hist_s[2];
  bit              hist_v[2];

  initial begin
    int ps;
    foreach (per_size[i]) per_size[i] = 0;
    rst_n = 1'b0;
    word = '0; word_pad = '0;
    hist_v = '{0, 0};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < int'(CYCLES) + 2; c++) begin
      if (hist_v[1]) begin
        for (int s = 0; s < NS; s++)
          cmp("direct", SIZES[s], q_o[s], m_o[s], highest(hist_w[1], SIZES[s]));
        cmp("padded", SIZES[hist_s[1]], q_pad, m_pad, highest(hist_w[1], SIZES[hist_s[1]]));
        per_size[hist_s[1]]++;
      end
      ps = $urandom_range(0, NS - 1);
      if (c % 5 == 0) word = '0;
      else if (c % 5 == 1) begin
        word = '0;
        word[$urandom_range(0, SIZES[ps] - 1)] = 1'b1;
      end else word = rand_word(SIZES[ps], c % 5 == 4);
      // in the padded copy only the low SIZES[ps] bits are kept
      word_pad = '0;
      for (int i = 0; i < int'(SIZES[ps]); i++) word_pad[i] = word[i];
      hist_w[1] = hist_w[0]; hist_s[1] = hist_s[0]; hist_v[1] = hist_v[0];
      hist_w[0] = word;      hist_s[0] = ps;        hist_v[0] = (c < int'(CYCLES));
      @(negedge clk);
    end
    for (int s = 0; s < NS; s++) begin
      if (per_size[s] == 0) begin
        failures++;
        $display("FAIL size %0d never used in the padded copy", SIZES[s]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
