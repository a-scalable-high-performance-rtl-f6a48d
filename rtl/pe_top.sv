// pe_top: registered L-bit priority encoder (default PE4K(4), L = 4096).
//
// The L-bit input word is captured in an input register; the encoder finds
// the highest-numbered set bit of the registered word and its index and a
// match flag are captured in an output register. A new word can be presented
// every clock cycle; q and match for the word sampled at clock edge t appear
// after edge t+1 (two register stages from d_in to q).
//
// L selects the encoder, one of the evaluated sizes: the flat truth-table
// encoders pe4, pe8 or pe16 for L = 4, 8 or 16, and the 1-D to 2-D encoders
// pe32_4 ... pe4k_4 (four columns at every level) for L = 32 ... 4096. For
// the flat encoders match is the OR of the registered word.
//
// The encoder itself is combinational; the input register (an L-bit register
// holding the word being searched) and the output register that bound it for
// timing are this design's framing, as are the asynchronous active-low reset,
// which clears both registers, and the absence of an enable. An assertion
// checks that a word with no set bit reports index 0.
module pe_top
  import pe_pkg::*;
#(
  parameter int unsigned L = 4096
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [L-1:0]         d_in,   // word to search
  output logic [$clog2(L)-1:0] q,      // index of its highest set bit
  output logic                 match   // word had a set bit
);

  localparam int unsigned QB = $clog2(L);

  if (!is_pow2(L) || L < 4 || L > 4096) begin : g_bad_l
    $error("pe_top: L must be a power of two from 4 to 4096");
  end

  logic [L-1:0]  d_r;
  logic [QB-1:0] q_c;
  logic          match_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) d_r <= '0;
    else        d_r <= d_in;
  end

  if (L == 4) begin : g_pe4
    pe4 u_pe (.d(d_r), .q(q_c));
    assign match_c = |d_r;
  end else if (L == 8) begin : g_pe8
    pe8 u_pe (.d(d_r), .q(q_c));
    assign match_c = |d_r;
  end else if (L == 16) begin : g_pe16
    pe16 u_pe (.d(d_r), .q(q_c));
    assign match_c = |d_r;
  end else if (L == 32) begin : g_pe32
    pe32_4 u_pe (.d(d_r), .q(q_c), .match(match_c));
  end else if (L == 64) begin : g_pe64
    pe64_4 u_pe (.d(d_r), .q(q_c), .match(match_c));
  end else if (L == 128) begin : g_pe128
    pe128_4 u_pe (.d(d_r), .q(q_c), .match(match_c));
  end else if (L == 256) begin : g_pe256
    pe256_4 u_pe (.d(d_r), .q(q_c), .match(match_c));
  end else if (L == 512) begin : g_pe512
    pe512_4 u_pe (.d(d_r), .q(q_c), .match(match_c));
  end else if (L == 1024) begin : g_pe1k
    pe1k_4 u_pe (.d(d_r), .q(q_c), .match(match_c));
  end else if (L == 2048) begin : g_pe2k
    pe2k_4 u_pe (.d(d_r), .q(q_c), .match(match_c));
  end else begin : g_pe4k
    pe4k_4 u_pe (.d(d_r), .q(q_c), .match(match_c));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q     <= '0;
      match <= 1'b0;
    end else begin
      q     <= q_c;
      match <= match_c;
    end
  end

  // A word with no set bit reports index 0 (also true in reset, which clears
  // both, so the property needs no reset qualifier).
  a_no_match_zero_index: assert property (@(posedge clk)
    !match |-> (q == '0));

endmodule
