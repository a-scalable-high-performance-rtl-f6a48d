// tb_pe4: exhaustive self-checking test of the flat 4-bit priority encoder.
// Every one of the 16 input words is applied and q is compared with the
// position of the highest set bit found by a top-down scan (0 for an all-zero
// word).
module tb_pe4;
  import pe_ref_pkg::*;

  logic [3:0] d;
  logic [1:0] q;
  int checks = 0, failures = 0;

  pe4 dut (.d(d), .q(q));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      int h;
      d = 4'(v);
      #1;
      h = highest(MAXW'(d), 4);
      if (h < 0) h = 0;
      checks++;
      if (q !== 2'(h)) begin
        failures++;
        $display("FAIL d=%b q=%0d expected %0d", d, q, h);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
