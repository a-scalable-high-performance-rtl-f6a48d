// tb_pe16: exhaustive self-checking test of the flat 16-bit priority encoder.
// Every one of the 65536 input words is applied and q is compared with the
// position of the highest set bit found by a top-down scan (0 for an all-zero
// word).
module tb_pe16;
  import pe_ref_pkg::*;

  logic [15:0] d;
  logic [3:0] q;
  int checks = 0, failures = 0;

  pe16 dut (.d(d), .q(q));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 65536; v++) begin
      int h;
      d = 16'(v);
      #1;
      h = highest(MAXW'(d), 16);
      if (h < 0) h = 0;
      checks++;
      if (q !== 4'(h)) begin
        failures++;
        $display("FAIL d=%b q=%0d expected %0d", d, q, h);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
