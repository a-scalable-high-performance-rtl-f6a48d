// tb_row_or: self-checking test of the row-status OR bank.
// Two instances are tested: the default size (1024 rows of 4 bits, the first
// level of the 4096-bit encoder) and 8 rows of 8 bits (the OR8 bank of a
// 64-bit, 8-column organisation). Sparse and dense random words, the all-zero
// word and the all-ones word are applied; every row-status bit is compared
// with an OR computed by a loop over the bits of its row.
module tb_row_or;
  import pe_ref_pkg::*;

  localparam int unsigned NA = 1024, MA = 4;
  localparam int unsigned NB = 8,    MB = 8;

  logic [NA*MA-1:0] da;
  logic [NA-1:0]    dora;
  logic [NB*MB-1:0] db;
  logic [NB-1:0]    dorb;
  int checks = 0, failures = 0;

  row_or dut_a (.d(da), .dor(dora));
  row_or #(.N(NB), .M(MB)) dut_b (.d(db), .dor(dorb));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_a();
    for (int i = 0; i < int'(NA); i++) begin
      logic e;
      e = 1'b0;
      for (int j = 0; j < int'(MA); j++) e |= da[i*MA+j];
      checks++;
      if (dora[i] !== e) begin
        failures++;
        $display("FAIL 1024x4 row %0d dor=%b expected %b", i, dora[i], e);
      end
    end
  endtask

  task automatic check_b();
    for (int i = 0; i < int'(NB); i++) begin
      logic e;
      e = 1'b0;
      for (int j = 0; j < int'(MB); j++) e |= db[i*MB+j];
      checks++;
      if (dorb[i] !== e) begin
        failures++;
        $display("FAIL 8x8 row %0d dor=%b expected %b", i, dorb[i], e);
      end
    end
  endtask

  initial begin
    da = '0; db = '0; #1; check_a(); check_b();
    da = '1; db = '1; #1; check_a(); check_b();
    for (int t = 0; t < 200; t++) begin
      da = (NA*MA)'(rand_word(NA*MA, t[0]));
      db = (NB*MB)'(rand_word(NB*MB, t[1]));
      #1;
      check_a();
      check_b();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
