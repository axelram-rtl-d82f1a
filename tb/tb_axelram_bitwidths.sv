// tb_axelram_bitwidths: runs the macro end to end at the other two bit-widths the paper
// evaluates, b = 2 and b = 4 (d = 32, T = 32 keys), one instance each, and checks every
// score against the Lloyd-Max reference of that bit-width.
module tb_axelram_bitwidths;
  bit f2, f4;
  int c2, c4, e2, e4;
  int checks = 0, failures = 0;

  axelram_bits_run #(.B(2)) run2 (.finished(f2), .checks(c2), .failures(e2));
  axelram_bits_run #(.B(4)) run4 (.finished(f4), .checks(c4), .failures(e4));

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (f2 && f4);
    checks = c2 + c4;
    failures = e2 + e4;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
