// tb_norm_multiplier: drives random sums and norms through the norm multiplier and checks each
// product against a real-arithmetic reference rounded to FP16 (exact match expected), the
// one-cycle latency and the tag pass-through.
module tb_norm_multiplier;
  import axelram_pkg::*;
  import fp16_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  fp16_t in_sum, in_norm, out_score;
  logic [7:0] in_tag, out_tag;
  int checks = 0, failures = 0;

  norm_multiplier #(.TAGW(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real a, n, expv;
    logic [15:0] e16;
    in_sum = 0; in_norm = 0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      a = urand_real(-4.0, 4.0);
      n = urand_real(0.01, 200.0);
      @(negedge clk);
      in_valid = 1;
      in_sum   = real_to_fp16(a);
      in_norm  = real_to_fp16(n);
      in_tag   = 8'(t);
      expv = fp16_to_real(in_sum) * fp16_to_real(in_norm);
      e16  = real_to_fp16(expv);
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid || out_score != e16 || out_tag != 8'(t)) begin
        failures++;
        if (failures < 10)
          $display("mismatch %0d: %h * %h got %h want %h", t, in_sum, in_norm, out_score, e16);
      end
    end
    @(negedge clk);
    in_valid = 0;
    @(posedge clk);
    #1;
    checks++;
    if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
