// tb_lloyd_max_quantizer: checks the comparator banks against a reference that counts, in
// real arithmetic, how many of the Lloyd-Max boundaries of N(0,1) each coordinate exceeds.
// The boundaries are typed here from the published Lloyd-Max table for 8 levels and rounded to
// FP16, independently of the design's ROM. Inputs include values placed exactly on the
// boundaries. Also checks the one-cycle latency.
module tb_lloyd_max_quantizer;
  import axelram_pkg::*;
  import fp16_ref_pkg::*;

  localparam int D = 128;
  localparam int B = 3;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  fp16_t [D-1:0] in_vec;
  fp16_t [(1<<B)-2:0] bound;
  logic [D-1:0][B-1:0] out_idx;
  int checks = 0, failures = 0;
  real bnd_r [7] = '{-1.7479, -1.0500, -0.5005, 0.0, 0.5005, 1.0500, 1.7479};

  lloyd_max_quantizer #(.D(D), .B(B)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    real v;
    for (int k = 0; k < 7; k++) bound[k] = real_to_fp16(bnd_r[k]);
    in_vec = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int i = 0; i < D; i++) begin
        if ($urandom_range(0, 9) == 0) in_vec[i] = bound[$urandom_range(0, 6)];
        else in_vec[i] = real_to_fp16(gauss() * 1.2);
      end
      in_valid = 1;
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid) failures++;
      for (int i = 0; i < D; i++) begin
        v = fp16_to_real(in_vec[i]);
        e = 0;
        for (int k = 0; k < 7; k++) if (v > fp16_to_real(real_to_fp16(bnd_r[k]))) e++;
        checks++;
        if (int'(out_idx[i]) != e) begin
          failures++;
          if (failures < 10) $display("t%0d i%0d v=%f got %0d want %0d", t, i, v, out_idx[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
