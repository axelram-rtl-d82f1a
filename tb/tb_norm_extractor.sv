// tb_norm_extractor: checks ||x|| and x/||x|| for random key vectors, including ones with a
// large norm like the high-norm layers the paper reports, and a zero vector. The reference
// follows the block's defined order of operations in real arithmetic (sum of squares added
// element by element with FP16 rounding after each product and sum, then square root, then
// one division per element), so results must match bit for bit. Also checks the 2d + 2 cycle
// latency.
module tb_norm_extractor;
  import axelram_pkg::*;
  import fp16_ref_pkg::*;

  localparam int D = 128;

  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done;
  fp16_t [D-1:0] in_vec = '0, out_unit;
  fp16_t out_norm;
  int checks = 0, failures = 0;

  norm_extractor #(.D(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    real acc, n, sumsq;
    logic [15:0] en;
    int cycles;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      real scale;
      scale = (t % 3 == 0) ? 15.0 : (t % 3 == 1) ? 1.0 : 0.05;
      for (int i = 0; i < D; i++) in_vec[i] = (t == 29) ? 16'h0 : real_to_fp16(gauss() * scale);
      acc = 0.0;
      sumsq = 0.0;
      for (int i = 0; i < D; i++) begin
        real x;
        x = fp16_to_real(in_vec[i]);
        acc = fp16_to_real(real_to_fp16(acc + fp16_to_real(real_to_fp16(x * x))));
        sumsq += x * x;
      end
      en = real_to_fp16($sqrt(acc));
      n  = fp16_to_real(en);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cycles = 1;
      while (!done && cycles < 1000) begin @(negedge clk); cycles++; end
      check(cycles == 2 * D + 2, $sformatf("latency %0d", cycles));
      check(out_norm == en, $sformatf("norm got %h want %h", out_norm, en));
      check(near(fp16_to_real(out_norm), $sqrt(sumsq), 0.01, 1e-3), "norm near true norm");
      for (int i = 0; i < D; i++)
        check(same(out_unit[i], n == 0.0 ? 16'h0 : real_to_fp16(fp16_to_real(in_vec[i]) / n)),
              $sformatf("unit[%0d] got %h", i, out_unit[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
