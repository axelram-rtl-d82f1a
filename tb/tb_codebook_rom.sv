// tb_codebook_rom: checks the fixed codebook for d = 128, b = 3. Centroids must equal the
// published 8-level Lloyd-Max centroids of N(0,1) divided by d, boundaries the published
// boundaries (both within FP16 rounding). It also checks the Lloyd-Max conditions the paper
// relies on: each boundary is the midpoint of its neighbouring centroids, and each centroid is
// the conditional mean of N(0,1) over its cell (computed here by numerical integration). The
// centroid read port must have one cycle of latency.
module tb_codebook_rom;
  import axelram_pkg::*;
  import fp16_ref_pkg::*;

  localparam int D = 128;
  localparam int B = 3;

  logic clk = 0;
  logic [B-1:0] cent_addr = 0;
  fp16_t cent_q;
  fp16_t [(1<<B)-2:0] bound;
  int checks = 0, failures = 0;
  real c_ref [8] = '{-2.1519, -1.3439, -0.7560, -0.2451, 0.2451, 0.7560, 1.3439, 2.1519};
  real b_ref [7] = '{-1.7479, -1.0500, -0.5005, 0.0, 0.5005, 1.0500, 1.7479};
  real c [8];
  real bb [7];

  codebook_rom #(.D(D), .B(B)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real cond_mean(real lo, real hi);
    real num, den, x, p, dx;
    num = 0.0; den = 0.0;
    dx = 0.0005;
    for (x = lo + dx / 2; x < hi; x += dx) begin
      p = $exp(-x * x / 2.0);
      num += x * p;
      den += p;
    end
    return num / den;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    @(negedge clk);
    for (int j = 0; j < 8; j++) begin
      cent_addr = 3'(j);
      @(posedge clk);
      #1;
      c[j] = fp16_to_real(cent_q) * D;
      check(near(c[j], c_ref[j], 0.002, 1e-6), $sformatf("centroid %0d = %f", j, c[j]));
      cent_addr = 3'(j + 1);
      #1;
      check(fp16_to_real(cent_q) * D == c[j], "read latency");
    end
    for (int k = 0; k < 7; k++) begin
      bb[k] = fp16_to_real(bound[k]);
      check(near(bb[k], b_ref[k], 0.002, 1e-6), $sformatf("boundary %0d = %f", k, bb[k]));
      check(near(bb[k], (c[k] + c[k+1]) / 2.0, 0.003, 1e-3), $sformatf("midpoint %0d", k));
    end
    for (int j = 0; j < 8; j++) begin
      real lo, hi;
      lo = (j == 0) ? -8.0 : bb[j-1];
      hi = (j == 7) ? 8.0 : bb[j];
      check(near(c[j], cond_mean(lo, hi), 0.005, 2e-3), $sformatf("centroid condition %0d", j));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
