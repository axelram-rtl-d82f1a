// tb_hadamard_rotator: checks the sign flip and the butterfly network against a reference
// randomized Hadamard transform computed in real arithmetic, rounding to FP16 after every
// addition in the same butterfly order, so outputs must match bit for bit. A second check uses
// exactly representable small integers and the explicit Sylvester matrix entry
// H[r][c] = (-1)^popcount(r & c), independent of the butterfly order. Also checks the
// log2(d)-cycle latency and back-to-back vectors.
module tb_hadamard_rotator;
  import axelram_pkg::*;
  import fp16_ref_pkg::*;

  localparam int D = 128;
  localparam int LAT = $clog2(D);

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  fp16_t [D-1:0] in_vec, out_vec;
  logic [D-1:0] sign;
  int checks = 0, failures = 0;
  fp16_t [D-1:0] expq [$];
  int cyc = 0, nout = 0, first_out = -1;

  hadamard_rotator #(.D(D)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp16_t [D-1:0] ref_butterfly(fp16_t [D-1:0] v, logic [D-1:0] s);
    real r [D];
    real a, b;
    fp16_t [D-1:0] o;
    for (int i = 0; i < D; i++) r[i] = s[i] ? -fp16_to_real(v[i]) : fp16_to_real(v[i]);
    for (int h = 1; h < D; h = h * 2)
      for (int i = 0; i < D; i++)
        if ((i & h) == 0) begin
          a = r[i]; b = r[i+h];
          r[i]   = fp16_to_real(real_to_fp16(a + b));
          r[i+h] = fp16_to_real(real_to_fp16(a - b));
        end
    for (int i = 0; i < D; i++) o[i] = real_to_fp16(r[i]);
    return o;
  endfunction

  function automatic fp16_t [D-1:0] ref_matrix(fp16_t [D-1:0] v, logic [D-1:0] s);
    fp16_t [D-1:0] o;
    real acc;
    for (int r = 0; r < D; r++) begin
      acc = 0.0;
      for (int c = 0; c < D; c++)
        acc += (($countones(r & c) % 2 == 1) != s[c] ? -1.0 : 1.0) * fp16_to_real(v[c]);
      o[r] = real_to_fp16(acc);
    end
    return o;
  endfunction

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      fp16_t [D-1:0] e;
      e = expq.pop_front();
      if (first_out < 0) first_out = cyc;
      for (int i = 0; i < D; i++) begin
        checks++;
        if (out_vec[i] != e[i]) begin
          failures++;
          if (failures < 10) $display("vec %0d elem %0d got %h want %h", nout, i, out_vec[i], e[i]);
        end
      end
      nout++;
    end
  end

  initial begin
    int start_cyc;
    in_vec = '0; sign = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start_cyc = cyc;
    // small integers: exact arithmetic, compare with the matrix definition
    for (int t = 0; t < 4; t++) begin
      for (int i = 0; i < D; i++) begin
        in_vec[i] = real_to_fp16(real'($urandom_range(0, 14)) - 7.0);
        sign[i]   = 1'($urandom);
      end
      if (t == 0) sign = '0;
      in_valid = 1;
      expq.push_back(ref_matrix(in_vec, sign));
      @(negedge clk);
    end
    // random reals: bit-exact against the butterfly reference
    for (int t = 0; t < 40; t++) begin
      for (int i = 0; i < D; i++) begin
        in_vec[i] = real_to_fp16(gauss() * 0.1);
        sign[i]   = 1'($urandom);
      end
      in_valid = (t % 5 != 4);
      if (in_valid) expq.push_back(ref_butterfly(in_vec, sign));
      @(negedge clk);
    end
    in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (nout != 4 + 32) begin failures++; $display("got %0d vectors", nout); end
    checks++;
    if (first_out - start_cyc != LAT + 1) begin failures++; $display("latency wrong"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
