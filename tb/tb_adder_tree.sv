// tb_adder_tree: feeds a new random FP16 vector every cycle and checks each sum against a
// reference tree computed in real arithmetic with rounding to FP16 after every addition (the
// same pairing order), so the result must match bit for bit. Also checks the log2(d)-cycle
// latency, one-per-cycle throughput and the tag.
module tb_adder_tree;
  import axelram_pkg::*;
  import fp16_ref_pkg::*;

  localparam int D = 128;
  localparam int LAT = $clog2(D);
  localparam int N = 300;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  fp16_t [D-1:0] in_vec;
  fp16_t out_sum;
  logic [15:0] in_tag, out_tag;
  int checks = 0, failures = 0;
  logic [15:0] expq [$];
  int cyc = 0, first_out = -1, nout = 0;

  adder_tree #(.D(D), .TAGW(16)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] ref_tree(fp16_t [D-1:0] v);
    real r [D];
    for (int i = 0; i < D; i++) r[i] = fp16_to_real(v[i]);
    for (int n = D; n > 1; n = n / 2)
      for (int i = 0; i < n / 2; i++) r[i] = fp16_to_real(real_to_fp16(r[2*i] + r[2*i+1]));
    return real_to_fp16(r[0]);
  endfunction

  // output checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      logic [15:0] e;
      e = expq.pop_front();
      checks++;
      if (first_out < 0) first_out = cyc;
      if (out_sum != e || out_tag != 16'(nout)) begin
        failures++;
        if (failures < 10) $display("sum %0d got %h want %h tag %0d", nout, out_sum, e, out_tag);
      end
      nout++;
    end
  end

  initial begin
    int start_cyc;
    in_vec = '0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start_cyc = cyc;
    for (int t = 0; t < N; t++) begin
      for (int i = 0; i < D; i++) in_vec[i] = real_to_fp16(gauss() * (t % 3 == 0 ? 0.01 : 3.0));
      in_valid = 1;
      in_tag = 16'(t);
      expq.push_back(ref_tree(in_vec));
      @(negedge clk);
    end
    in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (nout != N) begin failures++; $display("got %0d sums, want %0d", nout, N); end
    checks++;
    if (first_out - start_cyc != LAT + 1) begin
      failures++;
      $display("latency %0d, want %0d", first_out - start_cyc - 1, LAT);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
