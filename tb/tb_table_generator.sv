// tb_table_generator: a small ROM model answers the centroid reads with one cycle of latency.
// The testbench checks that the generator writes every column j exactly once with
// P[i][j] = q_rot[i] * CB[j] (reference product in real arithmetic rounded to FP16, bit
// exact), that it uses d * 2^b multiplications, that a table takes 2^b + 1 cycles and that done
// pulses once after the last write.
module tb_table_generator;
  import axelram_pkg::*;
  import fp16_ref_pkg::*;

  localparam int D = 128;
  localparam int B = 3;
  localparam int NC = 1 << B;

  logic clk = 0, rst_n = 0;
  logic start = 0, tbl_we, busy, done;
  fp16_t [D-1:0] q_rot = '0, tbl_wdata;
  logic [B-1:0] cent_addr, tbl_col;
  fp16_t cent_q;
  fp16_t cb [NC];
  int checks = 0, failures = 0;

  table_generator #(.D(D), .B(B)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) cent_q <= cb[cent_addr];

  initial begin
    repeat (20000) @(posedge clk);
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
    int cycles, writes, ndone, mults, done_cyc;
    bit seen [NC];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rnd = 0; rnd < 5; rnd++) begin
      for (int j = 0; j < NC; j++) cb[j] = real_to_fp16(urand_real(-0.02, 0.02));
      for (int i = 0; i < D; i++) q_rot[i] = real_to_fp16(gauss() * 2.0);
      for (int j = 0; j < NC; j++) seen[j] = 0;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cycles = 1; writes = 0; ndone = 0; mults = 0;
      while (busy || !ndone) begin
        if (tbl_we) begin
          writes++;
          check(!seen[tbl_col], "column written twice");
          seen[tbl_col] = 1;
          for (int i = 0; i < D; i++) begin
            mults++;
            check(tbl_wdata[i] == real_to_fp16(fp16_to_real(q_rot[i]) * fp16_to_real(cb[tbl_col])),
                  $sformatf("P[%0d][%0d] = %h", i, tbl_col, tbl_wdata[i]));
          end
        end
        if (done) begin ndone++; done_cyc = cycles; end
        @(negedge clk);
        cycles++;
        if (cycles > 100) break;
      end
      check(writes == NC, $sformatf("%0d column writes", writes));
      check(mults == D * NC, "multiplication count");
      check(ndone == 1, "one done pulse");
      // start is taken at edge 1; done must follow the 2^b + 1 cycles of the table
      check(done_cyc == NC + 2, $sformatf("done after %0d cycles", done_cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
