// tb_table_sram: writes columns of random FP16 values into the banked table, then issues
// lookups with random per-coordinate indices and checks every one of the d parallel read
// results against a model, one cycle after the request.
module tb_table_sram;
  import axelram_pkg::*;

  localparam int D = 128;
  localparam int B = 3;

  logic clk = 0;
  logic we = 0, re = 0;
  logic [B-1:0] wcol = 0;
  fp16_t [D-1:0] wdata = '0, rdata;
  logic [D-1:0][B-1:0] ridx = '0;
  int checks = 0, failures = 0;
  fp16_t model [D][1<<B];

  table_sram #(.D(D), .B(B)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rnd = 0; rnd < 3; rnd++) begin
      for (int j = 0; j < (1 << B); j++) begin
        @(negedge clk);
        we = 1; re = 0; wcol = 3'(j);
        for (int i = 0; i < D; i++) begin
          wdata[i] = 16'($urandom);
          model[i][j] = wdata[i];
        end
      end
      @(negedge clk);
      we = 0;
      for (int t = 0; t < 100; t++) begin
        @(negedge clk);
        re = 1;
        for (int i = 0; i < D; i++) ridx[i] = 3'($urandom);
        @(posedge clk);
        #1;
        for (int i = 0; i < D; i++) begin
          checks++;
          if (rdata[i] != model[i][ridx[i]]) begin
            failures++;
            if (failures < 10) $display("bank %0d idx %0d got %h want %h", i, ridx[i], rdata[i],
                                        model[i][ridx[i]]);
          end
        end
      end
      re = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
