// tb_kv_sram: random writes and reads against an associative-array model of the key store,
// checking that a read returns the last row written to its address one cycle later and that a
// write cycle leaves the read data unchanged. Uses a reduced depth to stay short.
module tb_kv_sram;
  localparam int T = 512;
  localparam int W = 400;

  logic clk = 0;
  logic en = 0, we = 0;
  logic [$clog2(T)-1:0] addr = 0;
  logic [W-1:0] wdata = 0, rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] model [int];

  kv_sram #(.T(T), .WIDTH(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd_row();
    logic [W-1:0] r;
    for (int k = 0; k < W; k += 32) r[k +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    logic [W-1:0] prev;
    // fill every row
    for (int a = 0; a < T; a++) begin
      @(negedge clk);
      en = 1; we = 1; addr = 9'(a); wdata = rnd_row();
      model[a] = wdata;
    end
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      en = 1;
      addr = 9'($urandom_range(0, T - 1));
      we = ($urandom_range(0, 3) == 0);
      prev = rdata;
      if (we) begin
        wdata = rnd_row();
        model[int'(addr)] = wdata;
      end
      @(posedge clk);
      #1;
      checks++;
      if (we ? (rdata != prev) : (rdata != model[int'(addr)])) begin
        failures++;
        if (failures < 10) $display("t%0d addr %0d we %0d mismatch", t, addr, we);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
