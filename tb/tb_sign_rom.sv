// tb_sign_rom: checks the default sign vectors of every layer against an independent
// xorshift32 model of the seed-derived contents, that defaults differ between layers and are
// roughly balanced, that a load overrides exactly one layer, that reads have one cycle of
// latency, and that reset restores the defaults.
module tb_sign_rom;
  import axelram_pkg::*;

  localparam int D = 128;
  localparam int L = 36;
  localparam int SEED = 7;

  logic clk = 0, rst_n = 0;
  logic [$clog2(L)-1:0] rd_layer = 0, ld_layer = 0;
  logic [D-1:0] rd_sign, ld_data = 0;
  logic ld_en = 0;
  int checks = 0, failures = 0;
  logic [D-1:0] model [L];
  logic [D-1:0] loaded_val;

  sign_rom #(.D(D), .LAYERS(L), .SIGN_SEED(SEED)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [D-1:0] xorshift_signs(int unsigned seed, int unsigned layer);
    bit [31:0] st;
    logic [D-1:0] v;
    st = seed ^ (32'h9e3779b9 * (layer + 1));
    if (st == 0) st = 1;
    for (int i = 0; i < D; i++) begin
      st ^= st << 13;
      st ^= st >> 17;
      st ^= st << 5;
      v[i] = st[31];
    end
    return v;
  endfunction

  task automatic read_check(int l, logic [D-1:0] want, string what);
    @(negedge clk);
    rd_layer = 6'(l);
    @(posedge clk);
    #1;
    check(rd_sign == want, $sformatf("%s layer %0d", what, l));
  endtask

  initial begin
    for (int l = 0; l < L; l++) model[l] = xorshift_signs(SEED, l);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < L; l++) begin
      read_check(l, model[l], "default");
      check($countones(model[l]) > D / 4 && $countones(model[l]) < 3 * D / 4, "balance");
      if (l > 0) check(model[l] != model[l-1], "layers differ");
    end
    // load a calibrated vector into layer 5
    loaded_val = {$urandom, $urandom, $urandom, $urandom};
    @(negedge clk);
    ld_en = 1; ld_layer = 6'd5; ld_data = loaded_val;
    @(negedge clk);
    ld_en = 0;
    read_check(5, loaded_val, "loaded");
    read_check(4, model[4], "neighbour untouched");
    read_check(6, model[6], "neighbour untouched");
    // latency: change the address and look before the edge
    @(negedge clk);
    rd_layer = 6'd9;
    #1;
    check(rd_sign == model[6], "one-cycle latency");
    // reset restores defaults
    rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    read_check(5, model[5], "after reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
