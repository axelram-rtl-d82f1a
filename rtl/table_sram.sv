// table_sram: the pre-computation table SRAM (d * 2^b FP16 entries, 2 KB for d = 128, b = 3)
// together with the table lookup that reads it.
//
// The table is split into d banks, bank i holding the 2^b products P[i][*] of coordinate i.
// A write stores one column j in all banks at once (the table generator's order). A lookup
// presents the d stored indices of one key; bank i is read at address idx[i], so all d
// products P[i][idx_i] come out in the same cycle, the paper's "128 parallel reads". Reads are
// registered: rdata is valid one cycle after re. The banking is this design's way of giving d
// independent reads.
module table_sram
  import axelram_pkg::*;
#(
  parameter int unsigned D = D_DEF,
  parameter int unsigned B = B_DEF
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [B-1:0]          wcol,
  input  fp16_t [D-1:0]         wdata,
  input  logic                  re,
  input  logic  [D-1:0][B-1:0]  ridx,
  output fp16_t [D-1:0]         rdata
);
  for (genvar i = 0; i < D; i++) begin : g_bank
    fp16_t mem [1 << B];
    always_ff @(posedge clk) begin
      if (we) mem[wcol] <= wdata[i];
      if (re) rdata[i] <= mem[ridx[i]];
    end
  end
endmodule
