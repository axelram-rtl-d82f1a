// kv_sram: the macro's key store, a single-port array of T rows. Each row holds one key: its
// d b-bit indices (d*b bits, 384 for d = 128, b = 3) and its FP16 norm, 400 bits or 50 bytes.
//
// The paper places these bits in a standard 6T SRAM cell array; here the array is written as
// a synthesizable memory with one port, a common shape for a 6T macro. A cycle with en and we
// writes wdata at addr; a cycle with en and not we reads addr, and rdata holds that row from the
// next cycle on. The row layout is {norm[15:0], idx[d-1] ... idx[0]}; port shape and row order
// are this design's choices.
module kv_sram
  import axelram_pkg::*;
#(
  parameter int unsigned T     = T_DEF,
  parameter int unsigned WIDTH = D_DEF * B_DEF + 16
) (
  input  logic                 clk,
  input  logic                 en,
  input  logic                 we,
  input  logic [$clog2(T)-1:0] addr,
  input  logic [WIDTH-1:0]     wdata,
  output logic [WIDTH-1:0]     rdata
);
  logic [WIDTH-1:0] mem [T];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else rdata <= mem[addr];
    end
  end
endmodule
