// lloyd_max_quantizer: maps each rotated coordinate to its b-bit Lloyd-Max index.
//
// For every one of the d coordinates a bank of 2^b-1 comparators tests the value against the
// fixed, ascending codebook boundaries in parallel; the index is the number of boundaries the
// value exceeds (a thermometer code turned into a count). For d = 128, b = 3 that is 128 banks
// of 7 comparators, the paper's 896. Values equal to a boundary fall to the lower index, a
// choice the paper does not make.
//
// Interface: in_valid/in_vec with the boundaries from the codebook ROM; out_idx is registered
// and valid (out_valid) one cycle later. Index of coordinate i is out_idx[i].
module lloyd_max_quantizer
  import axelram_pkg::*;
#(
  parameter int unsigned D = D_DEF,
  parameter int unsigned B = B_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  fp16_t [D-1:0]           in_vec,
  input  fp16_t [(1<<B)-2:0]      bound,
  output logic                    out_valid,
  output logic  [D-1:0][B-1:0]    out_idx
);
  localparam int unsigned NB = (1 << B) - 1;

  logic [D-1:0][B-1:0] idx;

  always_comb begin
    for (int i = 0; i < D; i++) begin
      idx[i] = '0;
      for (int k = 0; k < NB; k++) if (fp16_gt(in_vec[i], bound[k])) idx[i] = idx[i] + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_idx <= idx;
    end
  end
endmodule
