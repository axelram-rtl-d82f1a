// norm_multiplier: the single multiplication per key on the read path, score = sum * ||k||.
//
// The adder tree's sum is the inner product of the rotated query with the unit-norm key's
// centroids; one FP16 multiply by the key's stored norm turns it into the attention score
// <q, k>. The product is registered: out_valid/out_score follow in_valid by one cycle, one key
// per cycle. A tag passes through alongside.
module norm_multiplier
  import axelram_pkg::*;
#(
  parameter int unsigned TAGW = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  fp16_t           in_sum,
  input  fp16_t           in_norm,
  input  logic [TAGW-1:0] in_tag,
  output logic            out_valid,
  output fp16_t           out_score,
  output logic [TAGW-1:0] out_tag
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_score <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid;
      out_score <= fp16_mul(in_sum, in_norm);
      out_tag   <= in_tag;
    end
  end
endmodule
