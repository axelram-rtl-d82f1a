// codebook_rom: the design-time fixed Lloyd-Max codebook, 2^b centroids and 2^b-1 boundaries
// of 16 bits each (b = 3: 8 + 7 values, 30 bytes).
//
// The codebook depends only on d and b, never on data, so it is a ROM. The boundary half feeds
// the write-path comparator banks, which need all boundaries at once, so it is a parallel
// output. The centroid half is read one word per cycle by the table generator through a
// registered read port (address in, word out one cycle later). Stored values are scaled for
// the unnormalised butterfly (see axelram_pkg): boundaries are those of N(0,1), centroids are
// those of N(0,1) divided by d. The paper draws the centroid and boundary stores as two boxes
// and counts them as one 30-byte codebook; here they are one module.
module codebook_rom
  import axelram_pkg::*;
#(
  parameter int unsigned D = D_DEF,
  parameter int unsigned B = B_DEF
) (
  input  logic                 clk,
  input  logic [B-1:0]         cent_addr,
  output fp16_t                cent_q,
  output fp16_t [(1<<B)-2:0]   bound
);
  localparam int unsigned NC = 1 << B;

  fp16_t cent_mem [NC];

  initial begin
    assert (B >= 2 && B <= 4) else $error("codebook_rom: tables exist for b = 2, 3, 4 only");
  end

  for (genvar j = 0; j < NC; j++) begin : g_cent
    assign cent_mem[j] = fp16_shr_exp(lm_centroid(B, j), $clog2(D));
  end
  for (genvar k = 0; k < NC - 1; k++) begin : g_bound
    assign bound[k] = lm_boundary(B, k);
  end

  always_ff @(posedge clk) cent_q <= cent_mem[cent_addr];
endmodule
