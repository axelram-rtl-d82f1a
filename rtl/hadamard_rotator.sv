// hadamard_rotator: randomized Hadamard transform y = H_d * diag(s) * x, the rotation R of
// AXELRAM up to the constant factor sqrt(d).
//
// The input vector first has its signs flipped where the sign vector says -1 (flipping the FP16
// sign bit, no arithmetic), then passes a fast Walsh-Hadamard butterfly of log2(d) stages. Stage
// k pairs element i with element i + 2^k (bit k of i clear) and produces their sum and
// difference, so each stage holds d/2 add/sub butterflies: d = 128 gives 7 stages of 64, the
// paper's 448 add/sub (each an adder and a subtractor), and no multiplier. The result is left unscaled (no 1/sqrt(d));
// the codebook constants absorb that factor (see axelram_pkg). The same unit rotates keys on the
// write path and queries on the read path.
//
// Interface: in_valid/in_vec/sign are sampled together; out_valid/out_vec appear log2(d) cycles
// later. A register follows every butterfly stage, so a new vector may enter every cycle. Sign
// bit i = 1 means s_i = -1. The stage pipelining and the sign encoding are this design's choices.
module hadamard_rotator
  import axelram_pkg::*;
#(
  parameter int unsigned D = D_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  fp16_t [D-1:0]     in_vec,
  input  logic  [D-1:0]     sign,
  output logic              out_valid,
  output fp16_t [D-1:0]     out_vec
);
  localparam int unsigned STAGES = $clog2(D);

  fp16_t [D-1:0] stg   [STAGES+1];
  logic          vld   [STAGES+1];

  // sign flip
  for (genvar i = 0; i < D; i++) begin : g_flip
    assign stg[0][i] = {in_vec[i][15] ^ sign[i], in_vec[i][14:0]};
  end
  assign vld[0] = in_valid;

  for (genvar k = 0; k < STAGES; k++) begin : g_stage
    localparam int unsigned H = 1 << k;
    fp16_t [D-1:0] nxt, q;
    logic          qv;
    always_comb begin
      nxt = '0;
      for (int i = 0; i < D; i++) begin
        if ((i & H) == 0) begin
          nxt[i]   = fp16_add(stg[k][i], stg[k][i+H]);
          nxt[i+H] = fp16_add(stg[k][i], {~stg[k][i+H][15], stg[k][i+H][14:0]});
        end
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        q  <= '0;
        qv <= 1'b0;
      end else begin
        q  <= nxt;
        qv <= vld[k];
      end
    end
    assign stg[k+1] = q;
    assign vld[k+1] = qv;
  end

  assign out_valid = vld[STAGES];
  assign out_vec   = stg[STAGES];
endmodule
