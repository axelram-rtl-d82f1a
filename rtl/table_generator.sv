// table_generator: builds the per-query pre-computation table P[i][j] = q_rot[i] * CB[j]
// for every coordinate i < d and every centroid j < 2^b (d * 2^b products, 1024 for the
// paper's d = 128, b = 3), once per query.
//
// It holds d FP16 multipliers, one per coordinate. On start it steps the centroid address
// j = 0 .. 2^b-1 through the codebook ROM; one cycle later the centroid arrives and the d
// products q_rot[i] * CB[j] are written as column j of the table (all d banks at once). A table
// therefore takes 2^b + 1 cycles (9 for b = 3) and done pulses in the cycle after the last
// write. q_rot must stay stable while busy. How many multipliers there are and in which order
// the table is filled are not given by the paper; this is the simplest arrangement that lets
// every table bank take one write per cycle.
module table_generator
  import axelram_pkg::*;
#(
  parameter int unsigned D = D_DEF,
  parameter int unsigned B = B_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  fp16_t [D-1:0]     q_rot,
  output logic [B-1:0]      cent_addr,
  input  fp16_t             cent_q,
  output logic              tbl_we,
  output logic [B-1:0]      tbl_col,
  output fp16_t [D-1:0]     tbl_wdata,
  output logic              busy,
  output logic              done
);
  logic         issuing;   // an address is being presented this cycle
  logic         wr_pend;   // the ROM word for column tbl_col arrives this cycle
  logic [B:0]   j;

  assign cent_addr = j[B-1:0];
  assign busy      = issuing | wr_pend;
  assign tbl_we    = wr_pend;

  always_comb begin
    for (int i = 0; i < D; i++) tbl_wdata[i] = fp16_mul(q_rot[i], cent_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      wr_pend <= 1'b0;
      j       <= '0;
      tbl_col <= '0;
      done    <= 1'b0;
    end else begin
      done    <= wr_pend && !issuing;
      wr_pend <= issuing;
      tbl_col <= j[B-1:0];
      if (start && !busy) begin
        issuing <= 1'b1;
        j       <= '0;
      end else if (issuing) begin
        if (j == (B+1)'((1 << B) - 1)) issuing <= 1'b0;
        j <= j + 1'b1;
      end
    end
  end
endmodule
