// norm_extractor: first step of the write path. From an FP16 key vector x it produces the
// norm ||x|| (FP16) and the unit vector x / ||x|| that the rotator quantizes.
//
// The paper gives this block's function, not its insides; this is a small sequential
// implementation. The vector is captured on start and rotated through a shift register. In
// the first d cycles one FP16 multiplier and one FP16 adder accumulate the sum of squares,
// one element per cycle. One cycle then takes the FP16 square root. In the next d cycles one
// FP16 divider forms x_i / ||x|| for each element in turn. done pulses with the results after
// 2d + 2 cycles (258 for d = 128). A zero vector gives norm 0 and a zero unit vector. The sum
// of squares is kept in FP16, so ||x|| must stay below 256.
//
// Interface: start (with in_vec) is taken only while idle (busy low); out_norm and out_unit
// hold their value until the next start.
module norm_extractor
  import axelram_pkg::*;
#(
  parameter int unsigned D = D_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  fp16_t [D-1:0]     in_vec,
  output logic              busy,
  output logic              done,
  output fp16_t             out_norm,
  output fp16_t [D-1:0]     out_unit
);
  typedef enum logic [1:0] {S_IDLE, S_ACC, S_SQRT, S_DIV} state_e;

  state_e              state;
  fp16_t [D-1:0]       x;      // rotates by one element per cycle
  fp16_t               acc;
  logic [$clog2(D):0]  cnt;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      x        <= '0;
      acc      <= '0;
      cnt      <= '0;
      done     <= 1'b0;
      out_norm <= '0;
      out_unit <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          x     <= in_vec;
          acc   <= FP16_ZERO;
          cnt   <= '0;
          state <= S_ACC;
        end
        S_ACC: begin
          acc <= fp16_add(acc, fp16_mul(x[0], x[0]));
          x   <= {x[0], x[D-1:1]};
          cnt <= cnt + 1'b1;
          if (cnt == ($clog2(D)+1)'(D - 1)) state <= S_SQRT;
        end
        S_SQRT: begin
          out_norm <= fp16_sqrt(acc);
          cnt      <= '0;
          state    <= S_DIV;
        end
        S_DIV: begin
          out_unit <= {fp16_is_zero(out_norm) ? FP16_ZERO : fp16_div(x[0], out_norm),
                       out_unit[D-1:1]};
          x   <= {x[0], x[D-1:1]};
          cnt <= cnt + 1'b1;
          if (cnt == ($clog2(D)+1)'(D - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
