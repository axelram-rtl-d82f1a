// axelram_macro: the AXELRAM smart SRAM macro. It stores quantized keys and computes attention
// scores <q, k> straight from the stored indices, never reconstructing a key.
//
// Write path (one key per OP_WRITE_KEY): norm extractor (||k|| and k/||k||) -> randomized
// Hadamard rotator (sign flip + butterfly, no multiplier) -> Lloyd-Max comparator banks ->
// one key-store row {norm, d b-bit indices}.
// Query (OP_QUERY, once per query): the same rotator turns q into q_rot = H*diag(s)*q; the table
// generator fills the table SRAM with P[i][j] = q_rot[i] * CB[j].
// Scores (OP_SCORE, a run of stored keys): per key, read its row, look up P[i][idx_i] for all
// i at once, add the d values in the adder tree, multiply by the stored norm. The read side has
// no inverse transform.
// This structure, the unit counts and the FP16 format are the paper's. The command interface,
// the sequencing below and the pipelining are this design's own.
//
// Interface. A command is taken when cmd_valid and cmd_ready are both high; cmd_ready is high
// only while the macro is idle, so a command that arrives during an operation waits (the
// requester must hold it stable). cmd_layer picks the sign vector (one per layer). OP_WRITE_KEY
// stores cmd_vec at cmd_addr. OP_QUERY loads cmd_vec as the query. OP_SCORE streams scores for
// cmd_count keys from cmd_addr on (addresses wrap at T); score_valid/score_addr/score appear one
// per cycle with no backpressure. op_done pulses once when an operation has finished.
// sign_ld_* overwrite a layer's sign vector with a calibrated one (allowed at any time; it
// takes effect for operations that start afterwards).
//
// Timing (cycles from the accepting edge to op_done, approximately): write 2d + log2(d) + 3
// (266 for d = 128), query log2(d) + 2^b + 6 (21), score run of n keys n + log2(d) + 5. The
// first score of a run leaves log2(d) + 3 cycles after the command is accepted.
module axelram_macro
  import axelram_pkg::*;
#(
  parameter int unsigned D         = D_DEF,
  parameter int unsigned B         = B_DEF,
  parameter int unsigned T         = T_DEF,
  parameter int unsigned LAYERS    = LAYERS_DEF,
  parameter int unsigned SIGN_SEED = 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // commands
  input  logic                       cmd_valid,
  output logic                       cmd_ready,
  input  op_e                        cmd_op,
  input  logic [$clog2(LAYERS)-1:0]  cmd_layer,
  input  logic [$clog2(T)-1:0]       cmd_addr,
  input  logic [$clog2(T):0]         cmd_count,
  input  fp16_t [D-1:0]              cmd_vec,
  output logic                       op_done,
  output logic                       query_loaded,
  // attention scores
  output logic                       score_valid,
  output logic [$clog2(T)-1:0]       score_addr,
  output fp16_t                      score,
  // sign vector load (calibration result)
  input  logic                       sign_ld_en,
  input  logic [$clog2(LAYERS)-1:0]  sign_ld_layer,
  input  logic [D-1:0]               sign_ld_data
);
  localparam int unsigned AW  = $clog2(T);
  localparam int unsigned LW  = $clog2(LAYERS);
  localparam int unsigned NB  = (1 << B) - 1;
  localparam int unsigned ROW = D * B + 16;

  typedef enum logic [3:0] {
    S_IDLE, S_W_NORM, S_W_ROT, S_W_QNT, S_Q_SIGN, S_Q_ISSUE, S_Q_ROT, S_Q_TBLS, S_Q_TBL,
    S_S_RUN, S_S_DRAIN
  } state_e;

  state_e state;

  logic [LW-1:0] layer_r;
  logic [AW-1:0] addr_r;
  logic [AW:0]   remaining;
  logic [AW:0]   inflight;
  fp16_t [D-1:0] qvec_r;
  fp16_t [D-1:0] qrot_r;

  // ------------------------------------------------------------------ blocks
  logic [D-1:0] sign_q;
  sign_rom #(.D(D), .LAYERS(LAYERS), .SIGN_SEED(SIGN_SEED)) u_sign (
    .clk, .rst_n, .rd_layer(layer_r), .rd_sign(sign_q),
    .ld_en(sign_ld_en), .ld_layer(sign_ld_layer), .ld_data(sign_ld_data)
  );

  logic [B-1:0] cent_addr;
  fp16_t cent_q;
  fp16_t [NB-1:0] bound;
  codebook_rom #(.D(D), .B(B)) u_cb (.clk, .cent_addr, .cent_q, .bound);

  logic ne_start, ne_done;
  fp16_t ne_norm;
  fp16_t [D-1:0] ne_unit;
  norm_extractor #(.D(D)) u_norm (
    .clk, .rst_n, .start(ne_start), .in_vec(cmd_vec), .busy(), .done(ne_done),
    .out_norm(ne_norm), .out_unit(ne_unit)
  );

  // one rotator, shared by keys (write path) and queries (read path)
  logic rot_in_valid, rot_out_valid;
  fp16_t [D-1:0] rot_in_vec, rot_out_vec;
  assign rot_in_vec = (state == S_W_NORM) ? ne_unit : qvec_r;
  hadamard_rotator #(.D(D)) u_rot (
    .clk, .rst_n, .in_valid(rot_in_valid), .in_vec(rot_in_vec), .sign(sign_q),
    .out_valid(rot_out_valid), .out_vec(rot_out_vec)
  );

  logic qz_in_valid, qz_out_valid;
  logic [D-1:0][B-1:0] qz_idx;
  lloyd_max_quantizer #(.D(D), .B(B)) u_qz (
    .clk, .rst_n, .in_valid(qz_in_valid), .in_vec(rot_out_vec), .bound,
    .out_valid(qz_out_valid), .out_idx(qz_idx)
  );

  logic kv_en, kv_we;
  logic [AW-1:0] kv_addr;
  logic [ROW-1:0] kv_rdata;
  kv_sram #(.T(T), .WIDTH(ROW)) u_kv (
    .clk, .en(kv_en), .we(kv_we), .addr(kv_addr), .wdata({ne_norm, qz_idx}), .rdata(kv_rdata)
  );

  logic tg_start, tg_we, tg_done;
  logic [B-1:0] tg_col;
  fp16_t [D-1:0] tg_wdata;
  table_generator #(.D(D), .B(B)) u_tg (
    .clk, .rst_n, .start(tg_start), .q_rot(qrot_r), .cent_addr, .cent_q,
    .tbl_we(tg_we), .tbl_col(tg_col), .tbl_wdata(tg_wdata), .busy(), .done(tg_done)
  );

  // score pipeline: p0 = row being read, p1 = table lookup in flight
  logic p0_v, p1_v;
  logic [AW-1:0] p0_addr, p1_addr;
  fp16_t p1_norm;
  fp16_t [D-1:0] tbl_rdata;
  table_sram #(.D(D), .B(B)) u_tbl (
    .clk, .we(tg_we), .wcol(tg_col), .wdata(tg_wdata),
    .re(p0_v), .ridx(kv_rdata[D*B-1:0]), .rdata(tbl_rdata)
  );

  logic at_v;
  fp16_t at_sum;
  logic [16+AW-1:0] at_tag;
  adder_tree #(.D(D), .TAGW(16 + AW)) u_tree (
    .clk, .rst_n, .in_valid(p1_v), .in_vec(tbl_rdata), .in_tag({p1_norm, p1_addr}),
    .out_valid(at_v), .out_sum(at_sum), .out_tag(at_tag)
  );

  norm_multiplier #(.TAGW(AW)) u_nm (
    .clk, .rst_n, .in_valid(at_v), .in_sum(at_sum), .in_norm(at_tag[16+AW-1:AW]),
    .in_tag(at_tag[AW-1:0]), .out_valid(score_valid), .out_score(score), .out_tag(score_addr)
  );

  // ------------------------------------------------------------------ control
  logic accept;
  assign cmd_ready = (state == S_IDLE);
  assign accept    = cmd_valid && cmd_ready;

  always_comb begin
    ne_start     = accept && cmd_op == OP_WRITE_KEY;
    rot_in_valid = (state == S_W_NORM && ne_done) || state == S_Q_ISSUE;
    qz_in_valid  = (state == S_W_ROT && rot_out_valid);
    tg_start     = (state == S_Q_TBLS);
    kv_en        = (state == S_W_QNT && qz_out_valid) || state == S_S_RUN;
    kv_we        = (state == S_W_QNT);
    kv_addr      = addr_r;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      layer_r      <= '0;
      addr_r       <= '0;
      remaining    <= '0;
      inflight     <= '0;
      qvec_r       <= '0;
      qrot_r       <= '0;
      op_done      <= 1'b0;
      query_loaded <= 1'b0;
      p0_v         <= 1'b0;
      p1_v         <= 1'b0;
      p0_addr      <= '0;
      p1_addr      <= '0;
      p1_norm      <= '0;
    end else begin
      op_done <= 1'b0;
      // score pipeline registers
      p0_v    <= (state == S_S_RUN);
      p0_addr <= addr_r;
      p1_v    <= p0_v;
      p1_addr <= p0_addr;
      p1_norm <= kv_rdata[ROW-1:D*B];
      inflight <= inflight + (AW+1)'(state == S_S_RUN) - (AW+1)'(score_valid);

      unique case (state)
        S_IDLE: if (cmd_valid) begin
          layer_r <= cmd_layer;
          addr_r  <= cmd_addr;
          unique case (cmd_op)
            OP_WRITE_KEY: state <= S_W_NORM;
            OP_QUERY: begin
              qvec_r       <= cmd_vec;
              query_loaded <= 1'b0;
              state        <= S_Q_SIGN;
            end
            OP_SCORE: begin
              remaining <= cmd_count;
              if (cmd_count == '0) op_done <= 1'b1;
              else state <= S_S_RUN;
            end
            default: op_done <= 1'b1;  // unused opcode: nothing to do
          endcase
        end
        S_W_NORM: if (ne_done) state <= S_W_ROT;
        S_W_ROT:  if (rot_out_valid) state <= S_W_QNT;
        S_W_QNT:  if (qz_out_valid) begin
          op_done <= 1'b1;
          state   <= S_IDLE;
        end
        S_Q_SIGN:  state <= S_Q_ISSUE;  // sign ROM read of layer_r
        S_Q_ISSUE: state <= S_Q_ROT;
        S_Q_ROT: if (rot_out_valid) begin
          qrot_r <= rot_out_vec;
          state  <= S_Q_TBLS;
        end
        S_Q_TBLS: state <= S_Q_TBL;
        S_Q_TBL: if (tg_done) begin
          query_loaded <= 1'b1;
          op_done      <= 1'b1;
          state        <= S_IDLE;
        end
        S_S_RUN: begin
          addr_r    <= addr_r + 1'b1;
          remaining <= remaining - 1'b1;
          if (remaining == (AW+1)'(1)) state <= S_S_DRAIN;
        end
        S_S_DRAIN: if (inflight == '0 && !p0_v && !p1_v) begin
          op_done <= 1'b1;
          state   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------ checks
  // A command held off by cmd_ready must stay asserted and unchanged.
  logic stall_q;
  op_e  op_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stall_q <= 1'b0;
      op_q    <= OP_WRITE_KEY;
    end else begin
      stall_q <= cmd_valid && !cmd_ready;
      op_q    <= cmd_op;
    end
  end
  always_ff @(posedge clk) begin
    if (rst_n && stall_q)
      assert (cmd_valid && cmd_op == op_q) else $error("command dropped or changed while stalled");
    if (rst_n && tg_we)
      assert (state == S_Q_TBL || state == S_Q_TBLS) else $error("table written outside a query");
    if (rst_n && score_valid)
      assert (state == S_S_RUN || state == S_S_DRAIN) else $error("score outside a score run");
  end
endmodule
