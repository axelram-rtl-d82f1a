// adder_tree: sums the d looked-up FP16 products of one key with a balanced binary tree of
// d-1 FP16 adders in log2(d) levels (127 adders in 7 levels for d = 128, as in the paper).
//
// Level k adds neighbouring pairs of level k-1. A register follows every level, so the sum of
// a key appears log2(d) cycles after it enters and a new key can enter every cycle. A side-band
// tag (the key's norm and address in the macro) travels with each vector so it leaves together
// with its sum. Registering every level is this design's choice.
module adder_tree
  import axelram_pkg::*;
#(
  parameter int unsigned D    = D_DEF,
  parameter int unsigned TAGW = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fp16_t [D-1:0]    in_vec,
  input  logic [TAGW-1:0]  in_tag,
  output logic             out_valid,
  output fp16_t            out_sum,
  output logic [TAGW-1:0]  out_tag
);
  localparam int unsigned LV = $clog2(D);

  fp16_t [D-1:0]   lvl [LV+1];
  logic            vld [LV+1];
  logic [TAGW-1:0] tag [LV+1];

  assign lvl[0] = in_vec;
  assign vld[0] = in_valid;
  assign tag[0] = in_tag;

  for (genvar k = 1; k <= LV; k++) begin : g_lvl
    localparam int unsigned N = D >> k;  // sums produced at this level
    fp16_t [D-1:0]   q;
    logic            qv;
    logic [TAGW-1:0] qt;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        q  <= '0;
        qv <= 1'b0;
        qt <= '0;
      end else begin
        for (int i = 0; i < int'(N); i++) q[i] <= fp16_add(lvl[k-1][2*i], lvl[k-1][2*i+1]);
        qv <= vld[k-1];
        qt <= tag[k-1];
      end
    end
    assign lvl[k] = q;
    assign vld[k] = qv;
    assign tag[k] = qt;
  end

  assign out_valid = vld[LV];
  assign out_sum   = lvl[LV][0];
  assign out_tag   = tag[LV];
endmodule
