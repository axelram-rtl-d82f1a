// sign_rom: per-layer sign vectors s in {-1,+1}^d of the randomized Hadamard transform,
// d bits per layer (16 bytes for d = 128).
//
// Each layer's entry starts as its default, random seed-derived sign vector: a constant
// computed at elaboration from SIGN_SEED and the layer number by a xorshift generator. A load
// port can overwrite an entry with a calibration-selected vector, which models the writable
// variant (eFuse programming or an SRAM with an initialisation load); a per-layer flag then
// selects the loaded value. Loading happens before token processing and adds nothing to the
// transform circuit. The generator and the load port protocol are this design's choices; the
// paper fixes only the contents' role and size.
//
// Interface: rd_layer is read with one cycle of latency into rd_sign (bit i set means
// s_i = -1). ld_en writes ld_data into layer ld_layer at the clock edge; a read of the same
// layer in the next cycle sees the new value. Reset returns every layer to its default.
module sign_rom
  import axelram_pkg::*;
#(
  parameter int unsigned D         = D_DEF,
  parameter int unsigned LAYERS    = LAYERS_DEF,
  parameter int unsigned SIGN_SEED = 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [$clog2(LAYERS)-1:0] rd_layer,
  output logic [D-1:0]              rd_sign,
  input  logic                      ld_en,
  input  logic [$clog2(LAYERS)-1:0] ld_layer,
  input  logic [D-1:0]              ld_data
);
  logic [D-1:0] def_rom [LAYERS];
  logic [D-1:0] ld_mem  [LAYERS];
  logic [LAYERS-1:0] loaded;

  for (genvar l = 0; l < LAYERS; l++) begin : g_def
    localparam logic [1023:0] DEF = default_signs(SIGN_SEED, l, D);
    assign def_rom[l] = DEF[D-1:0];
  end

  always_ff @(posedge clk) begin
    if (ld_en) ld_mem[ld_layer] <= ld_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) loaded <= '0;
    else if (ld_en) loaded[ld_layer] <= 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_sign <= '0;
    else if (ld_en && ld_layer == rd_layer) rd_sign <= ld_data;
    else rd_sign <= loaded[rd_layer] ? ld_mem[rd_layer] : def_rom[rd_layer];
  end
endmodule
