// pe_array -- the 64-PE compute core: eight output tiles of eight PEs.
//
// As in the paper's block diagram, the 512-bit weight word from the weight
// SRAM is split into 64 8-bit weights (tile t, lane k at bit 64t+8k), the
// eight 16-bit activations are broadcast to the same lane of every tile, and
// each tile gets its own 16-bit bias lane. All 64 PEs run in lock step from
// one set of control signals. Output: eight 16-bit results (one per output
// channel of the pass), valid four cycles after the last MAC of a pixel.
module pe_array
  import janeeye_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  df_mode_e                  mode,
  input  logic                      wreg_we,
  input  logic [3:0]                wreg_idx,
  input  logic [W_WORD_W-1:0]       w_word,
  input  logic                      mac_en,
  input  logic                      first,
  input  logic                      last,
  input  logic [3:0]                w_idx,
  input  logic [ACT_WORD_W-1:0]     act_word,
  input  logic [B_WORD_W-1:0]       bias_word,
  output logic                      out_valid,
  output logic [ACT_WORD_W-1:0]     out_word,
  output logic [6:0]                n_skip      // PEs zero-skipped this cycle
);

  logic signed [ACT_W-1:0] act [N_LANE];
  logic [N_TILE-1:0]       tv;
  logic [N_LANE-1:0]       skip [N_TILE];

  for (genvar k = 0; k < N_LANE; k++) begin : g_act
    assign act[k] = act_word[k*ACT_W +: ACT_W];
  end

  for (genvar t = 0; t < N_TILE; t++) begin : g_tile
    output_tile u_tile (
      .clk, .rst_n, .mode, .wreg_we, .wreg_idx,
      .w_bus     (w_word[t*N_LANE*W_W +: N_LANE*W_W]),
      .mac_en, .first, .last, .w_idx,
      .act,
      .bias      (bias_word[t*ACT_W +: ACT_W]),
      .out_valid (tv[t]),
      .out       (out_word[t*ACT_W +: ACT_W]),
      .skip      (skip[t])
    );
  end

  assign out_valid = tv[0];

  always_comb begin
    n_skip = '0;
    for (int t = 0; t < N_TILE; t++)
      for (int k = 0; k < N_LANE; k++)
        n_skip += 7'(skip[t][k]);
  end

endmodule
