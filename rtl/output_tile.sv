// output_tile -- one column of the MAC array: eight PEs and their adder tree.
//
// Follows the paper's block diagram: PE k of the tile receives activation
// lane A_k (input channel k of the current 8-channel group), shared with PE k
// of every other tile, and its own 8-bit weight W_tk; the eight rounded PE
// outputs and the tile's 16-bit bias go into the tile's adder tree, whose
// 16-bit result is one output channel.
//
// Interface: w_bus carries the 8 weights of this tile (lane k in bits
// [8k+7:8k]); act carries the 8 shared activations. 'last' marks the final
// accumulation step of an output pixel: one cycle later the PE results are
// final and are handed to the adder tree, so a result leaves out/out_valid
// four cycles after its last MAC (1 PE + 3 adder tree). The next pixel may
// start right behind the last step.
module output_tile
  import janeeye_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  df_mode_e                  mode,
  input  logic                      wreg_we,
  input  logic [3:0]                wreg_idx,
  input  logic [N_LANE*W_W-1:0]     w_bus,
  input  logic                      mac_en,
  input  logic                      first,
  input  logic                      last,
  input  logic [3:0]                w_idx,
  input  logic signed [ACT_W-1:0]   act [N_LANE],
  input  logic signed [ACT_W-1:0]   bias,
  output logic                      out_valid,
  output logic signed [ACT_W-1:0]   out,
  output logic [N_LANE-1:0]         skip
);

  logic signed [ACT_W-1:0]  pe_out [N_LANE];
  logic signed [PSUM_W-1:0] pe_psum [N_LANE];
  logic                     done_q;

  for (genvar k = 0; k < N_LANE; k++) begin : g_pe
    pe u_pe (
      .clk, .rst_n, .mode,
      .wreg_we, .wreg_idx,
      .w_in   (w_bus[k*W_W +: W_W]),
      .mac_en, .first, .w_idx,
      .act_in (act[k]),
      .psum_o (pe_psum[k]),
      .out_o  (pe_out[k]),
      .skip_o (skip[k])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_q <= 1'b0;
    else        done_q <= mac_en && last;
  end

  adder_tree u_tree (
    .clk, .rst_n,
    .in_valid  (done_q),
    .in        (pe_out),
    .bias,
    .out_valid,
    .out
  );

endmodule
