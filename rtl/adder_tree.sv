// adder_tree -- reduction tree of one output tile.
//
// Adds the eight rounded 16-bit PE outputs of a tile (one per input channel
// lane) and the tile's 16-bit bias, then saturates the sum to 16-bit Q5.11.
// The paper's block diagram shows the eight PE outputs and a 16-bit bias
// (B0..B7) entering each tile's adder tree; the pipelining (three register
// stages: 4 pair sums, 2 quad sums, final sum + bias) and saturation are this
// design's choices.
//
// Timing: in_valid/in_* in cycle n gives out_valid/out in cycle n+3.
module adder_tree
  import janeeye_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [ACT_W-1:0] in   [N_LANE],
  input  logic signed [ACT_W-1:0] bias,
  output logic                    out_valid,
  output logic signed [ACT_W-1:0] out
);

  logic signed [ACT_W:0]   s1 [4];
  logic signed [ACT_W+1:0] s2 [2];
  logic signed [ACT_W-1:0] b1, b2;
  logic [2:0]              v;
  logic signed [PSUM_W-1:0] s3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v  <= '0;
      b1 <= '0;
      b2 <= '0;
      for (int i = 0; i < 4; i++) s1[i] <= '0;
      for (int i = 0; i < 2; i++) s2[i] <= '0;
      out <= '0;
    end else begin
      v <= {v[1:0], in_valid};
      for (int i = 0; i < 4; i++)
        s1[i] <= (ACT_W+1)'(in[2*i]) + (ACT_W+1)'(in[2*i+1]);
      b1 <= bias;
      for (int i = 0; i < 2; i++)
        s2[i] <= (ACT_W+2)'(s1[2*i]) + (ACT_W+2)'(s1[2*i+1]);
      b2 <= b1;
      out <= sat16(s3);
    end
  end

  assign s3        = PSUM_W'(s2[0]) + PSUM_W'(s2[1]) + PSUM_W'(b2);
  assign out_valid = v[2];

endmodule
