// activation_core -- eight-lane nonlinear function unit.
//
// Implements the four functions the paper lists (bypass, ReLU, HardSigmoid,
// HardTanh) on 16-bit Q5.11 values with comparators and shifts only:
//   HardSigmoid(x) = 0 for x < -4, x/8 + 1/2 for -4 <= x <= 4, 1 for x > 4
//   HardTanh(x)    = -1 for x < -2, x/2 for -2 <= x <= 2, 1 for x > 2
// (in Q5.11: 1 = 2048, 4 = 8192). The divisions are arithmetic right shifts
// (rounding toward minus infinity), which is this design's choice.
//
// Timing: two cycles per operation as in the paper. Stage 1 registers the
// input with its range comparisons, stage 2 registers the selected result:
// in_valid in cycle n gives out_valid in cycle n+2, one word per cycle.
module activation_core
  import janeeye_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  act_func_e             func,
  input  logic                  in_valid,
  input  logic [ACT_WORD_W-1:0] in_word,
  output logic                  out_valid,
  output logic [ACT_WORD_W-1:0] out_word
);

  localparam logic signed [ACT_W-1:0] ONE  = 16'sd2048;
  localparam logic signed [ACT_W-1:0] TWO  = 16'sd4096;
  localparam logic signed [ACT_W-1:0] FOUR = 16'sd8192;

  typedef struct packed {
    logic lt_m4, gt_p4, lt_m2, gt_p2, neg;
  } cmp_t;

  logic                    v1, v2;
  act_func_e               f1;
  logic signed [ACT_W-1:0] x1 [N_LANE];
  cmp_t                    c1 [N_LANE];
  logic signed [ACT_W-1:0] y  [N_LANE];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      f1 <= AF_BYPASS;
      for (int i = 0; i < N_LANE; i++) begin
        x1[i] <= '0;
        c1[i] <= '0;
      end
    end else begin
      v1 <= in_valid;
      f1 <= func;
      for (int i = 0; i < N_LANE; i++) begin
        x1[i]       <= in_word[i*ACT_W +: ACT_W];
        c1[i].lt_m4 <= $signed(in_word[i*ACT_W +: ACT_W]) < -FOUR;
        c1[i].gt_p4 <= $signed(in_word[i*ACT_W +: ACT_W]) >  FOUR;
        c1[i].lt_m2 <= $signed(in_word[i*ACT_W +: ACT_W]) < -TWO;
        c1[i].gt_p2 <= $signed(in_word[i*ACT_W +: ACT_W]) >  TWO;
        c1[i].neg   <= in_word[i*ACT_W + ACT_W - 1];
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N_LANE; i++) begin
      unique case (f1)
        AF_RELU:  y[i] = c1[i].neg ? 16'sd0 : x1[i];
        AF_HSIG:  y[i] = c1[i].lt_m4 ? 16'sd0 : c1[i].gt_p4 ? ONE : (x1[i] >>> 3) + (ONE >>> 1);
        AF_HTANH: y[i] = c1[i].lt_m2 ? -ONE : c1[i].gt_p2 ? ONE : (x1[i] >>> 1);
        default:  y[i] = x1[i];
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2       <= 1'b0;
      out_word <= '0;
    end else begin
      v2 <= v1;
      for (int i = 0; i < N_LANE; i++) out_word[i*ACT_W +: ACT_W] <= y[i];
    end
  end

  assign out_valid = v2;

endmodule
