// pe -- one processing engine of the 8x8 MAC array.
//
// Datapath as drawn in the paper's PE figure: a 9 x 8-bit weight register, an
// 8-bit (Q1.7) x 16-bit (Q5.11) multiplier giving a 24-bit product, a 32-bit
// adder whose second operand is chosen by a 2:1 mux between 0 (first step of
// a new output) and the 32-bit psum register (accumulate), and a rounding &
// truncate unit that brings the psum back to a 16-bit Q5.11 value with
// convergent rounding (7-bit right shift, saturating).
//
// Dataflow modes (paper: "2:1 multiplexers on all data paths"):
//   DF_WS  the multiplier takes wreg[w_idx]; the register is filled beforehand
//          through wreg_we/wreg_idx/w_in and reused for every output pixel.
//   DF_OS  the multiplier takes w_in directly, weights stream past the PE and
//          only the partial sum stays.
// Zero skipping (paper: OR-tree zero detection gating the MAC): when the
// activation is zero the psum register is not clocked (or is cleared on a
// first step) and skip_o is raised for that cycle.
//
// Timing: a MAC presented with mac_en in cycle n is in psum_o / out_o in
// cycle n+1. Register interface, saturation and the zero-skip signalling are
// this design's choices.
module pe
  import janeeye_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  df_mode_e                   mode,
  // weight register load
  input  logic                       wreg_we,
  input  logic [3:0]                 wreg_idx,
  input  logic signed [W_W-1:0]      w_in,
  // MAC
  input  logic                       mac_en,
  input  logic                       first,     // mux select: add to 0
  input  logic [3:0]                 w_idx,     // register entry used in WS
  input  logic signed [ACT_W-1:0]    act_in,
  output logic signed [PSUM_W-1:0]   psum_o,
  output logic signed [ACT_W-1:0]    out_o,
  output logic                       skip_o
);

  logic signed [W_W-1:0]    wreg [WREG_DEPTH];
  logic signed [W_W-1:0]    w_op;
  logic signed [PROD_W-1:0] prod;
  logic signed [PSUM_W-1:0] addend, sum, psum_q;
  logic                     act_zero;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < WREG_DEPTH; i++) wreg[i] <= '0;
    end else if (wreg_we && wreg_idx < 4'(WREG_DEPTH)) begin
      wreg[wreg_idx] <= w_in;
    end
  end

  always_comb begin
    w_op     = (mode == DF_WS) ? ((w_idx < 4'(WREG_DEPTH)) ? wreg[w_idx] : '0) : w_in;
    prod     = PROD_W'(w_op) * PROD_W'(act_in);
    addend   = first ? '0 : psum_q;
    sum      = addend + PSUM_W'(prod);
    act_zero = ~|act_in;   // OR-tree zero detect
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                   psum_q <= '0;
    else if (mac_en && !act_zero) psum_q <= sum;
    else if (mac_en && first)     psum_q <= '0;
  end

  assign skip_o = mac_en && act_zero;
  assign psum_o = psum_q;
  assign out_o  = round_conv_sat((PSUM_W+3)'(psum_q), W_FRAC);

endmodule
