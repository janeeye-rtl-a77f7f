// janeeye_pkg -- shared widths, encodings and fixed-point helpers of the
// JaneEye event-based eye-tracking accelerator.
//
// Number formats follow the paper: weights are 8-bit Q1.7, activations are
// 16-bit Q5.11, a PE product is 24 bits and a PE accumulator 32 bits, so an
// accumulated sum carries 18 fractional bits and is brought back to Q5.11 by
// a 7-bit right shift with convergent (round-half-to-even) rounding.
//
// The array is 8 output tiles x 8 PEs. Activation words are 128 bits
// (8 channels x 16 bit), weight words 512 bits (64 PEs x 8 bit), bias words
// 128 bits (8 output channels x 16 bit); these widths are the bus widths
// printed in the block diagram. The layer descriptor format, the memory
// layouts and the saturation on overflow are this design's own choices.
package janeeye_pkg;

  localparam int ACT_W    = 16;   // Q5.11
  localparam int ACT_FRAC = 11;
  localparam int W_W      = 8;    // Q1.7
  localparam int W_FRAC   = 7;
  localparam int PROD_W   = ACT_W + W_W;  // 24
  localparam int PSUM_W   = 32;
  localparam int N_TILE   = 8;    // output tiles (output channels per pass)
  localparam int N_LANE   = 8;    // PEs per tile (input channels per word)
  localparam int WREG_DEPTH = 9;  // 9 x 8-bit weight register per PE
  localparam int SRAM_LAT   = 8;  // SRAM read latency in cycles
  localparam int FIFO_DEPTH = 16; // dispatcher FIFO entries
  localparam int FLUSH_CYCLES = 2; // dataflow mode switch

  localparam int ACT_WORD_W  = N_LANE * ACT_W;          // 128
  localparam int W_WORD_W    = N_TILE * N_LANE * W_W;   // 512
  localparam int B_WORD_W    = N_TILE * ACT_W;          // 128

  // 32 KB / 16 B, 64 KB / 64 B, 4 KB / 16 B
  localparam int ACT_DEPTH = 2048;
  localparam int W_DEPTH   = 1024;
  localparam int B_DEPTH   = 256;
  localparam int ACT_AW = $clog2(ACT_DEPTH);
  localparam int W_AW   = $clog2(W_DEPTH);
  localparam int B_AW   = $clog2(B_DEPTH);

  localparam int MAX_LAYERS = 16;
  localparam int DIM_W      = 8;  // feature-map height/width field

  typedef enum logic [1:0] {
    AF_BYPASS = 2'd0,
    AF_RELU   = 2'd1,
    AF_HSIG   = 2'd2,
    AF_HTANH  = 2'd3
  } act_func_e;

  typedef enum logic {
    DF_WS = 1'b0,   // weight stationary: weights held in the PE register
    DF_OS = 1'b1    // output stationary: weights stream past the register
  } df_mode_e;

  // One layer of the network program. A layer is a KxK convolution with
  // stride and zero padding; 1x1 convolutions and the fully connected layer
  // are the K=1 case (FC: a 1x1 feature map).
  typedef struct packed {
    logic [2:0]        k;        // kernel size 1..7
    logic [1:0]        stride;   // 1..3
    logic [2:0]        pad;      // zero padding on every side
    logic [DIM_W-1:0]  in_h;
    logic [DIM_W-1:0]  in_w;
    logic [DIM_W-1:0]  out_h;
    logic [DIM_W-1:0]  out_w;
    logic [3:0]        n_ig;     // input channel groups of 8
    logic [3:0]        n_og;     // output channel groups of 8
    act_func_e         func;
    logic [ACT_AW-1:0] in_base;
    logic [ACT_AW-1:0] out_base;
    logic [W_AW-1:0]   w_base;
    logic [B_AW-1:0]   b_base;
  } layer_cfg_t;

  // Steps one output pixel takes: one per input group and kernel tap.
  function automatic logic [9:0] layer_steps(layer_cfg_t c);
    return 10'(c.n_ig) * 10'(c.k) * 10'(c.k);
  endfunction

  // Weight-stationary whenever all taps of a pass fit in the PE register.
  function automatic df_mode_e layer_mode(layer_cfg_t c);
    return (layer_steps(c) <= 10'(WREG_DEPTH)) ? DF_WS : DF_OS;
  endfunction

  // Convergent rounding of v by 'sh' bits, then saturation to 16 bits.
  function automatic logic signed [ACT_W-1:0] round_conv_sat(
      input logic signed [PSUM_W+2:0] v, input int sh);
    logic signed [PSUM_W+2:0] q, rem, half;
    logic signed [PSUM_W+2:0] r;
    q    = v >>> sh;
    rem  = v - (q <<< sh);               // 0 .. 2^sh-1
    half = (PSUM_W+3)'(1) <<< (sh - 1);
    if (rem > half || (rem == half && q[0])) r = q + 1;
    else                                      r = q;
    if (r > (PSUM_W+3)'(32767))       return 16'sh7fff;
    else if (r < -(PSUM_W+3)'(32768)) return 16'sh8000;
    else                              return r[ACT_W-1:0];
  endfunction

  function automatic logic signed [ACT_W-1:0] sat16(input logic signed [PSUM_W-1:0] v);
    if (v > 32'sd32767)       return 16'sh7fff;
    else if (v < -32'sd32768) return 16'sh8000;
    else                      return v[ACT_W-1:0];
  endfunction

endpackage
