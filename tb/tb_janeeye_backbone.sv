// tb_janeeye_backbone -- one JaneEye-Net frame on the accelerator, on a
// reduced 24x16 input, with a host model doing the element-wise steps.
//
// The network follows the published layer order: three convolutions
// (7x7, 3x3, 3x3, ReLU), a gated MLP (1x1 convolution to twice the channels,
// split, element-wise product with ReLU of the second half, 1x1
// convolution), a ConvJANET cell whose forget gate and candidate are each a
// depthwise 3x3 convolution followed by a 1x1 convolution over the
// concatenation [x, h_prev] (HardSigmoid and HardTanh), global max pooling
// and a fully connected layer giving (x, y). The channel counts (8 and 16),
// the strides (1) and the frame size are this test's choices: the frame and
// channel sizes are picked so that every map fits the activation SRAM.
//
// The accelerator runs every convolution and the FC layer, in four layer
// programs. Between programs the testbench acts as the host: it computes the
// GMLP product, builds the ConvJANET input [x, h_prev], applies the state
// update c = f*c_prev + (1 - f)*c~ and the max pooling (none of which the
// core has hardware for), and writes the results back through the host port.
// Every output word of every layer is compared with a reference model, the
// final (x, y) is checked, and the ratio of MAC cycles to busy cycles of each
// program is printed and checked against the 87 %..93 % array utilisation
// reported for the chip (at least 85 % is required here).
`timescale 1ns/1ps
module tb_janeeye_backbone;
  import janeeye_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1.25 clk = ~clk;   // 400 MHz

  logic                  host_act_we, host_w_we, host_b_we, cfg_we, start;
  logic [ACT_AW-1:0]     host_act_addr;
  logic [ACT_WORD_W-1:0] host_act_data;
  logic [W_AW-1:0]       host_w_addr;
  logic [W_WORD_W-1:0]   host_w_data;
  logic [B_AW-1:0]       host_b_addr;
  logic [B_WORD_W-1:0]   host_b_data;
  logic [3:0]            cfg_addr;
  layer_cfg_t            cfg_data;
  logic [4:0]            n_layers;
  logic                  busy, done, error, xy_valid;
  logic signed [15:0]    pupil_x, pupil_y;
  logic [31:0]           perf_cycles, perf_mac_cycles, perf_zero_skips, perf_stall_cycles;
  logic [15:0]           perf_mode_switches, perf_ws_layers, perf_os_layers;

  janeeye_top dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  localparam int H = 16, W = 24, NP = H * W;

  logic [ACT_WORD_W-1:0] ref_act [ACT_DEPTH];
  logic [W_WORD_W-1:0]   ref_w   [W_DEPTH];
  logic [B_WORD_W-1:0]   ref_b   [B_DEPTH];
  int                    total_macs, total_busy;

  // ------------------------------------------------------------ reference
  function automatic int rnd_conv(input longint v);   // round half to even by 7 bits
    longint q, r;
    q = v >>> 7;
    r = v - q * 128;
    if (r > 64 || (r == 64 && (q % 2 != 0))) q = q + 1;
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    return int'(q);
  endfunction

  function automatic int sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int actf(input int x, input act_func_e f);
    case (f)
      AF_RELU:  return (x < 0) ? 0 : x;
      AF_HSIG:  return (x < -8192) ? 0 : (x > 8192) ? 2048 : ((x >>> 3) + 1024);
      AF_HTANH: return (x < -4096) ? -2048 : (x > 4096) ? 2048 : (x >>> 1);
      default:  return x;
    endcase
  endfunction

  task automatic ref_layer(input layer_cfg_t c);
    int S, iy, ix, wa, tot;
    longint ps;
    logic [ACT_WORD_W-1:0] outw [];
    S = c.n_ig * c.k * c.k;
    outw = new[int'(c.out_h) * int'(c.out_w) * int'(c.n_og)];
    for (int og = 0; og < c.n_og; og++)
      for (int oy = 0; oy < c.out_h; oy++)
        for (int ox = 0; ox < c.out_w; ox++) begin
          logic [ACT_WORD_W-1:0] word;
          for (int t = 0; t < 8; t++) begin
            tot = 0;
            for (int kk = 0; kk < 8; kk++) begin
              ps = 0;
              for (int g = 0; g < c.n_ig; g++)
                for (int ky = 0; ky < c.k; ky++)
                  for (int kx = 0; kx < c.k; kx++) begin
                    iy = oy * c.stride + ky - c.pad;
                    ix = ox * c.stride + kx - c.pad;
                    wa = c.w_base + og * S + (g * c.k + ky) * c.k + kx;
                    if (iy < 0 || ix < 0 || iy >= c.in_h || ix >= c.in_w) continue;
                    ps += longint'($signed(ref_w[wa][(t*8+kk)*8 +: 8])) *
                          longint'($signed(ref_act[c.in_base + (iy*c.in_w + ix)*c.n_ig + g][kk*16 +: 16]));
                  end
              tot += rnd_conv(ps);
            end
            tot = sat(tot + int'($signed(ref_b[c.b_base + og][t*16 +: 16])));
            word[t*16 +: 16] = 16'(actf(tot, c.func));
          end
          outw[(oy*c.out_w + ox)*c.n_og + og] = word;
        end
    // written after the whole layer, so a layer may not read its own output
    foreach (outw[a]) ref_act[c.out_base + a] = outw[a];
  endtask

  function automatic layer_cfg_t mk(int k, int ih, int iw, int nig, int nog, act_func_e f,
                                    int ib, int ob, int wb, int bb);
    layer_cfg_t c;
    c.k = 3'(k); c.stride = 2'd1; c.pad = 3'(k / 2);
    c.in_h = 8'(ih); c.in_w = 8'(iw); c.out_h = 8'(ih); c.out_w = 8'(iw);
    c.n_ig = 4'(nig); c.n_og = 4'(nog); c.func = f;
    c.in_base = ACT_AW'(ib); c.out_base = ACT_AW'(ob); c.w_base = W_AW'(wb); c.b_base = B_AW'(bb);
    return c;
  endfunction

  // random weights; dense, or depthwise (only weight k -> k of the same group)
  task automatic gen_weights(input layer_cfg_t c, input bit depthwise);
    int S;
    S = c.n_ig * c.k * c.k;
    for (int og = 0; og < c.n_og; og++)
      for (int s = 0; s < S; s++) begin
        logic [W_WORD_W-1:0] wd;
        int g;
        g = s / (c.k * c.k);
        wd = '0;
        for (int t = 0; t < 8; t++)
          for (int kk = 0; kk < 8; kk++)
            if (!depthwise || (t == kk && g == og))
              wd[(t*8+kk)*8 +: 8] = 8'($urandom_range(96) - 48);
        ref_w[c.w_base + og * S + s] = wd;
      end
    for (int og = 0; og < c.n_og; og++)
      for (int t = 0; t < 8; t++)
        ref_b[c.b_base + og][t*16 +: 16] = 16'($signed($urandom_range(1023)) - 512);
  endtask

  // host writes of one activation word range
  task automatic host_write_act(input int base, input int n);
    for (int a = base; a < base + n; a++) begin
      host_act_we <= 1; host_act_addr <= ACT_AW'(a); host_act_data <= ref_act[a];
      @(posedge clk);
    end
    host_act_we <= 0;
  endtask

  // run a layer program on the core and compare every output word
  task automatic run_program(input string name, input layer_cfg_t P [], output int cyc);
    int macs;
    foreach (P[l]) begin
      cfg_we <= 1; cfg_addr <= 4'(l); cfg_data <= P[l];
      @(posedge clk);
    end
    cfg_we <= 0;
    n_layers <= 5'(P.size());
    start    <= 1;
    @(posedge clk);
    start    <= 0;
    cyc = 0;
    while (!done) begin
      @(posedge clk);
      cyc++;
    end
    check(!error, {name, ": no error"});
    macs = 0;
    // all layers first: a later layer of the program may overwrite an earlier
    // layer's output, whose effect is then checked through the later layers
    foreach (P[l]) begin
      ref_layer(P[l]);
      macs += P[l].out_h * P[l].out_w * P[l].n_og * P[l].n_ig * P[l].k * P[l].k;
    end
    foreach (P[l]) begin
      for (int a = 0; a < P[l].out_h * P[l].out_w * P[l].n_og; a++) begin
        int ad;
        ad = P[l].out_base + a;
        check(dut.u_act_sram.mem[ad] == ref_act[ad],
              $sformatf("%s layer %0d word %0d: got %h exp %h", name, l, a, dut.u_act_sram.mem[ad], ref_act[ad]));
      end
    end
    check(perf_mac_cycles == 32'(macs), $sformatf("%s: MAC cycles %0d exp %0d", name, perf_mac_cycles, macs));
    $display("%s: %0d layers, %0d MAC cycles in %0d busy cycles (%0d.%0d %%), %0d stalls, %0d zero skips",
             name, P.size(), perf_mac_cycles, perf_cycles, perf_mac_cycles * 100 / perf_cycles,
             (perf_mac_cycles * 1000 / perf_cycles) % 10, perf_stall_cycles, perf_zero_skips);
    total_macs += int'(perf_mac_cycles);
    total_busy += int'(perf_cycles);
    @(posedge clk);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory map (activation words):  see the comments per layer
  localparam int A_IN = 0, A_C1 = 384, A_C2 = 768, A_C3 = 0, A_Z = 1152,
                 A_Y = 384, A_G = 768, A_CAT = 1152, A_DWF = 0, A_F = 768,
                 A_DWG = 0, A_CT = 1152, A_POOL = 1536, A_XY = 1537;

  initial begin
    layer_cfg_t P1 [], P2 [], P3 [], P4 [];
    int c1, c2, c3, c4, nw, nxy;
    logic signed [15:0] h_prev [NP][8];
    logic signed [15:0] pool [8];
    host_act_we = 0; host_w_we = 0; host_b_we = 0; cfg_we = 0; start = 0;
    host_act_addr = '0; host_act_data = '0; host_w_addr = '0; host_w_data = '0;
    host_b_addr = '0; host_b_data = '0; cfg_addr = '0; cfg_data = '0; n_layers = '0;
    total_macs = 0; total_busy = 0; nxy = 0;
    for (int i = 0; i < ACT_DEPTH; i++) ref_act[i] = '0;
    for (int i = 0; i < W_DEPTH; i++) ref_w[i] = '0;
    for (int i = 0; i < B_DEPTH; i++) ref_b[i] = '0;

    //            k  h  w  ig og func       in     out    wb   bb
    P1 = new[4];
    P1[0] = mk(7, H, W, 1, 1, AF_RELU,   A_IN,  A_C1,    0,  0);  // conv1 7x7, 3 -> 8
    P1[1] = mk(3, H, W, 1, 1, AF_RELU,   A_C1,  A_C2,   49,  1);  // conv2 3x3, 8 -> 8
    P1[2] = mk(3, H, W, 1, 1, AF_RELU,   A_C2,  A_C3,   58,  2);  // conv3 3x3, 8 -> 8
    P1[3] = mk(1, H, W, 1, 2, AF_BYPASS, A_C3,  A_Z,    67,  3);  // GMLP Z = 1x1, 8 -> 16
    P2 = new[1];
    P2[0] = mk(1, H, W, 1, 1, AF_BYPASS, A_Y,   A_G,    69,  5);  // GMLP out 1x1, 8 -> 8
    P3 = new[4];
    P3[0] = mk(3, H, W, 2, 2, AF_BYPASS, A_CAT, A_DWF,  70,  6);  // F: depthwise 3x3 on [x, h]
    P3[1] = mk(1, H, W, 2, 1, AF_HSIG,   A_DWF, A_F,   106,  8);  // F: 1x1, 16 -> 8, HardSigmoid
    P3[2] = mk(3, H, W, 2, 2, AF_BYPASS, A_CAT, A_DWG, 108,  9);  // G: depthwise 3x3 on [x, h]
    P3[3] = mk(1, H, W, 2, 1, AF_HTANH,  A_DWG, A_CT,  144, 11);  // G: 1x1, 16 -> 8, HardTanh
    P4 = new[1];
    P4[0] = mk(1, 1, 1, 1, 1, AF_BYPASS, A_POOL, A_XY, 146, 12);  // FC 8 -> 2 (lanes 0, 1)
    nw = 147;
    foreach (P1[l]) gen_weights(P1[l], 1'b0);
    gen_weights(P2[0], 1'b0);
    gen_weights(P3[0], 1'b1);
    gen_weights(P3[1], 1'b0);
    gen_weights(P3[2], 1'b1);
    gen_weights(P3[3], 1'b0);
    gen_weights(P4[0], 1'b0);

    // event frame: 3 channels (count / polarity style), mostly zero
    for (int p = 0; p < NP; p++) begin
      logic [ACT_WORD_W-1:0] wd;
      wd = '0;
      for (int ch = 0; ch < 3; ch++)
        if ($urandom_range(3) == 0) wd[ch*16 +: 16] = 16'($urandom_range(4096));
      ref_act[A_IN + p] = wd;
    end
    // previous ConvJANET state (as if from the frame before)
    for (int p = 0; p < NP; p++)
      for (int ch = 0; ch < 8; ch++) h_prev[p][ch] = 16'($signed($urandom_range(2047)) - 1024);

    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    host_write_act(A_IN, NP);
    for (int a = 0; a < nw; a++) begin
      host_w_we <= 1; host_w_addr <= W_AW'(a); host_w_data <= ref_w[a];
      @(posedge clk);
    end
    host_w_we <= 0;
    for (int a = 0; a < 13; a++) begin
      host_b_we <= 1; host_b_addr <= B_AW'(a); host_b_data <= ref_b[a];
      @(posedge clk);
    end
    host_b_we <= 0;

    // program 1: backbone and GMLP expansion
    run_program("conv1-3 + GMLP in", P1, c1);

    // host: Y = Z1 (.) ReLU(Z2), Q5.11 product rounded down, saturated
    for (int p = 0; p < NP; p++) begin
      logic [ACT_WORD_W-1:0] wd;
      for (int ch = 0; ch < 8; ch++) begin
        int z1, z2;
        z1 = int'($signed(ref_act[A_Z + 2*p][ch*16 +: 16]));
        z2 = int'($signed(ref_act[A_Z + 2*p + 1][ch*16 +: 16]));
        if (z2 < 0) z2 = 0;
        wd[ch*16 +: 16] = 16'(sat((longint'(z1) * z2) >>> 11));
      end
      ref_act[A_Y + p] = wd;
    end
    host_write_act(A_Y, NP);

    // program 2: GMLP output projection
    run_program("GMLP out", P2, c2);

    // host: ConvJANET input [x, h_prev], two groups per pixel
    for (int p = 0; p < NP; p++) begin
      logic [ACT_WORD_W-1:0] wd;
      for (int ch = 0; ch < 8; ch++) wd[ch*16 +: 16] = h_prev[p][ch];
      ref_act[A_CAT + 2*p]     = ref_act[A_G + p];
      ref_act[A_CAT + 2*p + 1] = wd;
    end
    host_write_act(A_CAT, 2 * NP);

    // program 3: forget gate and candidate
    run_program("ConvJANET gates", P3, c3);

    // host: c = f*c_prev + (1 - f)*c~, then global max pooling
    foreach (pool[ch]) pool[ch] = -16'sd32768;
    for (int p = 0; p < NP; p++)
      for (int ch = 0; ch < 8; ch++) begin
        longint f, ct, cn;
        f  = longint'($signed(ref_act[A_F + p][ch*16 +: 16]));
        ct = longint'($signed(ref_act[A_CT + p][ch*16 +: 16]));
        cn = sat((f * h_prev[p][ch] + (2048 - f) * ct) >>> 11);
        if ($signed(16'(cn)) > pool[ch]) pool[ch] = 16'(cn);
      end
    for (int ch = 0; ch < 8; ch++) ref_act[A_POOL][ch*16 +: 16] = pool[ch];
    host_write_act(A_POOL, 1);

    // program 4: fully connected head, (x, y) from lanes 0 and 1
    fork
      begin
        @(posedge clk);
        while (!done) begin
          @(posedge clk);
          if (xy_valid) nxy++;
        end
      end
      run_program("FC head", P4, c4);
    join
    check(nxy == 1, "one (x, y) result");
    check(pupil_x == $signed(ref_act[A_XY][15:0]),  $sformatf("pupil x %0d", pupil_x));
    check(pupil_y == $signed(ref_act[A_XY][31:16]), $sformatf("pupil y %0d", pupil_y));

    $display("frame: %0d MAC cycles in %0d busy cycles (%0d %%), %0d us at 400 MHz without host steps",
             total_macs, total_busy, total_macs * 100 / total_busy, total_busy / 400);
    check(total_macs * 100 >= total_busy * 85, "array busy at least 85 % of the run");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
