// tb_janeeye_top -- end-to-end test of the accelerator at its default sizes.
//
// Loads a small five-layer network in the JaneEye-Net style into the
// memories (7x7 convolution, stride-2 3x3 convolution, 3x3 convolution over
// two input groups, 1x1 convolution, and a 1x1-map "fully connected" layer),
// runs it once and compares every output word of every layer with a
// reference model written here from the arithmetic rules (Q1.7 x Q5.11
// products, 32-bit accumulation, convergent rounding by 7 bits, saturating
// bias addition, the four activation functions). It also checks the (x, y)
// result, the number of MAC cycles (one step per cycle per pixel) and the
// total run time, and counts the mechanisms the run must exercise: OS and WS
// layers, dataflow mode switches with their flush, zero skipping, zero
// padding, FIFO-fill stalls, every activation function and stride 2.
`timescale 1ns/1ps
module tb_janeeye_top;
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

  // ------------------------------------------------------------ reference
  localparam int NL = 5;
  logic [ACT_WORD_W-1:0] ref_act [ACT_DEPTH];
  logic [W_WORD_W-1:0]   ref_w   [W_DEPTH];
  logic [B_WORD_W-1:0]   ref_b   [B_DEPTH];
  layer_cfg_t            L [NL];
  bit                    used_func [4];
  int                    pad_steps, stride2_layers, expect_macs;

  function automatic int rnd_conv(input longint v);   // round half to even by 7 bits
    longint q, r;
    q = v >>> 7;
    r = v - q * 128;
    if (r > 64 || (r == 64 && (q % 2 != 0))) q = q + 1;
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    return int'(q);
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
    int S, iy, ix, wa, acc, tot;
    longint ps;
    S = c.n_ig * c.k * c.k;
    used_func[c.func] = 1;
    if (c.stride == 2) stride2_layers++;
    for (int og = 0; og < c.n_og; og++)
      for (int oy = 0; oy < c.out_h; oy++)
        for (int ox = 0; ox < c.out_w; ox++) begin
          logic [ACT_WORD_W-1:0] word;
          expect_macs += S;
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
                    if (iy < 0 || ix < 0 || iy >= c.in_h || ix >= c.in_w) begin
                      if (t == 0 && kk == 0) pad_steps++;
                      continue;
                    end
                    ps += longint'($signed(ref_w[wa][(t*8+kk)*8 +: 8])) *
                          longint'($signed(ref_act[c.in_base + (iy*c.in_w + ix)*c.n_ig + g][kk*16 +: 16]));
                  end
              tot += rnd_conv(ps);
            end
            acc = tot + int'($signed(ref_b[c.b_base + og][t*16 +: 16]));
            if (acc > 32767) acc = 32767;
            if (acc < -32768) acc = -32768;
            word[t*16 +: 16] = 16'(actf(acc, c.func));
          end
          ref_act[c.out_base + (oy*c.out_w + ox)*c.n_og + og] = word;
        end
  endtask

  function automatic layer_cfg_t mk(int k, int st, int pd, int ih, int iw, int oh, int ow,
                                    int nig, int nog, act_func_e f, int ib, int ob, int wb, int bb);
    layer_cfg_t c;
    c.k = 3'(k); c.stride = 2'(st); c.pad = 3'(pd);
    c.in_h = 8'(ih); c.in_w = 8'(iw); c.out_h = 8'(oh); c.out_w = 8'(ow);
    c.n_ig = 4'(nig); c.n_og = 4'(nog); c.func = f;
    c.in_base = ACT_AW'(ib); c.out_base = ACT_AW'(ob); c.w_base = W_AW'(wb); c.b_base = B_AW'(bb);
    return c;
  endfunction

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_w, cyc0, total_cycles, n_passes;
    host_act_we = 0; host_w_we = 0; host_b_we = 0; cfg_we = 0; start = 0;
    host_act_addr = '0; host_act_data = '0; host_w_addr = '0; host_w_data = '0;
    host_b_addr = '0; host_b_data = '0; cfg_addr = '0; cfg_data = '0; n_layers = '0;
    pad_steps = 0; stride2_layers = 0; expect_macs = 0;
    foreach (used_func[i]) used_func[i] = 0;
    for (int i = 0; i < ACT_DEPTH; i++) ref_act[i] = '0;

    //          k st pd  ih iw  oh ow ig og func      in   out  wb  bb
    L[0] = mk(7, 1, 3, 12, 16, 12, 16, 1, 1, AF_RELU,    0, 200,  0, 0);
    L[1] = mk(3, 2, 1, 12, 16,  6,  8, 1, 2, AF_RELU,  200, 400, 49, 1);
    L[2] = mk(3, 1, 1,  6,  8,  6,  8, 2, 1, AF_HTANH, 400, 500, 67, 3);
    L[3] = mk(1, 1, 0,  6,  8,  6,  8, 1, 2, AF_HSIG,  500, 600, 85, 4);
    L[4] = mk(1, 1, 0,  1,  1,  1,  1, 2, 1, AF_BYPASS,600, 700, 87, 6);
    n_w = 89;

    // input frame: three channels (lanes 0..2), about a third of the pixels zero
    for (int p = 0; p < 12*16; p++) begin
      logic [ACT_WORD_W-1:0] wd;
      wd = '0;
      for (int ch = 0; ch < 3; ch++)
        if ($urandom_range(2) != 0) wd[ch*16 +: 16] = 16'($signed($urandom_range(4095)) - 2048);
      ref_act[p] = wd;
    end
    for (int a = 0; a < n_w; a++)
      for (int i = 0; i < 64; i++) ref_w[a][i*8 +: 8] = 8'($urandom_range(127) - 64);
    for (int a = 0; a < 7; a++)
      for (int i = 0; i < 8; i++) ref_b[a][i*16 +: 16] = 16'($signed($urandom_range(2047)) - 1024);

    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    // load memories and layer table through the host ports
    for (int p = 0; p < 12*16; p++) begin
      host_act_we <= 1; host_act_addr <= ACT_AW'(p); host_act_data <= ref_act[p];
      @(posedge clk);
    end
    host_act_we <= 0;
    for (int a = 0; a < n_w; a++) begin
      host_w_we <= 1; host_w_addr <= W_AW'(a); host_w_data <= ref_w[a];
      @(posedge clk);
    end
    host_w_we <= 0;
    for (int a = 0; a < 7; a++) begin
      host_b_we <= 1; host_b_addr <= B_AW'(a); host_b_data <= ref_b[a];
      @(posedge clk);
    end
    host_b_we <= 0;
    for (int l = 0; l < NL; l++) begin
      cfg_we <= 1; cfg_addr <= 4'(l); cfg_data <= L[l];
      @(posedge clk);
    end
    cfg_we <= 0;

    for (int l = 0; l < NL; l++) ref_layer(L[l]);

    n_layers <= 5'(NL);
    start    <= 1;
    @(posedge clk);
    start    <= 0;
    cyc0 = 0;
    while (!done) begin
      @(posedge clk);
      cyc0++;
      if (xy_valid) begin
        check(pupil_x == ref_act[700][15:0],  "pupil x");
        check(pupil_y == ref_act[700][31:16], "pupil y");
      end
    end
    total_cycles = cyc0;
    check(!error, "no error");

    // every output word of every layer
    for (int l = 0; l < NL; l++) begin
      int nw;
      nw = L[l].out_h * L[l].out_w * L[l].n_og;
      for (int a = 0; a < nw; a++) begin
        int ad;
        ad = L[l].out_base + a;
        check(dut.u_act_sram.mem[ad] == ref_act[ad],
              $sformatf("layer %0d word %0d: got %h exp %h", l, a, dut.u_act_sram.mem[ad], ref_act[ad]));
      end
    end

    // rate: one accumulation step per cycle, small fixed overhead per pass
    n_passes = 0;
    for (int l = 0; l < NL; l++) n_passes += L[l].n_og;
    check(perf_mac_cycles == 32'(expect_macs),
          $sformatf("MAC cycles %0d, expected %0d", perf_mac_cycles, expect_macs));
    check(total_cycles <= expect_macs + n_passes * 60 + 40,
          $sformatf("run took %0d cycles for %0d MAC steps", total_cycles, expect_macs));
    check(perf_stall_cycles <= 32'(n_passes * 3 * (SRAM_LAT + 4)), "stalls only at pass start");

    // mechanisms
    $display("mechanisms: os_layers=%0d ws_layers=%0d mode_switches=%0d zero_skips=%0d stalls=%0d pad_steps=%0d stride2=%0d",
             perf_os_layers, perf_ws_layers, perf_mode_switches, perf_zero_skips, perf_stall_cycles,
             pad_steps, stride2_layers);
    $display("run: %0d cycles, %0d MAC steps, %0d passes", total_cycles, expect_macs, n_passes);
    check(perf_os_layers == 2, "OS layers");
    check(perf_ws_layers == 3, "WS layers");
    check(perf_mode_switches == 3, "mode switches WS<->OS");
    check(perf_zero_skips > 0, "zero skipping happened");
    check(perf_stall_cycles > 0, "FIFO fill stall happened");
    check(pad_steps > 0, "zero padding happened");
    check(stride2_layers > 0, "stride 2 happened");
    foreach (used_func[i]) check(used_func[i], $sformatf("activation function %0d used", i));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
