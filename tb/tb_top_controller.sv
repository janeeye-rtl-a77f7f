// tb_top_controller -- self-checking test of the layer-sequencing FSM.
//
// A stand-in dispatcher answers every command after a random delay. The test
// writes a four-layer program whose dataflow modes are OS, WS, WS, OS, runs
// it and checks the complete command trace (BIAS, WLOAD only for WS layers,
// PASS, for every output group of every layer, then one READ of the last
// layer's output base), the configuration and mode sent with each command,
// the 2-cycle flush on each mode change and none otherwise, the (x, y)
// result taken from lanes 0 and 1 of the read word, the done pulse, and that
// a descriptor with a zero field ends in the error state. Thirty random
// programs of 1 to 16 layers then check the same trace rules.
`timescale 1ns/1ps
module tb_top_controller;
  import janeeye_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic cfg_we, start, busy, done, error, cmd_valid, cmd_done, xy_valid;
  logic ev_mode_switch, ev_layer_ws, ev_layer_os;
  logic [3:0] cfg_addr, og;
  layer_cfg_t cfg_data, cfg;
  logic [4:0] n_layers;
  logic [2:0] cmd;
  df_mode_e mode;
  logic [ACT_AW-1:0] rd_word_addr;
  logic [127:0] rd_word;
  act_func_e func;
  logic signed [15:0] pupil_x, pupil_y;

  top_controller dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // stand-in dispatcher
  typedef struct { logic [2:0] c; logic [3:0] g; df_mode_e m; logic [ACT_AW-1:0] ob; int t; } rec_t;
  rec_t trace [$];
  int cyc = 0, delay = 0, n_switch = 0;
  bit pending = 0;
  int done_t [$];
  int base_gap = -1;   // layer-boundary gap without a mode change

  always @(posedge clk) begin
    cyc <= cyc + 1;
    cmd_done <= 1'b0;
    if (cmd_valid) begin
      rec_t r;
      r.c = cmd; r.g = og; r.m = mode; r.ob = cfg.out_base; r.t = cyc;
      trace.push_back(r);
      pending <= 1;
      delay   <= 1 + $urandom_range(20);
    end else if (pending) begin
      if (delay == 0) begin cmd_done <= 1'b1; pending <= 0; done_t.push_back(cyc); end
      else delay <= delay - 1;
    end
    if (rst_n && ev_mode_switch) n_switch++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic layer_cfg_t mk(int k, int nig, int nog, int ob);
    layer_cfg_t c;
    c = '0;
    c.k = 3'(k); c.stride = 2'd1; c.pad = 3'(k / 2);
    c.in_h = 8'd8; c.in_w = 8'd8; c.out_h = 8'd8; c.out_w = 8'd8;
    c.n_ig = 4'(nig); c.n_og = 4'(nog); c.func = AF_RELU; c.out_base = ACT_AW'(ob);
    return c;
  endfunction

  // run a program of n layers and check the command trace it produces
  task automatic run_prog(input layer_cfg_t P [], input int n, output int n_xy);
    int idx, sw0;
    df_mode_e prev;
    for (int l = 0; l < n; l++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 4'(l); cfg_data = P[l];
    end
    trace.delete(); done_t.delete();
    sw0 = n_switch;
    @(negedge clk); cfg_we = 0; n_layers = 5'(n); start = 1;
    @(negedge clk); start = 0;
    n_xy = 0;
    while (!done) begin
      @(negedge clk);
      if (xy_valid) n_xy++;
    end
    idx = 0;
    for (int l = 0; l < n; l++) begin
      df_mode_e m;
      m = (P[l].n_ig * P[l].k * P[l].k <= WREG_DEPTH) ? DF_WS : DF_OS;
      if (l > 0 && idx < trace.size())
        check(trace[idx].t - done_t[idx - 1] == base_gap + ((m != prev) ? FLUSH_CYCLES : 0),
              $sformatf("random program: layer %0d boundary gap %0d", l, trace[idx].t - done_t[idx - 1]));
      prev = m;
      for (int g = 0; g < P[l].n_og; g++) begin
        check(idx < trace.size() && trace[idx].c == 3'd1 && trace[idx].g == 4'(g) && trace[idx].m == m,
              $sformatf("random program: layer %0d og %0d BIAS", l, g));
        idx++;
        if (m == DF_WS) begin
          check(idx < trace.size() && trace[idx].c == 3'd2 && trace[idx].g == 4'(g),
                $sformatf("random program: layer %0d og %0d WLOAD", l, g));
          idx++;
        end
        check(idx < trace.size() && trace[idx].c == 3'd3 && trace[idx].g == 4'(g) && trace[idx].m == m &&
              trace[idx].ob == P[l].out_base, $sformatf("random program: layer %0d og %0d PASS", l, g));
        idx++;
      end
    end
    check(idx < trace.size() && trace[idx].c == 3'd4 && rd_word_addr == P[n-1].out_base,
          "random program: final READ of the last output");
    check(trace.size() == idx + 1, $sformatf("random program: trace length %0d exp %0d", trace.size(), idx + 1));
  endtask

  initial begin
    layer_cfg_t L [4];
    df_mode_e   M [4];
    int idx, n_done;
    int first_idx [4];
    cfg_we = 0; start = 0; cfg_addr = 0; cfg_data = '0; n_layers = 0;
    rd_word = {96'd0, 16'sh0abc, 16'sh0123};
    cmd_done = 0;
    L[0] = mk(7, 1, 2, 100); M[0] = DF_OS;   // 49 taps
    L[1] = mk(3, 1, 3, 200); M[1] = DF_WS;   // 9 taps
    L[2] = mk(1, 4, 1, 300); M[2] = DF_WS;   // 4 taps
    L[3] = mk(3, 2, 2, 400); M[3] = DF_OS;   // 18 taps
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 4; l++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 4'(l); cfg_data = L[l];
    end
    @(negedge clk); cfg_we = 0; n_layers = 5'd4; start = 1;
    @(negedge clk); start = 0;
    n_done = 0;
    while (!done) begin
      @(negedge clk);
      if (xy_valid) begin
        check(pupil_x == 16'sh0123 && pupil_y == 16'sh0abc, "x, y from lanes 0 and 1");
        n_done++;
      end
    end
    check(n_done == 1, "one xy_valid");
    @(negedge clk);
    check(!busy, "idle after done");

    // expected trace
    idx = 0;
    for (int l = 0; l < 4; l++)
      for (int g = 0; g < L[l].n_og; g++) begin
        if (g == 0) first_idx[l] = idx;
        check(idx < trace.size() && trace[idx].c == 3'd1 && trace[idx].g == 4'(g) && trace[idx].m == M[l] &&
              trace[idx].ob == L[l].out_base, $sformatf("layer %0d og %0d BIAS", l, g));
        idx++;
        if (M[l] == DF_WS) begin
          check(idx < trace.size() && trace[idx].c == 3'd2 && trace[idx].g == 4'(g),
                $sformatf("layer %0d og %0d WLOAD", l, g));
          idx++;
        end
        check(idx < trace.size() && trace[idx].c == 3'd3 && trace[idx].g == 4'(g) && trace[idx].m == M[l],
              $sformatf("layer %0d og %0d PASS", l, g));
        idx++;
      end
    check(idx < trace.size() && trace[idx].c == 3'd4, "final READ");
    check(rd_word_addr == ACT_AW'(400), "READ address is the last layer's output base");
    check(trace.size() == idx + 1, $sformatf("trace length %0d exp %0d", trace.size(), idx + 1));
    check(n_switch == 2, $sformatf("mode switches %0d", n_switch));
    // flush: a layer boundary with a mode change takes exactly 2 cycles more
    begin
      int gap [4];
      for (int l = 1; l < 4; l++) gap[l] = trace[first_idx[l]].t - done_t[first_idx[l] - 1];
      check(gap[1] == gap[2] + FLUSH_CYCLES && gap[3] == gap[2] + FLUSH_CYCLES,
            $sformatf("layer gaps %0d %0d %0d", gap[1], gap[2], gap[3]));
      base_gap = gap[2];
    end

    // random programs: 1..16 layers, kernel 1/3/5/7, 1..3 groups in and out
    for (int r = 0; r < 30; r++) begin
      layer_cfg_t P [];
      int n, nxy;
      n = 1 + $urandom_range(r < 3 ? 15 : 5);
      P = new[n];
      for (int l = 0; l < n; l++)
        P[l] = mk(1 + 2 * $urandom_range(3), 1 + $urandom_range(2), 1 + $urandom_range(2), $urandom_range(2047));
      run_prog(P, n, nxy);
      check(nxy == 1, "random program: one xy_valid");
    end

    // error on a zero-stride descriptor
    L[0].stride = 2'd0;
    @(negedge clk); cfg_we = 1; cfg_addr = 4'd0; cfg_data = L[0];
    @(negedge clk); cfg_we = 0; start = 1; n_layers = 5'd1;
    @(negedge clk); start = 0;
    repeat (4) @(negedge clk);
    check(error && !busy, "error state for a bad descriptor");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
