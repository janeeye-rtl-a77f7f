// tb_data_dispatcher -- self-checking test of the data dispatcher.
//
// The dispatcher is connected to three real SRAM models (8-cycle latency)
// and to a stand-in for the PE array and activation core that returns one
// result word a fixed number of cycles after each pixel's last step. For a
// set of layer shapes (7x7 OS with padding, 3x3 stride-2 WS, 3x3 OS over two
// input groups, 1x1 WS, 5x5 stride-3 OS, maps that are not multiples of 8)
// the test issues BIAS, WLOAD (WS layers) and PASS commands and checks,
// against sequences built here from the memory contents:
//   - the bias word presented to the adder trees,
//   - every weight-register write (index and 512-bit word),
//   - every array step: activation word (zero for padding), first/last flags,
//     register index and, in OS mode, the streamed weight word,
//   - the pixel order (8x8 blocks) through the write-back addresses,
//   - that after the first fill the array gets one step every cycle,
//   - one READ command.
`timescale 1ns/1ps
module tb_data_dispatcher;
  import janeeye_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  localparam int RES_DELAY = 5;

  logic cmd_valid, cmd_done;
  logic [2:0] cmd;
  layer_cfg_t cfg;
  logic [3:0] og;
  df_mode_e mode;
  logic [ACT_AW-1:0] rd_word_addr;
  logic [127:0] rd_word;
  logic act_rd_en, act_rd_valid, act_wr_en, d_act_wr_en;
  logic [ACT_AW-1:0] act_rd_addr, act_wr_addr, d_act_wr_addr;
  logic [127:0] act_rd_data, act_wr_data, d_act_wr_data;
  logic w_rd_en, w_rd_valid, b_rd_en, b_rd_valid;
  logic [W_AW-1:0] w_rd_addr;
  logic [511:0] w_rd_data;
  logic [B_AW-1:0] b_rd_addr;
  logic [127:0] b_rd_data;
  logic wreg_we, mac_en, first, last, res_valid, ev_stall;
  logic [3:0] wreg_idx, w_idx;
  logic [511:0] w_word;
  logic [127:0] act_word, bias_word, res_word;

  // host side of the memories
  logic h_act_we, h_w_we, h_b_we;
  logic [ACT_AW-1:0] h_act_addr;
  logic [127:0] h_act_data;
  logic [W_AW-1:0] h_w_addr;
  logic [511:0] h_w_data;
  logic [B_AW-1:0] h_b_addr;
  logic [127:0] h_b_data;

  data_dispatcher dut (
    .clk, .rst_n, .cmd_valid, .cmd, .cfg, .og, .mode, .rd_word_addr, .cmd_done, .rd_word,
    .act_rd_en, .act_rd_addr, .act_rd_valid, .act_rd_data,
    .act_wr_en (d_act_wr_en), .act_wr_addr (d_act_wr_addr), .act_wr_data (d_act_wr_data),
    .w_rd_en, .w_rd_addr, .w_rd_valid, .w_rd_data,
    .b_rd_en, .b_rd_addr, .b_rd_valid, .b_rd_data,
    .wreg_we, .wreg_idx, .w_word, .mac_en, .first, .last, .w_idx, .act_word, .bias_word,
    .res_valid, .res_word, .ev_stall
  );

  assign act_wr_en   = h_act_we | d_act_wr_en;
  assign act_wr_addr = h_act_we ? h_act_addr : d_act_wr_addr;
  assign act_wr_data = h_act_we ? h_act_data : d_act_wr_data;

  sram_1r1w #(.WIDTH(128), .DEPTH(ACT_DEPTH), .LAT(SRAM_LAT)) u_act (
    .clk, .rst_n, .wr_en (act_wr_en), .wr_addr (act_wr_addr), .wr_data (act_wr_data),
    .rd_en (act_rd_en), .rd_addr (act_rd_addr), .rd_valid (act_rd_valid), .rd_data (act_rd_data));
  sram_1r1w #(.WIDTH(512), .DEPTH(W_DEPTH), .LAT(SRAM_LAT)) u_w (
    .clk, .rst_n, .wr_en (h_w_we), .wr_addr (h_w_addr), .wr_data (h_w_data),
    .rd_en (w_rd_en), .rd_addr (w_rd_addr), .rd_valid (w_rd_valid), .rd_data (w_rd_data));
  sram_1r1w #(.WIDTH(128), .DEPTH(B_DEPTH), .LAT(SRAM_LAT)) u_b (
    .clk, .rst_n, .wr_en (h_b_we), .wr_addr (h_b_addr), .wr_data (h_b_data),
    .rd_en (b_rd_en), .rd_addr (b_rd_addr), .rd_valid (b_rd_valid), .rd_data (b_rd_data));

  // stand-in for array + activation core: result n = n, RES_DELAY cycles after a last step
  logic [RES_DELAY-1:0] rpipe;
  int n_res;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin rpipe <= '0; n_res <= 0; end
    else begin
      rpipe <= {rpipe[RES_DELAY-2:0], mac_en && last};
      if (res_valid) n_res <= n_res + 1;
    end
  end
  assign res_valid = rpipe[RES_DELAY-1];
  assign res_word  = 128'(n_res);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic [127:0] m_act [ACT_DEPTH];
  logic [511:0] m_w   [W_DEPTH];
  logic [127:0] m_b   [B_DEPTH];

  // observed streams
  typedef struct { logic [127:0] a; logic f, l; logic [3:0] wi; logic [511:0] w; int cyc; } step_t;
  step_t steps_q [$];
  logic [3:0]   wr_idx_q [$];
  logic [511:0] wr_w_q [$];
  logic [ACT_AW-1:0] wb_addr_q [$];
  logic [127:0] wb_data_q [$];
  int cyc = 0, n_stall = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (mac_en) begin
        step_t s;
        s.a = act_word; s.f = first; s.l = last; s.wi = w_idx; s.w = w_word; s.cyc = cyc;
        steps_q.push_back(s);
      end
      if (wreg_we) begin wr_idx_q.push_back(wreg_idx); wr_w_q.push_back(w_word); end
      if (d_act_wr_en) begin wb_addr_q.push_back(d_act_wr_addr); wb_data_q.push_back(d_act_wr_data); end
      if (ev_stall) n_stall++;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_cmd(input logic [2:0] c, input layer_cfg_t l, input int g, input df_mode_e m);
    @(negedge clk);
    cmd_valid = 1; cmd = c; cfg = l; og = 4'(g); mode = m;
    @(negedge clk);
    cmd_valid = 0;
    while (!cmd_done) @(negedge clk);
  endtask

  function automatic layer_cfg_t mk(int k, int st, int pd, int ih, int iw, int oh, int ow,
                                    int nig, int nog, int ib, int ob, int wb, int bb);
    layer_cfg_t c;
    c = '0;
    c.k = 3'(k); c.stride = 2'(st); c.pad = 3'(pd);
    c.in_h = 8'(ih); c.in_w = 8'(iw); c.out_h = 8'(oh); c.out_w = 8'(ow);
    c.n_ig = 4'(nig); c.n_og = 4'(nog); c.func = AF_RELU;
    c.in_base = ACT_AW'(ib); c.out_base = ACT_AW'(ob); c.w_base = W_AW'(wb); c.b_base = B_AW'(bb);
    return c;
  endfunction

  task automatic test_layer(input layer_cfg_t l, input int g);
    int S, npix, k;
    df_mode_e m;
    int py [$], px [$];
    k = l.k;
    S = l.n_ig * k * k;
    m = (S <= 9) ? DF_WS : DF_OS;
    // expected pixel order: 8x8 blocks
    for (int by = 0; by < l.out_h; by += 8)
      for (int bx = 0; bx < l.out_w; bx += 8)
        for (int y = by; y < by + 8 && y < l.out_h; y++)
          for (int x = bx; x < bx + 8 && x < l.out_w; x++) begin py.push_back(y); px.push_back(x); end
    npix = py.size();

    run_cmd(3'd1, l, g, m);
    check(bias_word == m_b[l.b_base + g], "bias word");
    if (m == DF_WS) begin
      wr_idx_q.delete(); wr_w_q.delete();
      run_cmd(3'd2, l, g, m);
      check(wr_idx_q.size() == S, $sformatf("weight register writes %0d exp %0d", wr_idx_q.size(), S));
      for (int s = 0; s < S && s < wr_idx_q.size(); s++) begin
        check(wr_idx_q[s] == 4'(s), "register index");
        check(wr_w_q[s] == m_w[l.w_base + g*S + s], "register word");
      end
    end
    steps_q.delete(); wb_addr_q.delete(); wb_data_q.delete();
    n_res = 0;
    run_cmd(3'd3, l, g, m);
    check(steps_q.size() == npix * S, $sformatf("steps %0d exp %0d", steps_q.size(), npix * S));
    if (steps_q.size() == npix * S) begin
      for (int p = 0; p < npix; p++)
        for (int gi = 0; gi < l.n_ig; gi++)
          for (int ky = 0; ky < k; ky++)
            for (int kx = 0; kx < k; kx++) begin
              int s, iy, ix;
              logic [127:0] ea;
              step_t o;
              s  = (gi * k + ky) * k + kx;
              iy = py[p] * l.stride + ky - l.pad;
              ix = px[p] * l.stride + kx - l.pad;
              ea = (iy < 0 || ix < 0 || iy >= l.in_h || ix >= l.in_w) ? '0 :
                   m_act[l.in_base + (iy * l.in_w + ix) * l.n_ig + gi];
              o = steps_q[p * S + s];
              check(o.a == ea && o.f == (s == 0) && o.l == (s == S - 1),
                    $sformatf("pixel %0d step %0d activation/flags", p, s));
              if (m == DF_WS) check(o.wi == 4'(s), "register index of step");
              else            check(o.w == m_w[l.w_base + g*S + s], "streamed weight word");
            end
      // steady rate: no gap between the first and the last step
      check(steps_q[npix*S-1].cyc - steps_q[0].cyc == npix * S - 1,
            $sformatf("pass took %0d cycles for %0d steps", steps_q[npix*S-1].cyc - steps_q[0].cyc + 1, npix * S));
    end
    check(wb_addr_q.size() == npix, "write-backs");
    for (int p = 0; p < npix && p < wb_addr_q.size(); p++) begin
      check(wb_addr_q[p] == ACT_AW'(l.out_base + (py[p] * l.out_w + px[p]) * l.n_og + g),
            $sformatf("write-back address of pixel %0d", p));
      check(wb_data_q[p] == 128'(p), "write-back data");
    end
  endtask

  initial begin
    layer_cfg_t ls [6];
    cmd_valid = 0; cmd = 0; cfg = '0; og = 0; mode = DF_WS; rd_word_addr = 0;
    h_act_we = 0; h_w_we = 0; h_b_we = 0; h_act_addr = 0; h_act_data = 0;
    h_w_addr = 0; h_w_data = 0; h_b_addr = 0; h_b_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 600; a++) begin
      @(negedge clk);
      h_act_we = 1; h_act_addr = ACT_AW'(a);
      h_act_data = {$urandom, $urandom, $urandom, $urandom};
      m_act[a] = h_act_data;
    end
    @(negedge clk); h_act_we = 0;
    for (int a = 0; a < 300; a++) begin
      @(negedge clk);
      h_w_we = 1; h_w_addr = W_AW'(a);
      for (int j = 0; j < 16; j++) h_w_data[j*32 +: 32] = $urandom;
      m_w[a] = h_w_data;
    end
    @(negedge clk); h_w_we = 0;
    for (int a = 0; a < 16; a++) begin
      @(negedge clk);
      h_b_we = 1; h_b_addr = B_AW'(a); h_b_data = {$urandom, $urandom, $urandom, $urandom};
      m_b[a] = h_b_data;
    end
    @(negedge clk); h_b_we = 0;

    //          k st pd ih  iw  oh  ow ig og  in   out  wb  bb
    ls[0] = mk(7, 1, 3, 10, 13, 10, 13, 1, 1,   0, 1000,  0, 0);
    ls[1] = mk(3, 2, 1, 10, 13,  5,  7, 1, 2,   0, 1200, 49, 2);
    ls[2] = mk(3, 1, 1,  9,  9,  9,  9, 2, 2, 100, 1300, 70, 4);
    ls[3] = mk(1, 1, 0,  9, 11,  9, 11, 1, 3, 200, 1500, 110, 7);
    ls[4] = mk(1, 1, 0,  1,  1,  1,  1, 8, 1, 400, 1900, 130, 9);
    ls[5] = mk(5, 3, 2, 14, 17,  5,  6, 1, 1,   0, 1950, 140, 11);
    test_layer(ls[0], 0);
    test_layer(ls[1], 1);
    test_layer(ls[2], 1);
    test_layer(ls[3], 2);
    test_layer(ls[4], 0);
    test_layer(ls[5], 0);
    check(n_stall > 0, "fill stalls seen");

    // single read
    @(negedge clk); rd_word_addr = ACT_AW'(77);
    run_cmd(3'd4, ls[0], 0, DF_WS);
    check(rd_word == m_act[77], "read word 77");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
