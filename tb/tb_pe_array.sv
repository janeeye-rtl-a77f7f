// tb_pe_array -- self-checking test of the 64-PE array.
//
// Runs output pixels through the full 8x8 array in both dataflow modes with
// random 512-bit weight words, 128-bit activation words and a 128-bit bias
// word, and checks all eight output channels of every pixel against a model
// computed here (lane t of the result = saturate(bias_t + sum over k of
// round7(sum over steps of w[t][k] * a[k]))). Also checks the weight lane
// mapping (tile t, lane k at bits 64t+8k), the zero-skip count and that a
// result appears 4 cycles after a pixel's last step.
`timescale 1ns/1ps
module tb_pe_array;
  import janeeye_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  df_mode_e mode;
  logic wreg_we, mac_en, first, last, out_valid;
  logic [3:0] wreg_idx, w_idx;
  logic [511:0] w_word;
  logic [127:0] act_word, bias_word, out_word;
  logic [6:0] n_skip;

  pe_array dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic int rnd(input longint v);
    longint q, r;
    q = v >>> 7; r = v - q * 128;
    if (r > 64 || (r == 64 && (q % 2 != 0))) q++;
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    return int'(q);
  endfunction

  logic [127:0] exp_q [$];
  int cyc_q [$];
  int cyc = 0, n_out = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      logic [127:0] e;
      int c;
      n_out++;
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        e = exp_q.pop_front(); c = cyc_q.pop_front();
        check(out_word == e, $sformatf("out %h exp %h", out_word, e));
        check(cyc - c == 4, $sformatf("latency %0d", cyc - c));
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [511:0] wr [9];
    mode = DF_WS; wreg_we = 0; mac_en = 0; first = 0; last = 0; wreg_idx = 0; w_idx = 0;
    w_word = 0; act_word = 0; bias_word = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int batch = 0; batch < 16; batch++) begin
      int S;
      mode = (batch % 2) ? DF_OS : DF_WS;
      S = (mode == DF_WS) ? 9 : 1 + $urandom_range(40);
      if (mode == DF_WS) begin
        for (int i = 0; i < 9; i++) begin
          for (int j = 0; j < 16; j++) wr[i][j*32 +: 32] = $urandom;
          @(negedge clk); wreg_we = 1; wreg_idx = 4'(i); w_word = wr[i];
        end
        @(negedge clk); wreg_we = 0;
      end
      for (int j = 0; j < 8; j++) bias_word[j*16 +: 16] = 16'($urandom_range(4095)) - 16'd2048;
      for (int pix = 0; pix < 4; pix++) begin
        longint ps [8][8];
        int zeros, skips;
        logic [127:0] e;
        foreach (ps[t, k]) ps[t][k] = 0;
        zeros = 0; skips = 0;
        for (int s = 0; s < S; s++) begin
          logic [511:0] w;
          @(negedge clk);
          mac_en = 1; first = (s == 0); last = (s == S - 1); w_idx = 4'(s);
          for (int j = 0; j < 16; j++) w_word[j*32 +: 32] = $urandom;
          w = (mode == DF_WS) ? wr[s] : w_word;
          for (int k = 0; k < 8; k++) begin
            act_word[k*16 +: 16] = ($urandom_range(3) == 0) ? 16'd0 : 16'($urandom_range(8191)) - 16'd4096;
            if (act_word[k*16 +: 16] == 0) zeros += 8;
            for (int t = 0; t < 8; t++)
              ps[t][k] += longint'($signed(w[(t*8+k)*8 +: 8])) * longint'($signed(act_word[k*16 +: 16]));
          end
          #0.1 skips += int'(n_skip);
          if (s == S - 1) begin
            for (int t = 0; t < 8; t++) begin
              int tot;
              tot = int'($signed(bias_word[t*16 +: 16]));
              for (int k = 0; k < 8; k++) tot += rnd(ps[t][k]);
              if (tot > 32767) tot = 32767;
              if (tot < -32768) tot = -32768;
              e[t*16 +: 16] = 16'(tot);
            end
            exp_q.push_back(e); cyc_q.push_back(cyc);
          end
        end
        check(skips == zeros, $sformatf("zero skips %0d exp %0d", skips, zeros));
      end
      @(negedge clk); mac_en = 0; first = 0; last = 0;
      repeat (3) @(negedge clk);
    end
    repeat (8) @(posedge clk);
    check(exp_q.size() == 0 && n_out == 64, $sformatf("outputs %0d", n_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
