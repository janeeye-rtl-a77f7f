// tb_output_tile -- self-checking test of one output tile (8 PEs + adder tree).
//
// Streams back-to-back output pixels through the tile, alternating
// weight-stationary batches (9-tap register loaded once, reused for many
// pixels) and output-stationary batches (weights streamed every step). Each
// pixel's result is modelled here: per-lane exact dot product, convergent
// rounding of each lane by 7 bits, sum of the lanes plus bias, saturation.
// Results must arrive in order, 4 cycles after the pixel's last step.
`timescale 1ns/1ps
module tb_output_tile;
  import janeeye_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  df_mode_e mode;
  logic wreg_we, mac_en, first, last, out_valid;
  logic [3:0] wreg_idx, w_idx;
  logic [63:0] w_bus;
  logic signed [15:0] act [8];
  logic signed [15:0] bias, out;
  logic [7:0] skip;

  output_tile dut (.*);

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

  int exp_q [$], cyc_q [$];
  int cyc = 0, n_out = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      int e, c;
      n_out++;
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        e = exp_q.pop_front(); c = cyc_q.pop_front();
        check(out == 16'(e), $sformatf("out %0d exp %0d mode %0d", out, e, mode));
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
    logic [63:0] wr [9];
    mode = DF_WS; wreg_we = 0; mac_en = 0; first = 0; last = 0; wreg_idx = 0; w_idx = 0;
    w_bus = 0; bias = 0;
    foreach (act[i]) act[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int batch = 0; batch < 40; batch++) begin
      int S;
      mode = (batch % 2) ? DF_OS : DF_WS;
      S = (mode == DF_WS) ? 1 + $urandom_range(8) : 1 + $urandom_range(30);
      if (mode == DF_WS) begin
        for (int i = 0; i < 9; i++) begin
          wr[i] = {$urandom, $urandom};
          @(negedge clk); wreg_we = 1; wreg_idx = 4'(i); w_bus = wr[i];
        end
        @(negedge clk); wreg_we = 0;
      end
      bias = 16'($urandom_range(4095)) - 16'sd2048;   // one bias per pass
      for (int pix = 0; pix < 6; pix++) begin
        longint ps [8];
        int tot;
        foreach (ps[i]) ps[i] = 0;
        for (int s = 0; s < S; s++) begin
          logic [63:0] w;
          @(negedge clk);
          mac_en = 1; first = (s == 0); last = (s == S - 1); w_idx = 4'(s);
          w_bus = {$urandom, $urandom};
          w = (mode == DF_WS) ? wr[s] : w_bus;
          foreach (act[k]) begin
            act[k] = ($urandom_range(3) == 0) ? 16'sd0 : 16'($urandom_range(8191)) - 16'sd4096;
            ps[k] += longint'($signed(w[k*8 +: 8])) * longint'(act[k]);
          end
          if (s == S - 1) begin
            tot = int'(bias);
            foreach (ps[k]) tot += rnd(ps[k]);
            if (tot > 32767) tot = 32767;
            if (tot < -32768) tot = -32768;
            exp_q.push_back(tot); cyc_q.push_back(cyc);
          end
        end
        if ($urandom_range(1)) begin @(negedge clk); mac_en = 0; first = 0; last = 0; end
      end
      @(negedge clk); mac_en = 0; first = 0; last = 0;
      repeat (2) @(negedge clk);
    end
    repeat (8) @(posedge clk);
    check(exp_q.size() == 0 && n_out == 240, $sformatf("outputs %0d", n_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
