// tb_pe -- self-checking test of one processing engine.
//
// Drives random accumulation runs in weight-stationary mode (weights loaded
// into the 9-entry register first) and in output-stationary mode (weights
// streamed), with zero activations mixed in. After each run it compares the
// 32-bit psum and the 16-bit rounded output with a model computed here
// (exact products, round half to even by 7 bits, saturation), checks that
// the result is there one cycle after the last MAC, and that zero
// activations are reported as skipped.
`timescale 1ns/1ps
module tb_pe;
  import janeeye_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  df_mode_e mode;
  logic wreg_we, mac_en, first, skip_o;
  logic [3:0] wreg_idx, w_idx;
  logic signed [7:0] w_in;
  logic signed [15:0] act_in, out_o;
  logic signed [31:0] psum_o;

  pe dut (.*);

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

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [7:0] wr [9];
    longint acc;
    int nskip, nzero, len;
    mode = DF_WS; wreg_we = 0; mac_en = 0; first = 0; wreg_idx = 0; w_idx = 0; w_in = 0; act_in = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 400; run++) begin
      mode = (run % 2) ? DF_OS : DF_WS;
      len  = 1 + $urandom_range(mode == DF_WS ? 8 : 48);
      if (mode == DF_WS) begin
        for (int i = 0; i < 9; i++) begin
          wr[i] = 8'($urandom);
          @(negedge clk); wreg_we = 1; wreg_idx = 4'(i); w_in = wr[i];
        end
        @(negedge clk); wreg_we = 0;
      end
      acc = 0; nskip = 0; nzero = 0;
      for (int s = 0; s < len; s++) begin
        logic signed [7:0] w;
        @(negedge clk);
        mac_en = 1; first = (s == 0); w_idx = 4'(s % 9);
        if ($urandom_range(3) == 0) act_in = 0;
        else if (run < 20) act_in = ($urandom_range(1)) ? 16'sh7fff : 16'sh8000;   // large sums
        else act_in = 16'($urandom);
        if (mode == DF_OS) begin w_in = 8'($urandom); w = w_in; end
        else begin w_in = 8'($urandom); w = wr[s % 9]; end
        acc += longint'(w) * longint'(act_in);
        if (act_in == 0) nzero++;
        #0.1;
        if (skip_o) nskip++;
      end
      @(negedge clk); mac_en = 0;
      check(psum_o == 32'(acc), $sformatf("run %0d psum %0d exp %0d", run, psum_o, acc));
      check(out_o == 16'(rnd(acc)), $sformatf("run %0d out %0d exp %0d", run, out_o, rnd(acc)));
      check(nskip == nzero, "zero skip count");
      // holding: no MAC, psum unchanged
      @(negedge clk);
      check(psum_o == 32'(acc), "psum held while idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
