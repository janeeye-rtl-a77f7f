// tb_activation_core -- self-checking test of the activation core.
//
// Sends words of random and boundary values (around -4, -2, 0, 2, 4 and the
// 16-bit extremes, in Q5.11) through each of the four functions and checks
// every lane against the piecewise-linear definitions evaluated here in
// integer arithmetic, with the result two cycles after the input and one
// word accepted per cycle.
`timescale 1ns/1ps
module tb_activation_core;
  import janeeye_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  act_func_e func;
  logic in_valid, out_valid;
  logic [127:0] in_word, out_word;

  activation_core dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // x in units of 1/2048
  function automatic int model(input int x, input act_func_e f);
    real xr;
    xr = real'(x) / 2048.0;
    case (f)
      AF_RELU:  return (x > 0) ? x : 0;
      AF_HSIG:  if (xr < -4.0) return 0; else if (xr > 4.0) return 2048;
                else return $floor(real'(x) / 8.0) + 1024;
      AF_HTANH: if (xr < -2.0) return -2048; else if (xr > 2.0) return 2048;
                else return $floor(real'(x) / 2.0);
      default:  return x;
    endcase
  endfunction

  logic [127:0] exp_q [$];
  int cyc_q [$];
  int cyc = 0, n_out = 0;
  bit seen [4];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      int c;
      logic [127:0] e;
      n_out++;
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        e = exp_q.pop_front(); c = cyc_q.pop_front();
        check(out_word == e, $sformatf("out %h exp %h", out_word, e));
        check(cyc - c == 2, $sformatf("latency %0d", cyc - c));
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int edges [] = '{-32768, -8193, -8192, -8191, -4097, -4096, -4095, -9, -8, -7, -1, 0, 1,
                     7, 8, 9, 4095, 4096, 4097, 8191, 8192, 8193, 32767};
    int n_in;
    func = AF_BYPASS; in_valid = 0; in_word = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    n_in = 0;
    for (int n = 0; n < 1200; n++) begin
      logic [127:0] e;
      @(negedge clk);
      func = act_func_e'(n % 4);
      in_valid = (n < 100) || ($urandom_range(4) != 0);
      for (int i = 0; i < 8; i++) begin
        int x;
        x = (n < 100) ? edges[(n * 8 + i) % edges.size()] : int'($signed(16'($urandom)));
        if (n >= 100 && n < 600) x = x / 4;
        in_word[i*16 +: 16] = 16'(x);
        e[i*16 +: 16] = 16'(model(x, func));
      end
      if (in_valid) begin
        exp_q.push_back(e); cyc_q.push_back(cyc); n_in++;
        seen[func] = 1;
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    check(n_out == n_in, "every word came out");
    foreach (seen[i]) check(seen[i], "function exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
