// tb_adder_tree -- self-checking test of the tile adder tree.
//
// Feeds a random input set every cycle (with gaps), including sets that
// overflow 16 bits in both directions, and checks each result against the
// saturated sum computed here exactly three cycles later.
`timescale 1ns/1ps
module tb_adder_tree;
  import janeeye_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic in_valid, out_valid;
  logic signed [15:0] in [8];
  logic signed [15:0] bias, out;

  adder_tree dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int exp_q [$];
  int cyc_q [$];
  int cyc = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      int e, c;
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        e = exp_q.pop_front(); c = cyc_q.pop_front();
        check(out == 16'(e), $sformatf("sum %0d exp %0d", out, e));
        check(cyc - c == 3, $sformatf("latency %0d", cyc - c));
      end
    end
  end

  initial begin
    in_valid = 0; bias = 0;
    foreach (in[i]) in[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int s;
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      s = 0;
      foreach (in[i]) begin
        in[i] = (n < 200) ? ((n % 2) ? 16'sh7000 : -16'sh7000) + 16'($urandom_range(255)) : 16'($urandom);
        s += int'(in[i]);
      end
      bias = 16'($urandom);
      s += int'(bias);
      if (s > 32767) s = 32767;
      if (s < -32768) s = -32768;
      if (in_valid) begin exp_q.push_back(s); cyc_q.push_back(cyc); end
    end
    @(negedge clk); in_valid = 0;
    repeat (6) @(posedge clk);
    check(exp_q.size() == 0, "all results came out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
