// tb_sram_1r1w -- self-checking test of the SRAM model.
//
// Uses the activation-SRAM geometry (2048 x 128 bit, 8-cycle read latency).
// Fills random addresses, then issues a random mix of reads and writes every
// cycle and checks each read against a shadow copy kept here: the data must
// return exactly 8 cycles after the request, and a read in the same cycle as
// a write to that address returns the old contents.
`timescale 1ns/1ps
module tb_sram_1r1w;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  localparam int W = 128, D = 2048, AW = 11;
  logic wr_en, rd_en, rd_valid;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [W-1:0] wr_data, rd_data;

  sram_1r1w #(.WIDTH(W), .DEPTH(D), .LAT(8)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic [W-1:0] shadow [D];
  logic [W-1:0] exp_q [$];
  int cyc_q [$];
  int cyc = 0, n_rd = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && rd_valid) begin
      int c;
      logic [W-1:0] e;
      if (exp_q.size() == 0) check(0, "unexpected read data");
      else begin
        e = exp_q.pop_front(); c = cyc_q.pop_front();
        check(rd_data == e, $sformatf("read %h exp %h", rd_data, e));
        check(cyc - c == 8, $sformatf("latency %0d", cyc - c));
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rw();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a); wr_data = rw(); shadow[a] = wr_data;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      rd_en   = ($urandom_range(3) != 0);
      rd_addr = AW'($urandom_range(255));
      wr_en   = ($urandom_range(1) == 1);
      wr_addr = ($urandom_range(3) == 0) ? rd_addr : AW'($urandom_range(255));
      wr_data = rw();
      if (rd_en) begin exp_q.push_back(shadow[rd_addr]); cyc_q.push_back(cyc); n_rd++; end
      if (wr_en) shadow[wr_addr] = wr_data;
    end
    @(negedge clk); rd_en = 0; wr_en = 0;
    repeat (12) @(posedge clk);
    check(exp_q.size() == 0, "all reads returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
