// tb_icu_addr_gen: checks the IM2COL/stride burst generator against nested
// loops computed in the testbench, for random patterns and a random ready,
// including the count-zero-means-one rule and first/last flags.
`timescale 1ns/1ps
module tb_icu_addr_gen;
  import icu_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, b_valid, b_ready, b_first, b_last;
  logic [HADDR_W-1:0] base, b_addr;
  logic [LEN_W-1:0] len, b_len;
  pat_t pat;
  int checks = 0, failures = 0;

  icu_addr_gen dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int ni, int si, int no, int so, int b, int l);
    int nie = (ni == 0) ? 1 : ni, noe = (no == 0) ? 1 : no, total, n;
    longint exp_addr;
    @(negedge clk);
    base = HADDR_W'(b); len = LEN_W'(l);
    pat.n_inner = 8'(ni); pat.inner_stride = 20'(si);
    pat.n_outer = 10'(no); pat.outer_stride = 20'(so);
    start = 1;
    @(negedge clk); start = 0;
    total = nie * noe; n = 0;
    for (int o = 0; o < noe; o++)
      for (int i = 0; i < nie; i++) begin
        b_ready = ($urandom % 4) != 0;
        while (!(b_valid && b_ready)) begin
          @(negedge clk); b_ready = ($urandom % 4) != 0;
        end
        exp_addr = b + o * so + i * si;
        checks++;
        if (b_addr !== HADDR_W'(exp_addr) || b_len !== LEN_W'(l) ||
            b_first !== (n == 0) || b_last !== (n == total - 1)) begin
          failures++;
          if (failures < 10) $display("burst %0d: addr %0d exp %0d first %b last %b", n, b_addr,
                                      exp_addr, b_first, b_last);
        end
        n++;
        @(negedge clk);
      end
    b_ready = 1;
    #1; checks++;
    if (b_valid) begin failures++; $display("extra burst"); end
  endtask

  initial begin
    start = 0; b_ready = 0; base = 0; len = 0; pat = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(1, 0, 1, 0, 100, 4);          // linear
    run(0, 0, 0, 0, 7, 2);            // zero counts
    run(3, 56, 4, 2, 1000, 2);        // IM2COL: 3 kernel rows, 4 pixels
    run(1, 0, 8, 10, 5, 2);           // stride pattern
    for (int k = 0; k < 30; k++)
      run(1 + $urandom % 5, $urandom % 500, 1 + $urandom % 6, $urandom % 3000, $urandom % 100000,
          1 + $urandom % 20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
