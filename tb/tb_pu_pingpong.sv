// tb_pu_pingpong: a producer fills banks (random length, random data) and
// hands them over; a consumer with random delays reads each filled bank back
// and releases it. Checks: the producer is held off while both banks are full
// (back-pressure), banks alternate, data read matches what was written to that
// bank, and read data appears one cycle after the read enable.
`timescale 1ns/1ps
module tb_pu_pingpong;
  localparam int unsigned W = 64, DEPTH = 32;
  logic clk = 0, rst_n = 0;
  logic p_ready, p_bank, c_ready, c_bank;
  logic p_done = 0, c_done = 0, we = 0, re = 0;
  logic [$clog2(DEPTH)-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [1:0]   full;
  int checks = 0, failures = 0, stalls = 0;
  logic [W-1:0] img [2][DEPTH];
  int           lens [2];

  pu_pingpong #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer
  initial begin
    bit exp_bank;
    exp_bank = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int b = 0; b < 80; b++) begin
      int n;
      n = 1 + $urandom % DEPTH;
      @(negedge clk);
      while (!p_ready) begin stalls++; @(negedge clk); end
      checks++;
      if (p_bank != exp_bank) begin failures++; $display("producer bank %0d exp %0d", p_bank, exp_bank); end
      for (int i = 0; i < n; i++) begin
        we = 1; waddr = i; wdata = {$urandom, $urandom}; img[p_bank][i] = wdata;
        @(negedge clk);
      end
      we = 0;
      p_done = 1;
      lens[p_bank] = n;
      @(negedge clk);
      p_done = 0;
      exp_bank = !exp_bank;
    end
  end

  // consumer
  initial begin
    bit exp_bank;
    exp_bank = 0;
    wait (rst_n);
    for (int b = 0; b < 80; b++) begin
      int n;
      @(negedge clk);
      while (!c_ready) @(negedge clk);
      repeat ($urandom % 40) @(negedge clk);
      checks++;
      if (c_bank != exp_bank) begin failures++; $display("consumer bank %0d exp %0d", c_bank, exp_bank); end
      n = lens[c_bank];
      for (int i = 0; i < n; i++) begin
        re = 1; raddr = i;
        @(negedge clk);
        re = 0;
        checks++;
        if (rdata != img[c_bank][i]) begin failures++; if (failures < 10) $display("bank %0d word %0d", b, i); end
      end
      c_done = 1;
      @(negedge clk);
      c_done = 0;
      exp_bank = !exp_bank;
    end
    repeat (5) @(negedge clk);
    checks++;
    if (full != 2'b00) begin failures++; $display("banks left full"); end
    checks++;
    if (stalls == 0) begin failures++; $display("producer never held off"); end
    $display("producer stall cycles %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
