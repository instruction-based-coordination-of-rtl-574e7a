// tb_pu_weight_mem: a small weight memory (4 parts of 256 bits per word) is
// filled part by part at random addresses while a shadow copy is kept; random
// reads must return the shadow word one cycle after the read enable, and a
// read without enable must hold the previous output.
`timescale 1ns/1ps
module tb_pu_weight_mem;
  localparam int unsigned WW = 1024, DEPTH = 64, PW = 256, NP = WW / PW;
  logic clk = 0;
  logic we = 0, re = 0;
  logic [$clog2(DEPTH)-1:0] waddr = '0, raddr = '0;
  logic [$clog2(NP)-1:0]    wpart = '0;
  logic [PW-1:0]            wdata = '0;
  logic [WW-1:0]            rdata;
  logic [WW-1:0]            shadow [DEPTH];
  logic [WW-1:0]            last_rd;
  int checks = 0, failures = 0;

  pu_weight_mem #(.WW(WW), .DEPTH(DEPTH), .PW(PW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // initialise every word through the write port
    for (int d = 0; d < DEPTH; d++) for (int p = 0; p < NP; p++) begin
      @(negedge clk);
      we = 1; waddr = d; wpart = p;
      for (int i = 0; i < PW / 32; i++) wdata[i*32 +: 32] = $urandom;
      shadow[d][p*PW +: PW] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (re) begin
        checks++;
        if (rdata != last_rd) begin failures++; if (failures < 10) $display("read %0d mismatch", t); end
      end else if (t > 0) begin
        checks++;
        if (rdata != last_rd) begin failures++; $display("output changed without read enable"); end
      end
      we = $urandom % 2; waddr = $urandom; wpart = $urandom;
      for (int i = 0; i < PW / 32; i++) wdata[i*32 +: 32] = $urandom;
      re = $urandom % 2; raddr = $urandom;
      if (re) last_rd = shadow[raddr];
      if (re && we && raddr == waddr) re = 0;     // read-during-write is not relied on
      if (!re) last_rd = rdata;
      if (we) shadow[waddr][wpart*PW +: PW] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
