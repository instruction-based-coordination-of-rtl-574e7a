// tb_icu_instr_ram: checks the dual-port instruction memory: words written
// on the configuration port read back on the decoder port one cycle later,
// decoder write-backs take effect, and a same-address collision keeps the
// decoder's word.
`timescale 1ns/1ps
module tb_icu_instr_ram;
  logic clk = 0;
  logic a_we, b_en, b_we;
  logic [8:0] a_addr, b_addr;
  logic [63:0] a_wdata, b_wdata, b_rdata;
  logic [63:0] model [512];
  int checks = 0, failures = 0;

  icu_instr_ram dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_we = 0; b_en = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    for (int i = 0; i < 512; i++) begin
      @(negedge clk); a_we = 1; a_addr = 9'(i); a_wdata = {$urandom, $urandom};
      model[i] = a_wdata;
    end
    @(negedge clk); a_we = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      a_we = ($urandom % 4) == 0; a_addr = 9'($urandom % 16); a_wdata = {$urandom, $urandom};
      b_en = 1; b_we = ($urandom % 4) == 0; b_addr = 9'($urandom % 16); b_wdata = {$urandom, $urandom};
      if (n == 5) begin a_we = 1; b_we = 1; a_addr = 9'd3; b_addr = 9'd3; end
      @(posedge clk);
      #1;
      checks++;
      if (b_rdata !== model[b_addr]) begin
        failures++;
        if (failures < 10) $display("addr %0d read %h exp %h", b_addr, b_rdata, model[b_addr]);
      end
      if (a_we && !(b_we && a_addr == b_addr)) model[a_addr] = a_wdata;
      if (b_we) model[b_addr] = b_wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
