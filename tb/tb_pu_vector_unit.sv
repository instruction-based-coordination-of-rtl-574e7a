// tb_pu_vector_unit: random 32-bit accumulators, residual bytes and
// post-processing settings (shift, rounding, residual add, ReLU) are fed to
// the 64-lane vector unit; each output byte is compared with a reference
// model one cycle later, including saturation at the int8 limits.
`timescale 1ns/1ps
module tb_pu_vector_unit;
  localparam int unsigned R = 64;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, round_en = 0, add_en = 0, relu = 0;
  logic [R*32-1:0] acc = '0;
  logic [R*8-1:0]  res = '0;
  logic [4:0]      shift = '0;
  logic            out_valid;
  logic [R*8-1:0]  y;
  int checks = 0, failures = 0;

  pu_vector_unit #(.R(R)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] model(int a, int r, int sh, bit rnd, bit add, bit rl);
    longint v;
    v = a;
    if (rnd && sh != 0) v = v + (longint'(1) << (sh - 1));
    v = v >>> sh;
    if (add) v = v + r;
    if (rl && v < 0) v = 0;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return 8'(v);
  endfunction

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      shift = 5'($urandom); round_en = $urandom % 2; add_en = $urandom % 2; relu = $urandom % 2;
      for (int r = 0; r < R; r++) begin
        acc[r*32 +: 32] = ($urandom % 4 == 0) ? 32'($signed($urandom % 4001) - 2000) : 32'($urandom);
        res[r*8 +: 8] = 8'($urandom);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("no out_valid"); end
      for (int r = 0; r < R; r++) begin
        logic [7:0] e;
        e = model($signed(acc[r*32 +: 32]), $signed(res[r*8 +: 8]), shift, round_en, add_en, relu);
        checks++;
        if (y[r*8 +: 8] != e) begin
          failures++;
          if (failures < 10) $display("lane %0d got %0d exp %0d", r, $signed(y[r*8 +: 8]), $signed(e));
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("out_valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
