// tb_pu_systolic_array: random int8 weights and activations are streamed into
// the 64x8 array over K steps (first on step 0, last on step K-1, random idle
// gaps between steps); the accumulators are compared with a reference dot
// product, with and without the bias preload. out_valid must rise exactly one
// cycle after the step flagged last.
`timescale 1ns/1ps
module tb_pu_systolic_array;
  localparam int unsigned R = 64, C = 8;
  logic clk = 0, rst_n = 0;
  logic en = 0, first = 0, last = 0, bias_en = 0;
  logic [R*C*8-1:0] w = '0;
  logic [C*8-1:0]   a = '0;
  logic [R*32-1:0]  bias = '0;
  logic             out_valid;
  logic [R*32-1:0]  acc;
  int checks = 0, failures = 0;
  int ref_acc [R];

  pu_systolic_array #(.R(R), .C(C)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int k;
      k = 1 + $urandom % 12;
      bias_en = $urandom % 2;
      for (int r = 0; r < R; r++) begin
        bias[r*32 +: 32] = 32'($signed(($urandom % 200001)) - 100000);
        ref_acc[r] = bias_en ? $signed(bias[r*32 +: 32]) : 0;
      end
      for (int s = 0; s < k; s++) begin
        @(negedge clk);
        for (int i = 0; i < R*C; i++) w[i*8 +: 8] = 8'($urandom);
        for (int i = 0; i < C; i++)   a[i*8 +: 8] = 8'($urandom);
        for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
          ref_acc[r] += $signed(w[(r*C+c)*8 +: 8]) * $signed(a[c*8 +: 8]);
        en = 1; first = (s == 0); last = (s == k - 1);
        @(negedge clk);
        en = 0; first = 0; last = 0;
        if (s == k - 1) begin
          checks++;
          if (!out_valid) begin failures++; $display("out_valid late, test %0d", t); end
          for (int r = 0; r < R; r++) begin
            checks++;
            if ($signed(acc[r*32 +: 32]) != ref_acc[r]) begin
              failures++;
              if (failures < 10) $display("row %0d got %0d exp %0d", r, $signed(acc[r*32 +: 32]), ref_acc[r]);
            end
          end
        end else begin
          checks++;
          if (out_valid) begin failures++; $display("out_valid early"); end
        end
        repeat ($urandom % 3) begin
          @(negedge clk);
          checks++;
          if (out_valid) begin failures++; $display("out_valid while idle"); end
          @(posedge clk);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
