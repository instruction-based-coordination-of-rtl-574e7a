// tb_axis_pipe: checks the register-slice chain used for the SLR crossing:
// a random stream with random back-pressure arrives complete and in order,
// the latency of a lone word through 13 stages is 13 cycles, and a stream
// with the output always ready moves one word per cycle.
`timescale 1ns/1ps
module tb_axis_pipe;
  localparam int ST = 13;
  logic clk = 0, rst_n = 0;
  logic s_valid, s_ready, m_valid, m_ready;
  logic [15:0] s_data, m_data;
  int checks = 0, failures = 0;
  int sent = 0, got = 0;

  axis_pipe #(.W(16), .STAGES(ST)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker on the output side
  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    checks++;
    if (m_data !== 16'(got)) begin
      failures++;
      if (failures < 10) $display("got %0d exp %0d", m_data, got);
    end
    got++;
  end

  initial begin
    int t0, t1;
    s_valid = 0; s_data = 0; m_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    // latency of one word
    @(negedge clk); s_valid = 1; s_data = 16'(sent);
    @(posedge clk); t0 = $time; sent++;
    @(negedge clk); s_valid = 0;
    while (!m_valid) @(posedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != ST) begin
      failures++; $display("latency %0d exp %0d", (t1 - t0) / 10, ST);
    end
    @(negedge clk);
    // full rate: 200 words in about 200 cycles
    t0 = $time;
    for (int i = 0; i < 200; i++) begin
      s_valid = 1; s_data = 16'(sent);
      @(posedge clk); if (s_ready) sent++;
      @(negedge clk);
    end
    s_valid = 0;
    while (got != sent) @(posedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 > 200 + ST + 2) begin
      failures++; $display("throughput: %0d cycles", (t1 - t0) / 10);
    end
    // random back-pressure
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      m_ready = ($urandom % 3) != 0;
      if (!s_valid || s_ready_q) begin
        s_valid = ($urandom % 2) != 0;
        s_data  = 16'(sent);
      end
      @(posedge clk);
      if (s_valid && s_ready) sent++;
    end
    @(negedge clk); s_valid = 0; m_ready = 1;
    repeat (ST * 3 + 5) @(posedge clk);
    checks++;
    if (got != sent) begin failures++; $display("lost words: sent %0d got %0d", sent, got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic s_ready_q = 1;
  always @(posedge clk) s_ready_q <= s_ready || !s_valid;
endmodule
