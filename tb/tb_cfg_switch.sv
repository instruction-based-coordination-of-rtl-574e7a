// tb_cfg_switch: random configuration beats for PIDs 0..9 enter the switch of
// PID 4 under random back-pressure on both outputs. Beats for PID 4 must
// appear on the local port, all others on the forwarding port, each exactly
// once and in order; the forwarding path takes one cycle (register slice).
`timescale 1ns/1ps
module tb_cfg_switch;
  import icu_pkg::*;
  localparam logic [PID_W-1:0] ME = 4;
  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready, l_valid, l_ready = 1, n_valid, n_ready = 1;
  cfg_beat_t s_beat = '0, l_beat, n_beat;
  cfg_beat_t exp_l [$], exp_n [$];
  int checks = 0, failures = 0, sent = 0;

  cfg_switch #(.PID(ME)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (l_valid && l_ready) begin
      checks++;
      if (exp_l.size() == 0 || l_beat != exp_l[0]) begin failures++; $display("local beat mismatch"); end
      else void'(exp_l.pop_front());
    end
    if (n_valid && n_ready) begin
      checks++;
      if (exp_n.size() == 0 || n_beat != exp_n[0]) begin failures++; $display("forward beat mismatch"); end
      else void'(exp_n.pop_front());
    end
  end

  initial begin
    bit will;
    int t_in, t_out;
    repeat (3) @(posedge clk); rst_n = 1;
    // latency of the forwarding path
    @(negedge clk);
    s_beat = '0; s_beat.pid = 7; s_beat.data = 64'h1234; s_valid = 1; exp_n.push_back(s_beat);
    @(negedge clk); s_valid = 0;
    checks++;
    if (!n_valid) begin failures++; $display("forwarding latency is not one cycle"); end
    @(negedge clk);
    for (int i = 0; i < 5000; i++) begin
      l_ready = ($urandom % 3) != 0; n_ready = ($urandom % 3) != 0;
      if (!s_valid && ($urandom % 2)) begin
        s_beat.pid = PID_W'($urandom % 10); s_beat.group = icu_group_e'($urandom % 3);
        s_beat.addr = IADDR_W'($urandom); s_beat.data = {$urandom, $urandom};
        s_valid = 1;
        if (s_beat.pid == ME) exp_l.push_back(s_beat); else exp_n.push_back(s_beat);
      end
      #1 will = s_valid && s_ready;
      @(negedge clk);
      if (will) begin
        s_valid = 0; sent++;
      end
    end
    s_valid = 0; l_ready = 1; n_ready = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_l.size() != 0 || exp_n.size() != 0) begin
      failures++; $display("beats lost: %0d local %0d forward", exp_l.size(), exp_n.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
