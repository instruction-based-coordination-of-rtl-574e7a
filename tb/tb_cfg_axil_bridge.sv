// tb_cfg_axil_bridge: a host model writes instruction words through the
// AXI4-Lite registers (LO, HI, then TARGET) while the stream side applies
// random back-pressure. Each TARGET write must produce exactly one beat with
// the 64-bit word, PID, group and address written, and its write response
// must not arrive before that beat has left. CTRL writes must pulse start and
// stop for one cycle; DONE, BUSY and the beat counter must read back.
`timescale 1ns/1ps
module tb_cfg_axil_bridge;
  import icu_pkg::*;
  localparam int unsigned NUM_PU = 10;
  logic clk = 0, rst_n = 0;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 1;
  logic [7:0]  s_awaddr = '0, s_araddr = '0;
  logic [31:0] s_wdata = '0, s_rdata;
  logic [1:0]  s_bresp, s_rresp;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 1;
  logic m_valid, m_ready = 1;
  cfg_beat_t m_beat;
  logic start, stop;
  logic [NUM_PU-1:0] pu_done = '0, pu_busy = '0;
  int checks = 0, failures = 0, beats_seen = 0, starts = 0, stops = 0, bp_cycles = 0;
  cfg_beat_t exp_q [$];

  cfg_axil_bridge #(.NUM_PU(NUM_PU)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) m_ready = ($urandom % 4) != 0;
  always @(posedge clk) if (rst_n) begin
    if (m_valid && !m_ready) bp_cycles++;
    if (m_valid && m_ready) begin
      checks++;
      beats_seen++;
      if (exp_q.size() == 0 || m_beat != exp_q[0]) begin failures++; $display("beat mismatch"); end
      else void'(exp_q.pop_front());
    end
    if (start) starts++;
    if (stop) stops++;
  end

  task automatic axil_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    s_awvalid = 1; s_awaddr = a; s_wvalid = 1; s_wdata = d;
    #1 while (!(s_awready && s_wready)) begin @(negedge clk); #1; end
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    #1 while (!s_bvalid) begin @(negedge clk); #1; end
    checks++;
    if (a == 8'h08 && exp_q.size() != 0) begin failures++; $display("write response before beat left"); end
    @(negedge clk);
  endtask

  task automatic axil_read(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_arvalid = 1; s_araddr = a;
    #1 while (!s_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_arvalid = 0;
    #1 while (!s_rvalid) begin @(negedge clk); #1; end
    d = s_rdata;
    @(negedge clk);
  endtask

  initial begin
    logic [31:0] rd;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      cfg_beat_t b;
      b.data = {$urandom, $urandom}; b.pid = PID_W'($urandom % NUM_PU);
      b.group = icu_group_e'($urandom % 3); b.addr = IADDR_W'($urandom);
      axil_write(8'h00, b.data[31:0]);
      axil_write(8'h04, b.data[63:32]);
      exp_q.push_back(b);
      axil_write(8'h08, {12'd0, b.pid, 2'd0, b.group, 3'd0, b.addr});
    end
    checks++;
    if (beats_seen != 300) begin failures++; $display("%0d beats seen", beats_seen); end
    axil_read(8'h18, rd);
    checks++;
    if (rd != 300) begin failures++; $display("beat counter %0d", rd); end
    axil_write(8'h0C, 32'h1);
    axil_write(8'h0C, 32'h2);
    repeat (3) @(negedge clk);
    checks++;
    if (starts != 1 || stops != 1) begin failures++; $display("start %0d stop %0d pulses", starts, stops); end
    for (int t = 0; t < 20; t++) begin
      pu_done = NUM_PU'($urandom); pu_busy = NUM_PU'($urandom);
      axil_read(8'h10, rd);
      checks++;
      if (rd != 32'(pu_done)) begin failures++; $display("DONE reads %h", rd); end
      axil_read(8'h14, rd);
      checks++;
      if (rd != 32'(pu_busy)) begin failures++; $display("BUSY reads %h", rd); end
    end
    checks++;
    if (bp_cycles == 0) begin failures++; $display("stream back-pressure never applied"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
