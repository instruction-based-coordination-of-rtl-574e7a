// tb_isu: checks one ISU node (PID 5). Random tokens enter on S0 (any
// destination), S1 (destinations up to 5) and S2 (destinations from 5 on)
// under random back-pressure; each must leave once, on M0 if addressed to 5,
// M1 if lower, M2 if higher, in order per input. Under full contention for M0
// the three inputs must be served in rotation, and the latencies S0 -> M0 and
// S1 -> M1 are measured (1 and 2 cycles).
`timescale 1ns/1ps
module tb_isu;
  import icu_pkg::*;
  localparam logic [3:0] ME = 4'd5;
  logic clk = 0, rst_n = 0;
  logic s_valid [3], s_ready [3], m_valid [3], m_ready [3];
  token_t s_tok [3], m_tok [3];
  int checks = 0, failures = 0;
  int sent [3], got [3][3];   // got[m][s]: count from input s seen on output m
  int exp_next [3][3];        // expected sequence per (s, m)
  int seq [3];

  isu #(.PID(ME)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // token: src_pid = input index, bid = sequence number (mod 16) per (s,m)
  function automatic int route(logic [3:0] d);
    return (d == ME) ? 0 : (d < ME) ? 1 : 2;
  endfunction

  always @(posedge clk) if (rst_n) for (int m = 0; m < 3; m++) if (m_valid[m] && m_ready[m]) begin
    int s;
    s = m_tok[m].tdata.src_pid;
    checks++;
    if (route(m_tok[m].tdest) != m) begin
      failures++; $display("token for %0d left on M%0d", m_tok[m].tdest, m);
    end
    if (m_tok[m].tdata.bid != BID_W'(exp_next[s][m] % 16)) begin
      failures++; $display("order S%0d->M%0d got %0d exp %0d", s, m, m_tok[m].tdata.bid, exp_next[s][m]);
    end
    exp_next[s][m]++;
    got[m][s]++;
  end

  function automatic logic [3:0] pick_dest(int s);
    case (s)
      0: return 4'($urandom % 10);
      1: return 4'($urandom % 6);          // 0..5
      default: return 4'(5 + $urandom % 5); // 5..9
    endcase
  endfunction

  int nxt [3][3];
  int cyc = 0, acc_cyc = -1, out_cyc = -1;
  logic [1:0] watch_m = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (s_valid[0] && s_ready[0] && acc_cyc < 0) acc_cyc <= cyc;
    if (s_valid[1] && s_ready[1] && acc_cyc < 0) acc_cyc <= cyc;
    if (m_valid[watch_m] && out_cyc < 0 && acc_cyc >= 0) out_cyc <= cyc;
  end
  bit will [3];
  task automatic settle();
    #1;
    for (int s = 0; s < 3; s++) will[s] = s_valid[s] && s_ready[s];
  endtask
  function automatic token_t mk(int s, logic [3:0] d);
    token_t t;
    t.tdest = d;
    t.tdata.src_pid = 4'(s);
    t.tdata.bid = BID_W'(nxt[s][route(d)]);
    t.tdata.is_ack = 1'b0;
    return t;
  endfunction

  initial begin
    int t0, order [$];
    for (int s = 0; s < 3; s++) begin
      s_valid[s] = 0; s_tok[s] = '0; m_ready[s] = 1; sent[s] = 0;
      for (int m = 0; m < 3; m++) begin got[m][s] = 0; exp_next[s][m] = 0; nxt[s][m] = 0; end
    end
    repeat (3) @(posedge clk); rst_n = 1;
    // latency S0 -> M0
    @(negedge clk); begin s_tok[0] = mk(0, ME); s_valid[0] = 1; end watch_m = 0;
    @(posedge clk); nxt[0][0]++;
    @(negedge clk); s_valid[0] = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (out_cyc - acc_cyc != 1) begin failures++; $display("S0->M0 latency %0d", out_cyc - acc_cyc); end
    // latency S1 -> M1
    @(negedge clk); acc_cyc = -1; out_cyc = -1; watch_m = 1;
    begin s_tok[1] = mk(1, 4'd2); s_valid[1] = 1; end
    @(posedge clk); nxt[1][1]++;
    @(negedge clk); s_valid[1] = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (out_cyc - acc_cyc != 2) begin failures++; $display("S1->M1 latency %0d", out_cyc - acc_cyc); end
    repeat (4) @(posedge clk);
    // contention: all three inputs want M0; M0 drains one per cycle
    @(negedge clk);
    for (int i = 0; i < 30; i++) begin
      for (int s = 0; s < 3; s++) if (!s_valid[s]) begin s_tok[s] = mk(s, ME); s_valid[s] = 1; end
      settle();
      if (m_valid[0]) order.push_back(m_tok[0].tdata.src_pid);
      @(negedge clk);
      for (int s = 0; s < 3; s++) if (will[s]) begin
        nxt[s][0]++; s_valid[s] = 0;
      end
      #1;
    end
    for (int s = 0; s < 3; s++) s_valid[s] = 0;
    for (int i = 6; i + 3 < order.size(); i += 3) begin
      checks++;
      if (order[i] == order[i+1] || order[i+1] == order[i+2] || order[i] == order[i+2]) begin
        failures++; $display("M0 not served in rotation at %0d", i);
      end
    end
    repeat (10) @(posedge clk);
    // random traffic with back-pressure
    @(negedge clk);
    for (int i = 0; i < 4000; i++) begin
      for (int m = 0; m < 3; m++) m_ready[m] = ($urandom % 3) != 0;
      for (int s = 0; s < 3; s++) if (!s_valid[s] && ($urandom % 2)) begin s_tok[s] = mk(s, pick_dest(s)); s_valid[s] = 1; end
      settle();
      @(negedge clk);
      for (int s = 0; s < 3; s++) if (will[s]) begin
        nxt[s][route(s_tok[s].tdest)]++; sent[s]++; s_valid[s] = 0;
      end
      #1;
    end
    for (int s = 0; s < 3; s++) s_valid[s] = 0;
    for (int m = 0; m < 3; m++) m_ready[m] = 1;
    repeat (20) @(posedge clk);
    for (int s = 0; s < 3; s++) for (int m = 0; m < 3; m++) begin
      checks++;
      if (exp_next[s][m] != nxt[s][m]) begin
        failures++; $display("S%0d->M%0d delivered %0d of %0d", s, m, exp_next[s][m], nxt[s][m]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
