// tb_icu: one ICU (PID 1) configured over its configuration port with the
// programs of PU1 in the two-PU example of the ISA description:
//   Load   0 PRG_PRM NR, ICU_BA = 3
//          1 SEND_ACK DST 0, BID 0, NC 0 (bypass)  2 SEND_ACK DST 0, BID 1, NC 0
//          3 WAIT_REQ SRC 0, BID 0, BASE 0, NC 1, IC 1
//          4 IM2COL_PRM 2 x 3 bursts   5 IM2COL_ADM B0, LA
//          6 CYCLE_ADDR B0, LB, 1, 1   7 SEND_ACK DST 0, BID 0, BASE 0, NC 1, IC 1, END
//   Compute 0 PRG_PRM NR, 1   1 GEMM END
//   Store  0 PRG_PRM NR, 1   1 LINEAR_ADM C0, LC   2 CYCLE_ADDR C0, LC, 3, 3, END
// The testbench plays PU0 (on each ACK for buffer b it writes b and answers
// with a REQ for b after a random delay, through the token input) and the
// PU (random accept and completion delays on the three command channels).
// Checks: the two bypass ACKs come first and keep BID 0 and 1; then ACKs
// alternate 0, 1, ...; each Load round reads B0 or B0 + LB only after PU0's
// REQ for that buffer and issues the 6 im2col bursts in order; the Store
// group cycles through C0 + k*LC, k = 0..3; every group finishes NR rounds
// and `done` rises; the REQ wait stalls and the token output sees back-pressure.
// A second program then has the Store group send REQs to the ICU's own PID,
// which the Load group waits for: these tokens must never appear on the token
// output, and each must be in the REQ table in the second cycle after it is sent.
`timescale 1ns/1ps
module tb_icu;
  import icu_pkg::*;
  localparam longint B0 = 28'h1000, C0 = 28'h8000;
  localparam int SELF_LAT = 1;
  localparam int LA = 4, LB = 64, LC = 16, NR = 8;
  logic clk = 0, rst_n = 0;
  logic cfg_valid = 0, cfg_ready;
  cfg_beat_t cfg_beat = '0;
  logic start = 0, stop = 0, busy, done;
  logic tin_valid = 0, tin_ready, tout_valid, tout_ready;
  token_t tin = '0, tout;
  logic cmd_valid [3], cmd_ready [3], cmd_done [3];
  pu_cmd_t cmd [3];
  logic [2:0] grp_busy;
  logic [15:0] grp_rounds [3];
  logic req_wait_stall, ack_wait_stall;
  int checks = 0, failures = 0;

  icu #(.PID(4'd1)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- PU0 model ----
  int acks = 0, req_due [2], stalls = 0, tbp = 0;
  bit written [2];                // PU0 has written buffer b and announced it
  int req_q [$];
  always @(negedge clk) tout_ready = ($urandom % 3) != 0;
  always @(posedge clk) if (rst_n) begin
    if (req_wait_stall) stalls++;
    if (tout_valid && !tout_ready) tbp++;
    if (tout_valid && tout_ready) begin
      int e;
      e = (acks < 2) ? acks : (acks - 2) % 2;
      checks++;
      if (!tout.tdata.is_ack || tout.tdest != 0 || tout.tdata.src_pid != 1 || tout.tdata.bid != BID_W'(e)) begin
        failures++; $display("ACK %0d: bid %0d exp %0d", acks, tout.tdata.bid, e);
      end
      acks++;
      if (acks <= NR + 2 - 2) req_due[tout.tdata.bid % 2] = 3 + $urandom % 40;
    end
    for (int b = 0; b < 2; b++) if (req_due[b] > 0) begin
      req_due[b]--;
      if (req_due[b] == 0) begin req_q.push_back(b); written[b] = 1; end
    end
  end
  // REQ injection
  initial begin
    tin_valid = 0;
    forever begin
      @(negedge clk);
      if (tin_valid) begin
        #1 if (tin_ready) begin
          @(negedge clk);
          tin_valid = 0;
        end
      end else if (req_q.size() > 0) begin
        tin.tdest = 1; tin.tdata.src_pid = 0; tin.tdata.is_ack = 0;
        tin.tdata.bid = BID_W'(req_q.pop_front());
        tin_valid = 1;
        #1 if (tin_ready) begin @(negedge clk); tin_valid = 0; end
      end
    end
  end

  // ---- PU model: three channels ----
  int ld_n = 0, cp_n = 0, st_n = 0;
  bit ph2 = 0;
  bit run [3];
  int cnt [3];
  logic rnd [3];
  always @(negedge clk) for (int g = 0; g < 3; g++) rnd[g] = ($urandom % 3) != 0;
  always_comb for (int g = 0; g < 3; g++) cmd_ready[g] = !run[g] && rnd[g];
  always @(posedge clk) for (int g = 0; g < 3; g++) begin
    cmd_done[g] <= 1'b0;
    if (!rst_n) run[g] = 0;
    else if (run[g]) begin
      if (cnt[g] == 0) begin cmd_done[g] <= 1'b1; run[g] = 0; end
      else cnt[g]--;
    end else if (cmd_valid[g] && cmd_ready[g]) begin
      run[g] = 1; cnt[g] = $urandom % 5;
      unique case (g)
        0: if (!ph2) begin
          int r, k, b;
          longint ea;
          r = ld_n / 6; k = ld_n % 6; b = r % 2;
          ea = B0 + b * LB + (k / 2) * 1000 + (k % 2) * 100;
          checks++;
          if (cmd[g].op != PC_LD_ACT || cmd[g].addr != HADDR_W'(ea) || cmd[g].len != LA ||
              cmd[g].first != (k == 0) || cmd[g].last != (k == 5)) begin
            failures++; $display("load %0d burst %0d: addr %h exp %h", r, k, cmd[g].addr, ea);
          end
          if (k == 0) begin
            checks++;
            if (!written[b]) begin failures++; $display("load %0d of buffer %0d before its REQ", r, b); end
            written[b] = 0;
          end
          ld_n++;
        end
        1: if (!ph2) begin
          checks++;
          if (cmd[g].op != PC_GEMM) begin failures++; $display("compute op %0d", cmd[g].op); end
          cp_n++;
        end
        default: if (!ph2) begin
          longint ea;
          ea = C0 + (st_n % 4) * LC;
          checks++;
          if (cmd[g].op != PC_ST_OUT || cmd[g].addr != HADDR_W'(ea) || cmd[g].len != LC) begin
            failures++; $display("store %0d: addr %h exp %h", st_n, cmd[g].addr, ea);
          end
          st_n++;
        end
      endcase
    end
  end

  // same-PU delivery: the REQ table is written on the clock edge after the
  // SEND_REQ's token enters the FIFO, so the entry is visible in the second
  // cycle after the SEND
  int self_sent = 0, self_lat_bad = 0, tcyc = 0, t_in [$];
  always @(posedge clk) begin
    tcyc++;
    if (ph2 && dut.u_req.set_en) begin
      self_sent++;
      begin automatic int d = (t_in.size() == 0) ? -1 : tcyc - t_in.pop_front(); if (d != SELF_LAT) begin self_lat_bad++; $display("same-PU token latency %0d", d); end end
    end
    if (ph2 && dut.tv[GRP_ST] && dut.tr[GRP_ST]) t_in.push_back(tcyc);
  end

  task automatic cfg(icu_group_e g, int a, instr_t w);
    @(negedge clk);
    cfg_beat.pid = 1; cfg_beat.group = g; cfg_beat.addr = IADDR_W'(a); cfg_beat.data = w;
    cfg_valid = 1;
    #1 while (!cfg_ready) begin @(negedge clk); #1; end
    @(negedge clk); cfg_valid = 0;
  endtask

  initial begin
    int cyc;
    gemm_t g;
    for (int i = 0; i < 2; i++) begin req_due[i] = 0; written[i] = 0; end
    for (int i = 0; i < 3; i++) begin run[i] = 0; cnt[i] = 0; cmd_done[i] = 0; rnd[i] = 0; end
    tout_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    cfg(GRP_LD, 0, i_prg(NR, 3));
    cfg(GRP_LD, 1, i_sync(OP_SEND_ACK, 0, 0, 0, 0, 0));
    cfg(GRP_LD, 2, i_sync(OP_SEND_ACK, 0, 1, 0, 0, 0));
    cfg(GRP_LD, 3, i_sync(OP_WAIT_REQ, 0, 0, 0, 1, 1));
    cfg(GRP_LD, 4, i_pat(OP_IM2COL_PRM, 2, 100, 3, 1000));
    cfg(GRP_LD, 5, i_adm(OP_IM2COL_ADM, B0, LA));
    cfg(GRP_LD, 6, i_cyc(B0, LB, 1, 1));
    cfg(GRP_LD, 7, i_sync(OP_SEND_ACK, 0, 0, 0, 1, 1, 1'b1));
    g = '0; g.ncols = 1; g.k_chunks = 1;
    cfg(GRP_CP, 0, i_prg(NR, 1));
    cfg(GRP_CP, 1, i_gemm(g, 1'b1));
    cfg(GRP_ST, 0, i_prg(NR, 1));
    cfg(GRP_ST, 1, i_adm(OP_LINEAR_ADM, C0, LC));
    cfg(GRP_ST, 2, i_cyc(C0, LC, 3, 3, 1'b1));
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 50000) begin @(negedge clk); cyc++; end
    while (tout_valid && cyc < 50000) begin @(negedge clk); cyc++; end   // last ACK may still be queued
    checks++;
    if (!done || busy) begin failures++; $display("ICU not done: grp_busy %b", grp_busy); end
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (grp_rounds[i] != NR) begin failures++; $display("group %0d ran %0d rounds", i, grp_rounds[i]); end
    end
    checks++;
    if (ld_n != 6 * NR || cp_n != NR || st_n != NR || acks != NR + 2) begin
      failures++; $display("loads %0d gemms %0d stores %0d acks %0d", ld_n, cp_n, st_n, acks);
    end
    checks++;
    if (stalls == 0) begin failures++; $display("WAIT_REQ never stalled"); end
    checks++;
    if (tbp == 0) begin failures++; $display("token output never back-pressured"); end
    $display("REQ wait stall cycles %0d, finished in %0d cycles", stalls, cyc);

    // ---- same-PU tokens: Store sends REQ to PID 1, Load waits for it ----
    ph2 = 1;
    cfg(GRP_LD, 0, i_prg(4, 1));
    cfg(GRP_LD, 1, i_sync(OP_WAIT_REQ, 1, 4, 4, 3, 3));
    cfg(GRP_LD, 2, i_adm(OP_LINEAR_ADM, B0, LA, 1'b1));
    cfg(GRP_CP, 0, i_prg(1, 1));
    cfg(GRP_CP, 1, i_gemm(g, 1'b1));
    cfg(GRP_ST, 0, i_prg(4, 1));
    cfg(GRP_ST, 1, i_sync(OP_SEND_REQ, 1, 4, 4, 3, 3, 1'b1));
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 5000) begin @(negedge clk); cyc++; end
    checks++;
    if (!done || grp_rounds[GRP_LD] != 4 || grp_rounds[GRP_ST] != 4) begin
      failures++; $display("same-PU program not done: rounds %0d %0d", grp_rounds[GRP_LD], grp_rounds[GRP_ST]);
    end
    checks++;
    if (self_sent != 4 || self_lat_bad != 0) begin
      failures++; $display("same-PU tokens: %0d delivered, %0d with wrong latency", self_sent, self_lat_bad);
    end
    $display("same-PU tokens delivered %0d", self_sent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
