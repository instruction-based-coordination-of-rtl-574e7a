// tb_icu_group_ctrl: a Store-group decoder (PID 0) runs the Store program of
// PU0 in the two-PU example of the ISA description:
//   0 PRG_PRM    NR, ICU_BA = 1
//   1 WAIT_ACK   SRC = 1, BID = 0, BASE_BID = 0, NC = 1, IC = 1
//   2 LINEAR_ADM CUR_BA = B0, LEN = L
//   3 CYCLE_ADDR BA = B0, AOFFS = L, NC = 1, IC = 1
//   4 SEND_REQ   DST = 1, BID = 0, BASE_BID = 0, NC = 1, IC = 1, END
// The testbench plays the instruction BRAM, the ACK table, the consumer PU1
// (which acknowledges buffers 0 and 1 once at start and then each buffer
// after it has been announced by a REQ, after a random delay) and the PU
// (random accept and completion delays). Checks: the stores alternate between
// B0 and B0 + L; REQ tokens go to PID 1 with BIDs 0, 1, 0, ...; no store
// starts on a buffer the consumer has not acknowledged; the waits stall; the
// group halts after NR rounds with rounds = NR; and after an even number of
// rounds the written-back program equals the original. A second run with
// NR = 0 (endless) must keep going until stop is raised.
`timescale 1ns/1ps
module tb_icu_group_ctrl;
  import icu_pkg::*;
  localparam longint B0 = 28'h0100;
  localparam int     L  = 12;
  localparam int     NR = 6;
  logic clk = 0, rst_n = 0;
  logic start = 0, stop = 0, busy, done;
  logic [15:0] rounds;
  logic ram_en, ram_we;
  logic [IADDR_W-1:0] ram_addr;
  logic [INSTR_W-1:0] ram_wdata, ram_rdata;
  logic tok_valid, tok_ready;
  token_t tok;
  logic [BID_W-1:0] poll_bid;
  logic [PID_W-1:0] poll_pid;
  logic poll_hit, poll_clr;
  logic cmd_valid, cmd_ready, cmd_done;
  pu_cmd_t cmd;
  logic wait_stall;
  int checks = 0, failures = 0;

  icu_group_ctrl #(.GROUP(GRP_ST), .PID(4'd0)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // instruction BRAM
  logic [INSTR_W-1:0] mem [512], prog [5];
  always @(posedge clk) if (ram_en) begin
    if (ram_we) mem[ram_addr] <= ram_wdata;
    ram_rdata <= mem[ram_addr];
  end

  // ACK table and consumer model
  logic ack [16];
  bit   free_buf [2];
  int   pend_delay [2];
  assign poll_hit = (poll_pid == 4'd1) && ack[poll_bid];
  int stalls = 0, stores = 0, reqs = 0, bp = 0;
  always @(posedge clk) if (rst_n) begin
    if (poll_clr) ack[poll_bid] <= 1'b0;
    if (wait_stall) stalls++;
    for (int b = 0; b < 2; b++) if (pend_delay[b] > 0) begin
      pend_delay[b]--;
      if (pend_delay[b] == 1) begin ack[b] <= 1'b1; free_buf[b] = 1; end
    end
  end

  // token checker: REQ for bid k % 2 announces buffer k % 2
  always @(negedge clk) tok_ready = ($urandom % 4) != 0;
  always @(posedge clk) if (rst_n) begin
    if (tok_valid && !tok_ready) bp++;
    if (tok_valid && tok_ready) begin
      checks++;
      if (tok.tdest != 1 || tok.tdata.src_pid != 0 || tok.tdata.is_ack ||
          tok.tdata.bid != BID_W'(reqs % 2)) begin
        failures++; $display("REQ %0d wrong: dst %0d bid %0d", reqs, tok.tdest, tok.tdata.bid);
      end
      pend_delay[tok.tdata.bid % 2] = 2 + $urandom % 30;
      reqs++;
    end
  end

  // PU model
  int  busy_cnt = 0;
  bit  running = 0;
  logic rnd_rdy;
  always @(negedge clk) rnd_rdy = ($urandom % 3) != 0;
  assign cmd_ready = !running && rnd_rdy;
  always @(posedge clk) begin
    cmd_done <= 1'b0;
    if (!rst_n) running = 0;
    else if (running) begin
      if (busy_cnt == 0) begin cmd_done <= 1'b1; running = 0; end
      else busy_cnt--;
    end else if (cmd_valid && cmd_ready) begin
      int b;
      b = stores % 2;
      checks++;
      if (cmd.op != PC_ST_OUT || cmd.addr != HADDR_W'(B0 + b * L) || cmd.len != L ||
          !cmd.first || !cmd.last) begin
        failures++; $display("store %0d: addr %h len %0d", stores, cmd.addr, cmd.len);
      end
      checks++;
      if (!free_buf[b]) begin failures++; $display("store %0d to buffer %0d before its ACK", stores, b); end
      free_buf[b] = 0;
      stores++;
      running = 1; busy_cnt = $urandom % 6;
    end
  end

  task automatic load(int nr);
    prog[0] = i_prg(nr, 1);
    prog[1] = i_sync(OP_WAIT_ACK, 1, 0, 0, 1, 1);
    prog[2] = i_adm(OP_LINEAR_ADM, B0, L);
    prog[3] = i_cyc(B0, L, 1, 1);
    prog[4] = i_sync(OP_SEND_REQ, 1, 0, 0, 1, 1, 1'b1);
    for (int i = 0; i < 512; i++) mem[i] = '0;
    for (int i = 0; i < 5; i++) mem[i] = prog[i];
  endtask

  initial begin
    int cyc;
    for (int i = 0; i < 16; i++) ack[i] = 0;
    free_buf[0] = 0; free_buf[1] = 0; pend_delay[0] = 0; pend_delay[1] = 0;
    ram_rdata = '0; cmd_done = 0; tok_ready = 0; rnd_rdy = 0;
    load(NR);
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    // the consumer's two bypass ACKs arrive a little later
    repeat (20) @(negedge clk);
    ack[0] = 1; ack[1] = 1; free_buf[0] = 1; free_buf[1] = 1;
    cyc = 0;
    while (!done && cyc < 20000) begin @(negedge clk); cyc++; end
    checks++;
    if (!done || busy || rounds != NR) begin failures++; $display("done %0d busy %0d rounds %0d", done, busy, rounds); end
    checks++;
    if (stores != NR || reqs != NR) begin failures++; $display("%0d stores %0d reqs", stores, reqs); end
    checks++;
    if (stalls == 0) begin failures++; $display("WAIT_ACK never stalled"); end
    checks++;
    if (bp == 0) begin failures++; $display("token back-pressure never seen"); end
    for (int i = 0; i < 5; i++) begin
      checks++;
      if (mem[i] != prog[i]) begin failures++; $display("word %0d not restored: %h", i, mem[i]); end
    end
    // endless run, stopped by the host
    repeat (40) @(negedge clk);
    for (int i = 0; i < 16; i++) ack[i] = 0;
    load(0);
    stores = 0; reqs = 0;
    ack[0] = 1; ack[1] = 1; free_buf[0] = 1; free_buf[1] = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (stores < 3 * NR && cyc < 20000) begin @(negedge clk); cyc++; end
    checks++;
    if (done || !busy) begin failures++; $display("endless program ended by itself"); end
    stop = 1; @(negedge clk); stop = 0;
    cyc = 0;
    while (busy && cyc < 2000) begin @(negedge clk); cyc++; end
    checks++;
    if (busy || done) begin failures++; $display("stop not honoured"); end
    $display("rounds %0d store stalls %0d cycles", rounds, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
