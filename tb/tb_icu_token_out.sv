// tb_icu_token_out: checks the SEND-token merge and FIFO. Both decoders
// offer numbered tokens at random while the ISU side applies random
// back-pressure; every token must leave exactly once, each source's tokens in
// order, simultaneous offers must alternate, and four tokens must be taken
// while the output is blocked (the FIFO lets SEND proceed).
`timescale 1ns/1ps
module tb_icu_token_out;
  import icu_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ld_valid, ld_ready, st_valid, st_ready, m_valid, m_ready;
  token_t ld_tok, st_tok, m_tok;
  int checks = 0, failures = 0;
  int ld_sent = 0, st_sent = 0, ld_got = 0, st_got = 0;
  int both = 0;
  logic last_pick_st;

  icu_token_out dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // tokens carry a sequence number in bid/tdest; src_pid tells the source
  function automatic token_t mk(int src, int n);
    token_t t;
    t.tdest = PID_W'(n >> 4); t.tdata.bid = BID_W'(n); t.tdata.src_pid = PID_W'(src);
    t.tdata.is_ack = (src == 1);
    return t;
  endfunction

  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    int n;
    n = {m_tok.tdest, m_tok.tdata.bid};
    checks++;
    if (m_tok.tdata.src_pid == 0) begin
      if (n != (ld_got & 8'hff)) begin failures++; $display("LD order %0d exp %0d", n, ld_got); end
      ld_got++;
    end else begin
      if (n != (st_got & 8'hff)) begin failures++; $display("ST order %0d exp %0d", n, st_got); end
      st_got++;
    end
  end

  bit alt_phase = 0;
  always @(posedge clk) if (rst_n && alt_phase && ld_valid && st_valid && (ld_ready || st_ready)) begin
    if (both > 0) checks++;
    if (both > 0 && st_ready == last_pick_st) begin
      failures++; $display("grant did not alternate");
    end
    last_pick_st <= st_ready;
    both++;
  end

  initial begin
    ld_valid = 0; st_valid = 0; m_ready = 0; ld_tok = '0; st_tok = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // blocked output: the FIFO takes 4 tokens
    for (int i = 0; i < 6; i++) begin
      @(negedge clk); ld_valid = 1; ld_tok = mk(0, ld_sent);
      @(posedge clk); if (ld_ready) ld_sent++;
    end
    @(negedge clk); ld_valid = 0;
    checks++;
    if (ld_sent != 4) begin failures++; $display("FIFO took %0d tokens", ld_sent); end
    m_ready = 1;
    repeat (6) @(posedge clk);
    // both sources, always offering: grants must alternate
    alt_phase = 1;
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      ld_valid = 1; ld_tok = mk(0, ld_sent); st_valid = 1; st_tok = mk(1, st_sent);
      @(posedge clk);
      if (ld_ready) ld_sent++;
      if (st_ready) st_sent++;
    end
    @(negedge clk); ld_valid = 0; st_valid = 0; alt_phase = 0;
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      m_ready = ($urandom % 3) != 0;
      ld_valid = ($urandom % 2) != 0; ld_tok = mk(0, ld_sent);
      st_valid = ($urandom % 2) != 0; st_tok = mk(1, st_sent);
      @(posedge clk);
      if (ld_valid && ld_ready) ld_sent++;
      if (st_valid && st_ready) st_sent++;
    end
    @(negedge clk); ld_valid = 0; st_valid = 0; m_ready = 1;
    repeat (10) @(posedge clk);
    checks++;
    if (ld_got != ld_sent || st_got != st_sent) begin
      failures++; $display("lost tokens %0d/%0d %0d/%0d", ld_got, ld_sent, st_got, st_sent);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
