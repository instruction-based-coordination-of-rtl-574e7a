// tb_icu_sync_table: checks the REQ/ACK state table. Random sets and
// poll/clears are applied and the poll result is compared every cycle with a
// reference bit array; a set and clear of the same entry in one cycle must
// leave it set.
module tb_icu_sync_table;
  localparam int BW = 4, PW = 4;
  logic clk = 0, rst_n = 0;
  logic set_en, poll_clr, poll_hit;
  logic [BW-1:0] set_bid, poll_bid;
  logic [PW-1:0] set_pid, poll_pid;
  int checks = 0, failures = 0;
  bit ref_state [256];

  icu_sync_table dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    set_en = 0; poll_clr = 0; set_bid = 0; set_pid = 0; poll_bid = 0; poll_pid = 0;
    foreach (ref_state[i]) ref_state[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // directed: set, see, clear with simultaneous set of the same entry
    @(negedge clk); set_en = 1; set_bid = 4'd3; set_pid = 4'd9;
    @(negedge clk); set_en = 0; poll_bid = 4'd3; poll_pid = 4'd9;
    #1; checks++; if (!poll_hit) begin failures++; $display("set entry not seen"); end
    poll_clr = 1; set_en = 1; set_bid = 4'd3; set_pid = 4'd9;
    @(negedge clk); poll_clr = 0; set_en = 0;
    #1; checks++; if (!poll_hit) begin failures++; $display("set lost against clear"); end
    poll_clr = 1;
    @(negedge clk); poll_clr = 0;
    #1; checks++; if (poll_hit) begin failures++; $display("clear failed"); end
    // random
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      set_en   = ($urandom % 3) == 0;
      set_bid  = BW'($urandom % 3); set_pid = PW'($urandom % 3);
      poll_bid = BW'($urandom % 3); poll_pid = PW'($urandom % 3);
      #1;
      checks++;
      if (poll_hit !== ref_state[{poll_bid, poll_pid}]) begin
        failures++;
        if (failures < 10) $display("mismatch at %0d", n);
      end
      poll_clr = poll_hit && ($urandom % 2);
      @(posedge clk);
      if (poll_clr) ref_state[{poll_bid, poll_pid}] = 0;
      if (set_en)   ref_state[{set_bid, set_pid}]   = 1;
      #1 poll_clr = 0; set_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
