// tb_pu_adm: the data mover against a memory model with a fixed read latency
// of 8 cycles and random request back-pressure. Random read bursts must
// deliver every word once, in order, with its index, followed by one rd_done
// pulse; random write bursts must copy the source buffer to memory. With no
// back-pressure the write engine must take two cycles per word and a read
// burst of n words must end (rd_done seen) n + 8 + 1 cycles after its command.
`timescale 1ns/1ps
module tb_pu_adm;
  import icu_pkg::*;
  localparam int unsigned LAT = 8, MW = 1024;
  logic clk = 0, rst_n = 0;
  logic rd_cmd_valid = 0, rd_cmd_ready, o_valid, rd_done;
  logic [HADDR_W-1:0] rd_cmd_addr = '0, mr_req_addr, wr_cmd_addr = '0, mw_addr;
  logic [LEN_W-1:0]   rd_cmd_len = '0, o_idx, wr_cmd_len = '0, src_idx;
  logic [DATA_W-1:0]  o_data, mr_rsp_data, src_data, mw_data;
  logic mr_req_valid, mr_req_ready = 1, mr_rsp_valid;
  logic wr_cmd_valid = 0, wr_cmd_ready, src_re, wr_done, mw_valid, mw_ready = 1;
  logic [DATA_W-1:0] mem [MW];
  logic [DATA_W-1:0] src [64];
  int checks = 0, failures = 0;

  pu_adm #(.HAS_WR(1'b1)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory model: read responses LAT cycles after the accepted request
  logic              pv [LAT];
  logic [DATA_W-1:0] pd [LAT];
  assign mr_rsp_valid = pv[LAT-1];
  assign mr_rsp_data  = pd[LAT-1];
  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= rst_n && mr_req_valid && mr_req_ready;
    pd[0] <= mem[mr_req_addr % MW];
    if (mw_valid && mw_ready) mem[mw_addr % MW] <= mw_data;
  end
  // source buffer: data one cycle after src_re
  always @(posedge clk) if (src_re) src_data <= src[src_idx];

  // read output checker
  int rd_base, rd_len, rd_cnt, rd_dones;
  always @(posedge clk) if (rst_n) begin
    if (o_valid) begin
      checks++;
      if (o_idx != LEN_W'(rd_cnt) || o_data != mem[(rd_base + rd_cnt) % MW]) begin
        failures++; if (failures < 10) $display("read word %0d wrong", rd_cnt);
      end
      rd_cnt++;
    end
    if (rd_done) rd_dones++;
  end

  initial begin
    for (int i = 0; i < LAT; i++) begin pv[i] = 0; pd[i] = '0; end
    for (int i = 0; i < MW; i++) mem[i] = {8{$urandom}};
    for (int i = 0; i < 64; i++) src[i] = {8{$urandom}};
    src_data = '0; rd_dones = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 120; t++) begin
      bit full_rate;
      int t0, t1, n;
      full_rate = (t % 4 == 0);
      n = 1 + $urandom % 40;
      // read burst
      @(negedge clk);
      rd_base = $urandom % MW; rd_len = n; rd_cnt = 0; rd_dones = 0;
      rd_cmd_addr = rd_base; rd_cmd_len = n; rd_cmd_valid = 1;
      #1 checks++;
      if (!rd_cmd_ready) begin failures++; $display("read engine busy when idle"); end
      @(negedge clk); rd_cmd_valid = 0;
      t0 = 0; t1 = 0;
      while (rd_dones == 0) begin
        mr_req_ready = full_rate ? 1'b1 : ($urandom % 3 != 0);
        #1 if (mr_req_valid && mr_req_ready) t1++;
        @(negedge clk); t0++;
      end
      checks++;
      if (rd_cnt != n) begin failures++; $display("read %0d of %0d words", rd_cnt, n); end
      if (full_rate) begin
        checks++;
        if (t0 != n + LAT + 1) begin failures++; $display("read of %0d words took %0d cycles", n, t0); end
      end
      // write burst
      mr_req_ready = 1;
      begin
        int wb, cyc;
        logic [DATA_W-1:0] prev_mem [MW];
        wb = $urandom % MW;
        prev_mem = mem;
        wr_cmd_addr = wb; wr_cmd_len = n; wr_cmd_valid = 1;
        @(negedge clk); wr_cmd_valid = 0;
        cyc = 0;
        while (!wr_done && cyc < 1000) begin
          mw_ready = full_rate ? 1'b1 : ($urandom % 3 != 0);
          @(negedge clk); cyc++;
        end
        mw_ready = 1;
        if (full_rate) begin
          checks++;
          if (cyc != 2 * n) begin failures++; $display("write of %0d words took %0d cycles", n, cyc); end
        end
        for (int i = 0; i < MW; i++) begin
          logic [DATA_W-1:0] e;
          int k;
          k = (i - wb + MW) % MW;
          e = (k < n) ? src[k] : prev_mem[i];
          checks++;
          if (mem[i] != e) begin failures++; if (failures < 10) $display("mem %0d wrong after write", i); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
