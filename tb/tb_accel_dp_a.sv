// tb_accel_dp_a: the full ten-PU accelerator at its default parameters,
// arranged as in the single-batch deployment: one layer pipeline through all
// ten PUs in PID order (PU k runs layer k and hands its output to PU k+1).
// Every PU except the ends is a consumer toward its predecessor (Load group:
// two bypass SEND_ACKs, then WAIT_REQ / load / SEND_ACK) and a producer
// toward its successor (Store group: WAIT_ACK / store / SEND_REQ), each pair
// sharing a double buffer in HBM; PU0 reads the input frames and PU9 writes
// the results. The pipeline crosses the SLR boundary between PU4 and PU5 and
// mixes PU1x and PU2x stages. Programs are loaded over the AXI4-Lite CfgLink
// bridge only.
//
// Checks: every output byte against a reference model of the ten layers;
// 18 bypass SENDs; N REQ tokens up and N+2 ACK tokens down the SLR crossing;
// that REQ and ACK waits and HBM back-pressure happen; and that the run
// finishes before the watchdog.
`timescale 1ns/1ps
module tb_accel_dp_a;
  import icu_pkg::*;
  localparam int NUM_PU = 10, R = 64, N = 6, P = 4;
  localparam logic [NUM_PU-1:0] IS2X = 10'b10_0111_1000;
  localparam longint XB = 12288;              // double buffers, 64 words per stage
  logic clk = 0, rst_n = 0, bp = 0;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 1;
  logic [7:0] s_awaddr = '0, s_araddr = '0;
  logic [31:0] s_wdata = '0, s_rdata;
  logic [1:0] s_bresp, s_rresp;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 1;
  logic io_rd_valid [NUM_PU], io_rd_ready [NUM_PU], io_rsp_valid [NUM_PU];
  logic [HADDR_W-1:0] io_rd_addr [NUM_PU], io_wr_addr [NUM_PU], wra_rd_addr [NUM_PU];
  logic [DATA_W-1:0] io_rsp_data [NUM_PU], io_wr_data [NUM_PU], wra_rsp_data [NUM_PU];
  logic io_wr_valid [NUM_PU], io_wr_ready [NUM_PU];
  logic wra_rd_valid [NUM_PU], wra_rd_ready [NUM_PU], wra_rsp_valid [NUM_PU];
  int checks = 0, failures = 0;

  accel_top dut (.*);
  always #5 clk = ~clk;

  // ---- HBM: ports 0..9 Inp/Out reads, 10..19 W/RA reads; 10 write ports ----
  logic          h_rv [2*NUM_PU], h_rr [2*NUM_PU], h_sv [2*NUM_PU];
  logic [27:0]   h_ra [2*NUM_PU], h_wa [NUM_PU];
  logic [255:0]  h_sd [2*NUM_PU];
  int            h_stall;
  for (genvar i = 0; i < NUM_PU; i++) begin : g_h
    assign h_rv[i] = io_rd_valid[i];           assign h_ra[i] = io_rd_addr[i];
    assign h_rv[NUM_PU+i] = wra_rd_valid[i];   assign h_ra[NUM_PU+i] = wra_rd_addr[i];
    assign io_rd_ready[i] = h_rr[i];           assign io_rsp_valid[i] = h_sv[i];
    assign io_rsp_data[i] = h_sd[i];
    assign wra_rd_ready[i] = h_rr[NUM_PU+i];   assign wra_rsp_valid[i] = h_sv[NUM_PU+i];
    assign wra_rsp_data[i] = h_sd[NUM_PU+i];
  end
  hbm_model #(.NRD(2*NUM_PU), .NWR(NUM_PU), .LAT(16), .MEM_AW(14)) u_hbm (
    .clk, .rst_n, .bp, .rd_valid(h_rv), .rd_ready(h_rr), .rd_addr(h_ra), .rsp_valid(h_sv),
    .rsp_data(h_sd), .wr_valid(io_wr_valid), .wr_ready(io_wr_ready), .wr_addr(io_wr_addr),
    .wr_data(io_wr_data), .stall_cycles(h_stall)
  );

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- per-PU memory map (256-bit words) ----
  function automatic longint wbase(int i);  return i * 1024;       endfunction
  function automatic longint ibase(int i);  return i * 1024 + 256; endfunction
  function automatic longint rbase(int i);  return i * 1024 + 512; endfunction
  function automatic longint obase(int i);  return i * 1024 + 768; endfunction
  function automatic int cols(int i);       return IS2X[i] ? 8 : 4; endfunction

  function automatic logic [7:0] hbyte(longint base, longint i);
    logic [255:0] w;
    w = u_hbm.mem[(base + i / 32) % (2**14)];
    return w[(i % 32) * 8 +: 8];
  endfunction

  // layer parameters per PU
  logic [7:0] Wt [NUM_PU][R][R];     // M = R = 64 inputs per column
  int         bias [NUM_PU][R];
  gemm_t      gp [NUM_PU];

  // write weights of PU i into its region: bias word, then K = R / C words
  task automatic put_weights(int i);
    int C, WP, K;
    C = cols(i); WP = R * C * 8 / 256; K = R / C;
    for (int w = 0; w < (K + 1) * WP; w++) u_hbm.mem[wbase(i) + w] = '0;
    for (int r = 0; r < R; r++) u_hbm.mem[wbase(i) + (r * 32) / 256][(r * 32) % 256 +: 32] = 32'(bias[i][r]);
    for (int k = 0; k < K; k++) for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      int b;
      b = (r * C + c) * 8;
      u_hbm.mem[wbase(i) + (k + 1) * WP + b / 256][b % 256 +: 8] = Wt[i][r][k * C + c];
    end
  endtask

  task automatic new_layer(int i, bit add);
    for (int r = 0; r < R; r++) begin
      for (int m = 0; m < R; m++) Wt[i][r][m] = 8'($signed($urandom % 15) - 7);
      bias[i][r] = $signed($urandom % 2001) - 1000;
    end
    gp[i] = '0;
    gp[i].ncols = P; gp[i].k_chunks = 12'(R / cols(i)); gp[i].uram_base = 0;
    gp[i].bias_en = 1; gp[i].add_en = add; gp[i].relu = 1; gp[i].round_en = 1;
    gp[i].shift = 5'd6; gp[i].release_in = 1;
    put_weights(i);
  endtask

  // reference: one output column of PU i's layer for input x (and residual)
  function automatic void ref_col(int i, logic [7:0] x [R], logic [7:0] res [R], output logic [7:0] y [R]);
    for (int r = 0; r < R; r++) begin
      longint v;
      v = bias[i][r];
      for (int m = 0; m < R; m++) v += $signed(Wt[i][r][m]) * $signed(x[m]);
      v = $signed(32'(v));
      if (gp[i].round_en && gp[i].shift != 0) v += longint'(1) << (gp[i].shift - 1);
      v = v >>> gp[i].shift;
      if (gp[i].add_en) v += $signed(res[r]);
      if (gp[i].relu && v < 0) v = 0;
      if (v > 127) v = 127;
      if (v < -128) v = -128;
      y[r] = 8'(v);
    end
  endfunction

  // ---- host (AXI4-Lite) ----
  task automatic axil_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    s_awvalid = 1; s_awaddr = a; s_wvalid = 1; s_wdata = d;
    #1 while (!(s_awready && s_wready)) begin @(negedge clk); #1; end
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    #1 while (!s_bvalid) begin @(negedge clk); #1; end
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
  task automatic put(int pid, icu_group_e g, int a, instr_t w);
    axil_write(8'h00, w[31:0]);
    axil_write(8'h04, w[63:32]);
    axil_write(8'h08, {12'd0, 4'(pid), 2'd0, 2'(g), 3'd0, 9'(a)});
  endtask
  task automatic run_and_wait(output int cycles);
    logic [31:0] d;
    axil_write(8'h0C, 32'h1);
    cycles = 0;
    do begin
      axil_read(8'h10, d);
      cycles += 4;
    end while (d[NUM_PU-1:0] != '1 && cycles < 300000);
  endtask

  // ---- mechanism counters ----
  int bypass = 0, req_stall = 0, ack_stall = 0, xing_up = 0, xing_dn = 0;
  for (genvar k = 0; k < NUM_PU; k++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_pu[k].u_icu.g_grp[0].u_dec.tok_valid && dut.g_pu[k].u_icu.g_grp[0].u_dec.tok_ready &&
          dut.g_pu[k].u_icu.g_grp[0].u_dec.sy.nc == 0) bypass++;
      if (dut.g_pu[k].req_stall) req_stall++;
      if (dut.g_pu[k].ack_stall) ack_stall++;
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (dut.g_link[4].u_up.m_valid && dut.g_link[4].u_up.m_ready) xing_up++;
    if (dut.g_link[4].u_dn.m_valid && dut.g_link[4].u_dn.m_ready) xing_dn++;
  end

  function automatic longint xbuf(int k); return XB + k * 64; endfunction

  initial begin
    int cyc, C, nz;
    logic [7:0] x [R], rs [R], y [R];
    for (int r = 0; r < R; r++) rs[r] = '0;   // no residual in this test
    repeat (3) @(posedge clk); rst_n = 1;
    bp = 1;
    for (int k = 0; k < NUM_PU; k++) begin
      C = cols(k);
      new_layer(k, 1'b0);
      if (k == 0) begin
        for (int w = 0; w < N * 2 * P; w++) u_hbm.mem[ibase(0) + w] = {8{$urandom}};
        put(k, GRP_LD, 0, i_prg(N, 1));
        put(k, GRP_LD, 1, i_adm(OP_LINEAR_ADM, ibase(0), 2 * P));
        put(k, GRP_LD, 2, i_cyc(ibase(0), 2 * P, N - 1, N - 1, 1'b1));
      end else begin
        put(k, GRP_LD, 0, i_prg(N, 3));
        put(k, GRP_LD, 1, i_sync(OP_SEND_ACK, k - 1, 0, 0, 0, 0));
        put(k, GRP_LD, 2, i_sync(OP_SEND_ACK, k - 1, 1, 0, 0, 0));
        put(k, GRP_LD, 3, i_sync(OP_WAIT_REQ, k - 1, 0, 0, 1, 1));
        put(k, GRP_LD, 4, i_adm(OP_LINEAR_ADM, xbuf(k - 1), 2 * P));
        put(k, GRP_LD, 5, i_cyc(xbuf(k - 1), 2 * P, 1, 1));
        put(k, GRP_LD, 6, i_sync(OP_SEND_ACK, k - 1, 0, 0, 1, 1, 1'b1));
      end
      put(k, GRP_CP, 0, i_prg(N, 3));
      put(k, GRP_CP, 1, i_uram(0));
      put(k, GRP_CP, 2, i_adm(OP_WEIGHTS_ADM, wbase(k), (R / C + 1) * (R * C / 32)));
      put(k, GRP_CP, 3, i_gemm(gp[k], 1'b1));
      if (k < NUM_PU - 1) begin
        put(k, GRP_ST, 0, i_prg(N, 1));
        put(k, GRP_ST, 1, i_sync(OP_WAIT_ACK, k + 1, 0, 0, 1, 1));
        put(k, GRP_ST, 2, i_adm(OP_LINEAR_ADM, xbuf(k), 2 * P));
        put(k, GRP_ST, 3, i_cyc(xbuf(k), 2 * P, 1, 1));
        put(k, GRP_ST, 4, i_sync(OP_SEND_REQ, k + 1, 0, 0, 1, 1, 1'b1));
      end else begin
        put(k, GRP_ST, 0, i_prg(N, 1));
        put(k, GRP_ST, 1, i_adm(OP_LINEAR_ADM, obase(k), 2 * P));
        put(k, GRP_ST, 2, i_cyc(obase(k), 2 * P, N - 1, N - 1, 1'b1));
      end
    end
    run_and_wait(cyc);
    $display("%0d-stage pipeline, %0d frames, finished after about %0d cycles", NUM_PU, N, cyc);
    checks++;
    if (cyc >= 300000) begin failures++; $display("run did not finish"); end
    nz = 0;
    for (int f = 0; f < N; f++) for (int p = 0; p < P; p++) begin
      for (int m = 0; m < R; m++) x[m] = hbyte(ibase(0), (f * P + p) * R + m);
      for (int k = 0; k < NUM_PU; k++) begin
        ref_col(k, x, rs, y);
        x = y;
      end
      for (int r = 0; r < R; r++) begin
        checks++;
        if (y[r] != 0) nz++;
        if (hbyte(obase(NUM_PU - 1), (f * P + p) * R + r) != y[r]) begin
          failures++;
          if (failures < 10) $display("frame %0d col %0d row %0d: got %0d exp %0d", f, p, r,
                                      $signed(hbyte(obase(NUM_PU - 1), (f * P + p) * R + r)), $signed(y[r]));
        end
      end
    end
    checks++;
    if (nz == 0) begin failures++; $display("all expected outputs are zero: the test would prove little"); end
    $display("non-zero output bytes %0d", nz);
    $display("bypass SENDs %0d, REQ-wait stall cycles %0d, ACK-wait stall cycles %0d", bypass, req_stall, ack_stall);
    $display("tokens across the SLR crossing: %0d up, %0d down", xing_up, xing_dn);
    $display("HBM back-pressure cycles %0d", h_stall);
    checks++; if (bypass != 2 * (NUM_PU - 1)) begin failures++; $display("bypass count %0d", bypass); end
    checks++; if (req_stall == 0)  begin failures++; $display("no REQ-wait stall"); end
    checks++; if (ack_stall == 0)  begin failures++; $display("no ACK-wait stall"); end
    checks++; if (xing_up != N || xing_dn != N + 2) begin failures++; $display("SLR crossings wrong"); end
    checks++; if (h_stall == 0)    begin failures++; $display("no HBM back-pressure"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
