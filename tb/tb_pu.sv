// tb_pu: one PU2x (64 x 8) with its three data-mover ports on the HBM model
// (read latency 16). Each test loads weights (with or without a leading bias
// word) into the weight memory, an activation block into the input bank and,
// when the residual add is enabled, residual lines; then runs a GEMM with
// random K chunks, P columns, shift, rounding and ReLU, and stores the output
// bank back to HBM. The stored bytes are compared with a reference model.
// The GEMM is timed from its command handshake to its done pulse and must
// take P*K + 7 cycles (one array step per cycle plus the bias fetch and the
// pipeline drain). The last tests run with random HBM back-pressure.
`timescale 1ns/1ps
module tb_pu;
  import icu_pkg::*;
  localparam int unsigned R = 64, C = 8;
  localparam int unsigned WPARTS = R * C * 8 / DATA_W, LPARTS = R * 8 / DATA_W;
  localparam longint WB = 0, AB = 4096, RB = 6144, OB = 8192;
  localparam int unsigned UB = 10;
  logic clk = 0, rst_n = 0, bp = 0;
  logic cmd_valid [3], cmd_ready [3], cmd_done [3];
  pu_cmd_t cmd [3];
  logic io_rd_valid, io_rd_ready, io_rsp_valid, io_wr_valid, io_wr_ready;
  logic [HADDR_W-1:0] io_rd_addr, io_wr_addr, wra_rd_addr;
  logic [DATA_W-1:0]  io_rsp_data, io_wr_data, wra_rsp_data;
  logic wra_rd_valid, wra_rd_ready, wra_rsp_valid;
  logic [1:0] in_full, out_full;
  logic gemm_busy;
  int checks = 0, failures = 0;

  pu #(.R(R), .C(C)) dut (.*);
  always #5 clk = ~clk;

  logic          h_rv [2], h_rr [2], h_sv [2], h_wv [1], h_wr [1];
  logic [27:0]   h_ra [2], h_wa [1];
  logic [255:0]  h_sd [2], h_wd [1];
  int            h_stall;
  assign h_rv[0] = io_rd_valid;  assign h_ra[0] = io_rd_addr;
  assign h_rv[1] = wra_rd_valid; assign h_ra[1] = wra_rd_addr;
  assign io_rd_ready = h_rr[0];  assign io_rsp_valid = h_sv[0];  assign io_rsp_data = h_sd[0];
  assign wra_rd_ready = h_rr[1]; assign wra_rsp_valid = h_sv[1]; assign wra_rsp_data = h_sd[1];
  assign h_wv[0] = io_wr_valid;  assign h_wa[0] = io_wr_addr; assign h_wd[0] = io_wr_data;
  assign io_wr_ready = h_wr[0];
  hbm_model #(.NRD(2), .NWR(1), .LAT(16), .MEM_AW(14)) u_hbm (
    .clk, .rst_n, .bp, .rd_valid(h_rv), .rd_ready(h_rr), .rd_addr(h_ra), .rsp_valid(h_sv),
    .rsp_data(h_sd), .wr_valid(h_wv), .wr_ready(h_wr), .wr_addr(h_wa), .wr_data(h_wd),
    .stall_cycles(h_stall)
  );

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] hbyte(longint base, longint i);
    logic [255:0] w;
    w = u_hbm.mem[(base + i / 32) % (2**14)];
    return w[(i % 32) * 8 +: 8];
  endfunction

  task automatic send(int g, pu_cmd_t c, output int t_acc, output int t_done);
    int t;
    @(negedge clk);
    cmd[g] = c; cmd_valid[g] = 1;
    t = 0;
    #1 while (!cmd_ready[g]) begin @(negedge clk); t++; #1; end
    t_acc = t;
    @(negedge clk); cmd_valid[g] = 0; t++;
    while (!cmd_done[g]) begin @(negedge clk); t++; end
    t_done = t;
    @(negedge clk);
  endtask

  initial begin
    for (int g = 0; g < 3; g++) begin cmd_valid[g] = 0; cmd[g] = '0; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int K, P, nw, na, ta, td;
      gemm_t g;
      pu_cmd_t c;
      logic [7:0] W [R][];
      int bias [R];
      bp = (t >= 9);
      K = 1 + $urandom % 6; P = 1 + $urandom % 20;
      g = '0; g.k_chunks = 12'(K); g.ncols = 12'(P); g.uram_base = UB;
      g.bias_en = $urandom % 2; g.add_en = $urandom % 2; g.relu = $urandom % 2;
      g.round_en = $urandom % 2; g.shift = 5'($urandom % 12); g.release_in = 1;
      // weights in HBM: [bias word] then one R*C-byte word per chunk
      for (int r = 0; r < R; r++) begin
        W[r] = new[K * C];
        foreach (W[r][m]) W[r][m] = 8'($urandom);
        bias[r] = $signed($urandom % 20001) - 10000;
      end
      nw = (K + g.bias_en) * WPARTS;
      for (int i = 0; i < nw; i++) u_hbm.mem[WB + i] = '0;
      if (g.bias_en) for (int r = 0; r < R; r++)
        u_hbm.mem[WB + (r * 32) / 256][(r * 32) % 256 +: 32] = 32'(bias[r]);
      for (int k = 0; k < K; k++) for (int r = 0; r < R; r++) for (int cc = 0; cc < C; cc++) begin
        int bit_i;
        bit_i = (r * C + cc) * 8;
        u_hbm.mem[WB + (k + g.bias_en) * WPARTS + bit_i / 256][bit_i % 256 +: 8] = W[r][k * C + cc];
      end
      // activations: column p, chunk k at byte (p*K + k)*C
      na = (P * K * C + 31) / 32;
      for (int i = 0; i < na; i++) u_hbm.mem[AB + i] = {8{$urandom}};
      for (int i = 0; i < P * LPARTS; i++) u_hbm.mem[RB + i] = {8{$urandom}};
      c = '0; c.op = PC_LD_W; c.addr = WB; c.len = nw; c.first = 1; c.last = 1; c.uram_addr = UB;
      send(GRP_CP, c, ta, td);
      c = '0; c.op = PC_LD_ACT; c.addr = AB; c.len = na; c.first = 1; c.last = 1;
      send(GRP_LD, c, ta, td);
      if (g.add_en) begin
        c = '0; c.op = PC_LD_RES; c.addr = RB; c.len = P * LPARTS; c.first = 1; c.last = 1;
        send(GRP_CP, c, ta, td);
      end
      c = '0; c.op = PC_GEMM; c.gemm = g;
      send(GRP_CP, c, ta, td);
      checks++;
      if (ta != 0 || td != P * K + 7) begin
        failures++; $display("GEMM P=%0d K=%0d: accepted after %0d, done after %0d cycles (exp %0d)",
                             P, K, ta, td, P * K + 7);
      end
      c = '0; c.op = PC_ST_OUT; c.addr = OB; c.len = P * LPARTS; c.first = 1; c.last = 1;
      send(GRP_ST, c, ta, td);
      for (int p = 0; p < P; p++) for (int r = 0; r < R; r++) begin
        longint acc, v;
        logic [7:0] e, got;
        acc = g.bias_en ? bias[r] : 0;
        for (int m = 0; m < K * C; m++)
          acc += $signed(W[r][m]) * $signed(hbyte(AB, p * K * C + m));
        acc = 32'(acc);
        acc = $signed(32'(acc));
        v = acc;
        if (g.round_en && g.shift != 0) v += longint'(1) << (g.shift - 1);
        v = v >>> g.shift;
        if (g.add_en) v += $signed(hbyte(RB, p * R + r));
        if (g.relu && v < 0) v = 0;
        if (v > 127) v = 127;
        if (v < -128) v = -128;
        e = 8'(v);
        got = hbyte(OB, p * R + r);
        checks++;
        if (got != e) begin
          failures++;
          if (failures < 30) $display("test %0d col %0d row %0d: got %0d exp %0d K %0d P %0d bias %0d add %0d", t, p, r, $signed(got), $signed(e), K, P, g.bias_en, g.add_en);
        end
      end
      checks++;
      if (in_full != 0 || out_full != 0) begin failures++; $display("buffers not released"); end
    end
    checks++;
    if (h_stall == 0) begin failures++; $display("HBM back-pressure never hit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
