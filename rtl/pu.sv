// pu: one Processing Unit, the engine the ICU drives. PU1x is R x C = 64 x 4,
// PU2x is 64 x 8 (twice the throughput); both run GEMMs for convolution
// (after IM2COL) and fully connected layers.
//
// Three command channels, one per ICU group, each taking a command with
// valid/ready and answering with a one-cycle `done`:
//   Load    PC_LD_ACT  read LEN words from HBM into the free input bank; the
//                      first burst of an instruction waits for a free bank, the
//                      last marks it full.
//   Compute PC_LD_W    read LEN words into the weight URAMs from uram_addr on.
//           PC_LD_RES  read LEN words of residual activations into the
//                      residual buffer (one R-byte line per output column).
//           PC_GEMM    wait for a full input bank and a free output bank, then
//                      for each of the P = ncols columns run K = k_chunks array
//                      steps (weights at uram_base [+1 if a bias word leads]),
//                      post-process the R sums and write one output line.
//                      The output bank is marked full at the end; the input
//                      bank is freed if release_in.
//   Store   PC_ST_OUT  write LEN words from the full output bank to HBM; the
//                      first burst waits for a full bank, the last frees it.
// Two data movers serve the channels as in the baseline PU: the Inp/Out mover
// (Load reads, Store writes) and the W/RA mover (weights, residuals).
//
// Data layout (this design's): activations are stored column by column, each
// column of A holding M consecutive bytes, so the array's input for column p,
// chunk k is byte (p*K + k)*C of the bank. An output or residual line is R
// bytes, byte r for row r, spread over R/32 consecutive 256-bit words.
//
// GEMM timing: 2 cycles to fetch the bias word, then one array step per cycle
// (P*K cycles), then the buffer read, array, vector unit and done registers
// drain: `done` pulses P*K + 7 cycles after the accepting clock edge.
// The paper's wave reorder buffer is not needed here because the array
// finishes columns in order.
// Every flip-flop resets asynchronously; the only synchronous use of rst_n is
// the `disable iff` of the assertions, which a lint tool may still report as
// a reset used both ways.
module pu
  import icu_pkg::*;
#(
  parameter int unsigned R          = 64,
  parameter int unsigned C          = 8,
  parameter int unsigned ACT_DEPTH  = 1024,  // 256-bit words per input bank
  parameter int unsigned OUT_LINES  = 512,   // R-byte lines per output bank
  parameter int unsigned RES_LINES  = 512,   // R-byte lines of residual buffer
  parameter int unsigned WMEM_DEPTH = 64 * 4096 * 64 / (R * C * 8)
) (
  input  logic               clk,
  input  logic               rst_n,
  // commands from the ICU, index = icu_group_e
  input  logic               cmd_valid [3],
  output logic               cmd_ready [3],
  input  pu_cmd_t            cmd       [3],
  output logic               cmd_done  [3],
  // Inp/Out data mover: HBM read (Load) and write (Store)
  output logic               io_rd_valid,
  input  logic               io_rd_ready,
  output logic [HADDR_W-1:0] io_rd_addr,
  input  logic               io_rsp_valid,
  input  logic [DATA_W-1:0]  io_rsp_data,
  output logic               io_wr_valid,
  input  logic               io_wr_ready,
  output logic [HADDR_W-1:0] io_wr_addr,
  output logic [DATA_W-1:0]  io_wr_data,
  // W/RA data mover: HBM read (weights, residual activations)
  output logic               wra_rd_valid,
  input  logic               wra_rd_ready,
  output logic [HADDR_W-1:0] wra_rd_addr,
  input  logic               wra_rsp_valid,
  input  logic [DATA_W-1:0]  wra_rsp_data,
  // state, for monitoring
  output logic [1:0]         in_full,
  output logic [1:0]         out_full,
  output logic               gemm_busy
);
  localparam int unsigned LW     = R * 8;            // output line width
  localparam int unsigned WW     = R * C * 8;        // weight word width
  localparam int unsigned LPARTS = LW / DATA_W;      // words per line
  localparam int unsigned WPARTS = WW / DATA_W;      // words per weight word
  localparam int unsigned AAW    = $clog2(ACT_DEPTH);
  localparam int unsigned OAW    = $clog2(OUT_LINES);
  localparam int unsigned RAW    = $clog2(RES_LINES);
  localparam int unsigned WAW    = $clog2(WMEM_DEPTH);
  localparam int unsigned SLW    = $clog2(DATA_W / (C * 8));  // slice index width
  localparam int unsigned LPW    = (LPARTS > 1) ? $clog2(LPARTS) : 1;
  localparam int unsigned WPW    = $clog2(WPARTS);

  // ===================== data movers =====================
  logic               io_rcmd_v, io_rcmd_r, io_o_valid, io_rdone;
  logic [DATA_W-1:0]  io_o_data;
  logic [LEN_W-1:0]   io_o_idx, st_src_idx;
  logic               io_wcmd_v, io_wcmd_r, st_src_re, io_wdone;
  logic [DATA_W-1:0]  st_src_data;
  logic               wra_rcmd_v, wra_rcmd_r, wra_o_valid, wra_rdone;
  logic [DATA_W-1:0]  wra_o_data;
  logic [LEN_W-1:0]   wra_o_idx, wra_src_idx;
  logic               wra_src_re, wra_wcmd_r, wra_wdone, wra_mw_valid;
  logic [HADDR_W-1:0] wra_mw_addr;
  logic [DATA_W-1:0]  wra_mw_data;

  pu_adm #(.HAS_WR(1'b1)) u_adm_io (
    .clk, .rst_n,
    .rd_cmd_valid(io_rcmd_v), .rd_cmd_ready(io_rcmd_r),
    .rd_cmd_addr(cmd[GRP_LD].addr), .rd_cmd_len(cmd[GRP_LD].len),
    .o_valid(io_o_valid), .o_data(io_o_data), .o_idx(io_o_idx), .rd_done(io_rdone),
    .mr_req_valid(io_rd_valid), .mr_req_ready(io_rd_ready), .mr_req_addr(io_rd_addr),
    .mr_rsp_valid(io_rsp_valid), .mr_rsp_data(io_rsp_data),
    .wr_cmd_valid(io_wcmd_v), .wr_cmd_ready(io_wcmd_r),
    .wr_cmd_addr(cmd[GRP_ST].addr), .wr_cmd_len(cmd[GRP_ST].len),
    .src_re(st_src_re), .src_idx(st_src_idx), .src_data(st_src_data), .wr_done(io_wdone),
    .mw_valid(io_wr_valid), .mw_ready(io_wr_ready), .mw_addr(io_wr_addr), .mw_data(io_wr_data)
  );

  pu_adm #(.HAS_WR(1'b0)) u_adm_wra (
    .clk, .rst_n,
    .rd_cmd_valid(wra_rcmd_v), .rd_cmd_ready(wra_rcmd_r),
    .rd_cmd_addr(cmd[GRP_CP].addr), .rd_cmd_len(cmd[GRP_CP].len),
    .o_valid(wra_o_valid), .o_data(wra_o_data), .o_idx(wra_o_idx), .rd_done(wra_rdone),
    .mr_req_valid(wra_rd_valid), .mr_req_ready(wra_rd_ready), .mr_req_addr(wra_rd_addr),
    .mr_rsp_valid(wra_rsp_valid), .mr_rsp_data(wra_rsp_data),
    .wr_cmd_valid(1'b0), .wr_cmd_ready(wra_wcmd_r),
    .wr_cmd_addr('0), .wr_cmd_len('0),
    .src_re(wra_src_re), .src_idx(wra_src_idx), .src_data('0), .wr_done(wra_wdone),
    .mw_valid(wra_mw_valid), .mw_ready(1'b1), .mw_addr(wra_mw_addr), .mw_data(wra_mw_data)
  );

  // ===================== buffers =====================
  logic           in_p_ready, in_p_bank, in_p_done, in_we;
  logic [AAW-1:0] in_waddr;
  logic           in_c_ready, in_c_bank, in_c_done, in_re;
  logic [AAW-1:0] in_raddr;
  logic [DATA_W-1:0] in_rdata;

  pu_pingpong #(.W(DATA_W), .DEPTH(ACT_DEPTH)) u_in (
    .clk, .rst_n,
    .p_ready(in_p_ready), .p_bank(in_p_bank), .p_done(in_p_done),
    .we(in_we), .waddr(in_waddr), .wdata(io_o_data),
    .c_ready(in_c_ready), .c_bank(in_c_bank), .c_done(in_c_done),
    .re(in_re), .raddr(in_raddr), .rdata(in_rdata), .full(in_full)
  );

  logic           out_p_ready, out_p_bank, out_p_done, out_we;
  logic [OAW-1:0] out_waddr;
  logic [LW-1:0]  out_wdata;
  logic           out_c_ready, out_c_bank, out_c_done, out_re;
  logic [OAW-1:0] out_raddr;
  logic [LW-1:0]  out_rdata;

  pu_pingpong #(.W(LW), .DEPTH(OUT_LINES)) u_out (
    .clk, .rst_n,
    .p_ready(out_p_ready), .p_bank(out_p_bank), .p_done(out_p_done),
    .we(out_we), .waddr(out_waddr), .wdata(out_wdata),
    .c_ready(out_c_ready), .c_bank(out_c_bank), .c_done(out_c_done),
    .re(out_re), .raddr(out_raddr), .rdata(out_rdata), .full(out_full)
  );

  logic           w_we, w_re;
  logic [WAW-1:0] w_waddr, w_raddr;
  logic [WPW-1:0] w_wpart;
  logic [WW-1:0]  w_rdata;

  pu_weight_mem #(.WW(WW), .DEPTH(WMEM_DEPTH), .PW(DATA_W)) u_wmem (
    .clk, .we(w_we), .waddr(w_waddr), .wpart(w_wpart), .wdata(wra_o_data),
    .re(w_re), .raddr(w_raddr), .rdata(w_rdata)
  );

  // residual buffer: R-byte lines written 256 bits at a time
  logic [LW-1:0]  res_mem [RES_LINES];
  logic           res_we, res_re;
  logic [RAW-1:0] res_wline, res_raddr;
  logic [LPW-1:0] res_wpart;
  logic [LW-1:0]  res_rdata;
  always_ff @(posedge clk) begin
    if (res_we) res_mem[res_wline][res_wpart*DATA_W +: DATA_W] <= wra_o_data;
    if (res_re) res_rdata <= res_mem[res_raddr];
  end

  // ===================== Load channel =====================
  logic           ld_busy, ld_last;
  logic [LEN_W-1:0] ld_len_q;      // burst length, needed when the burst completes
  logic [AAW-1:0] ld_base;
  assign cmd_ready[GRP_LD] = io_rcmd_r && !ld_busy && (!cmd[GRP_LD].first || in_p_ready);
  assign io_rcmd_v         = cmd_valid[GRP_LD] && cmd_ready[GRP_LD];
  assign in_we             = io_o_valid;
  assign in_waddr          = ld_base + AAW'(io_o_idx);
  assign in_p_done         = io_rdone && ld_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_busy <= 1'b0; ld_last <= 1'b0; ld_base <= '0; cmd_done[GRP_LD] <= 1'b0;
    end else begin
      cmd_done[GRP_LD] <= io_rdone;
      if (io_rcmd_v) begin
        ld_busy <= 1'b1;
        ld_last <= cmd[GRP_LD].last;
        if (cmd[GRP_LD].first) ld_base <= '0;
      end
      if (io_rdone) begin
        ld_busy <= 1'b0;
        ld_base <= ld_base + AAW'(ld_len_q);
      end
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ld_len_q <= '0;
    else if (io_rcmd_v) ld_len_q <= cmd[GRP_LD].len;
  end

  // ===================== Store channel =====================
  logic               st_busy, st_last;
  logic [OAW+LPW-1:0] st_base;     // word offset into the output bank
  logic [OAW+LPW-1:0] st_word;
  logic [LEN_W-1:0]   st_len_q;
  logic [LPW-1:0]     st_part_q;
  assign cmd_ready[GRP_ST] = io_wcmd_r && !st_busy && (!cmd[GRP_ST].first || out_c_ready);
  assign io_wcmd_v         = cmd_valid[GRP_ST] && cmd_ready[GRP_ST];
  assign st_word           = st_base + (OAW+LPW)'(st_src_idx);
  assign out_re            = st_src_re;
  assign out_raddr         = (LPARTS > 1) ? OAW'(st_word >> $clog2(LPARTS)) : OAW'(st_word);
  assign st_src_data       = out_rdata[st_part_q*DATA_W +: DATA_W];
  assign out_c_done        = io_wdone && st_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_busy <= 1'b0; st_last <= 1'b0; st_base <= '0; st_part_q <= '0;
      st_len_q <= '0; cmd_done[GRP_ST] <= 1'b0;
    end else begin
      cmd_done[GRP_ST] <= io_wdone;
      if (st_src_re) st_part_q <= (LPARTS > 1) ? LPW'(st_word) : '0;
      if (io_wcmd_v) begin
        st_busy  <= 1'b1;
        st_last  <= cmd[GRP_ST].last;
        st_len_q <= cmd[GRP_ST].len;
        if (cmd[GRP_ST].first) st_base <= '0;
      end
      if (io_wdone) begin
        st_busy <= 1'b0;
        st_base <= st_base + (OAW+LPW)'(st_len_q);
      end
    end
  end

  // ===================== Compute channel =====================
  typedef enum logic [2:0] {C_IDLE, C_LOAD, C_BIAS0, C_BIAS1, C_RUN, C_DRAIN, C_DONE} cst_e;
  cst_e           c_st;
  pu_op_e         c_op;
  gemm_t          g;
  logic [WAW+WPW-1:0] cl_word;    // weight/residual word counter across bursts
  logic [WAW-1:0]     cl_wbase;
  logic [11:0]    g_p, g_k, g_out;
  logic [31:0]    g_boff;         // byte offset into the input bank
  logic           s1_en, s1_first, s1_last;
  logic [SLW-1:0] s1_slice;
  logic [R*32-1:0] bias_q;
  logic           sa_ov;
  logic [R*32-1:0] sa_acc;
  logic           vu_ov;
  logic [RAW-1:0] res_col;

  wire  cp_take = cmd_valid[GRP_CP] && cmd_ready[GRP_CP];
  always_comb begin
    cmd_ready[GRP_CP] = 1'b0;
    if (c_st == C_IDLE) begin
      unique case (cmd[GRP_CP].op)
        PC_GEMM: cmd_ready[GRP_CP] = in_c_ready && out_p_ready;
        default: cmd_ready[GRP_CP] = wra_rcmd_r;
      endcase
    end
  end
  assign wra_rcmd_v = cp_take && (cmd[GRP_CP].op != PC_GEMM);
  assign gemm_busy  = (c_st inside {C_BIAS0, C_BIAS1, C_RUN, C_DRAIN});

  // weight / residual fills
  assign w_we      = wra_o_valid && (c_op == PC_LD_W);
  assign w_waddr   = cl_wbase + WAW'(cl_word >> WPW);
  assign w_wpart   = WPW'(cl_word);
  assign res_we    = wra_o_valid && (c_op == PC_LD_RES);
  assign res_wline = (LPARTS > 1) ? RAW'(cl_word >> $clog2(LPARTS)) : RAW'(cl_word);
  assign res_wpart = (LPARTS > 1) ? LPW'(cl_word) : '0;

  // GEMM reads
  logic run_step;
  assign run_step  = (c_st == C_RUN);
  assign in_re     = run_step;
  assign in_raddr  = AAW'(g_boff >> $clog2(DATA_W / 8));
  always_comb begin
    w_re    = 1'b0;
    w_raddr = WAW'(g.uram_base);
    if (c_st == C_BIAS0) begin
      w_re = 1'b1;
    end else if (run_step) begin
      w_re    = 1'b1;
      w_raddr = WAW'(g.uram_base) + WAW'(g.bias_en) + WAW'(g_k);
    end
  end
  assign res_re    = s1_en && s1_last;
  assign res_raddr = res_col;

  pu_systolic_array #(.R(R), .C(C)) u_sa (
    .clk, .rst_n, .en(s1_en), .first(s1_first), .last(s1_last),
    .w(w_rdata), .a(in_rdata[s1_slice*C*8 +: C*8]),
    .bias_en(g.bias_en), .bias(bias_q),
    .out_valid(sa_ov), .acc(sa_acc)
  );

  pu_vector_unit #(.R(R)) u_vu (
    .clk, .rst_n, .in_valid(sa_ov), .acc(sa_acc), .res(res_rdata),
    .shift(g.shift), .round_en(g.round_en), .add_en(g.add_en), .relu(g.relu),
    .out_valid(vu_ov), .y(out_wdata)
  );
  assign out_we    = vu_ov;
  assign out_waddr = OAW'(g_out);
  assign out_p_done = (c_st == C_DONE);
  assign in_c_done  = (c_st == C_DONE) && g.release_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_st <= C_IDLE; c_op <= PC_GEMM; g <= '0;
      cl_word <= '0; cl_wbase <= '0;
      g_p <= '0; g_k <= '0; g_out <= '0; g_boff <= '0;
      s1_en <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_slice <= '0;
      bias_q <= '0; res_col <= '0;
      cmd_done[GRP_CP] <= 1'b0;
    end else begin
      cmd_done[GRP_CP] <= 1'b0;
      s1_en <= 1'b0;
      if (vu_ov) g_out <= g_out + 1'b1;
      if (s1_en && s1_last) res_col <= res_col + 1'b1;
      unique case (c_st)
        C_IDLE: if (cp_take) begin
          c_op <= cmd[GRP_CP].op;
          if (cmd[GRP_CP].op == PC_GEMM) begin
            g       <= cmd[GRP_CP].gemm;
            g_p     <= '0;
            g_k     <= '0;
            g_out   <= '0;
            g_boff  <= '0;
            res_col <= '0;
            c_st    <= C_BIAS0;
          end else begin
            if (cmd[GRP_CP].first) begin
              cl_word  <= '0;
              cl_wbase <= WAW'(cmd[GRP_CP].uram_addr);
            end
            c_st <= C_LOAD;
          end
        end
        C_LOAD: begin
          if (wra_o_valid) cl_word <= cl_word + 1'b1;
          if (wra_rdone) begin
            cmd_done[GRP_CP] <= 1'b1;
            c_st <= C_IDLE;
          end
        end
        C_BIAS0: c_st <= C_BIAS1;
        C_BIAS1: begin
          bias_q <= w_rdata[R*32-1:0];
          c_st   <= C_RUN;
        end
        C_RUN: begin
          s1_en    <= 1'b1;
          s1_first <= (g_k == 0);
          s1_last  <= (g_k == g.k_chunks - 1'b1);
          s1_slice <= SLW'(g_boff[$clog2(DATA_W / 8)-1:0] >> $clog2(C));
          g_boff   <= g_boff + C;
          if (g_k == g.k_chunks - 1'b1) begin
            g_k <= '0;
            g_p <= g_p + 1'b1;
            if (g_p == g.ncols - 1'b1) c_st <= C_DRAIN;
          end else begin
            g_k <= g_k + 1'b1;
          end
        end
        C_DRAIN: if (vu_ov && g_out == g.ncols - 1'b1) c_st <= C_DONE;
        C_DONE: begin
          cmd_done[GRP_CP] <= 1'b1;
          c_st <= C_IDLE;
        end
        default: c_st <= C_IDLE;
      endcase
    end
  end
endmodule
