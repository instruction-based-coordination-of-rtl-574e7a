// accel_top: the multi-PU accelerator with instruction-based coordination.
//
// NUM_PU processing units, each driven by its own ICU, sit in a row across
// two super logic regions (PIDs below SLR_SPLIT in SLR0, the rest in SLR1).
// PU_IS_2X marks the 64x8 units (PU2x); the others are 64x4 (PU1x). The
// default is the paper's 5 + 5 placement: PIDs 3, 4, 5, 6, 9 are PU2x and
// 0, 1, 2, 7, 8 are PU1x.
//
// Coordination: every PU has an ISU. The ISUs form a chain in PID order
// (M2 of node i feeds S2 of node i+1, M1 of node i+1 feeds S1 of node i);
// between PIDs SLR_SPLIT-1 and SLR_SPLIT the two directions pass through
// SLR_XING_STAGES crossing registers. Each ICU injects its SEND tokens at S0
// of its ISU and receives tokens for it from M0.
//
// Configuration: the host's AXI4-Lite port reaches cfg_axil_bridge, whose
// stream runs through one cfg_switch per PU in PID order; each switch hands
// the beats for its PID to its ICU. The bridge's CTRL register starts or stops
// all ICUs at once; DONE and BUSY read back their state.
//
// Memory: each PU has three HBM ports, the read and write sides of its
// Inp/Out data mover and the read side of its W/RA data mover, brought out as
// arrays indexed by PID (word addresses of 256 bits). The HBM itself, the
// PCIe host link and the clocking are outside this module; everything runs on
// one clock.
//
// Each PU slot also wires up the status outputs of its ICU and PU (group busy
// flags, round counters, REQ/ACK wait stalls, buffer-full flags, GEMM busy).
// They drive nothing here and are kept as named nets so that a testbench can
// observe them per PID; a lint tool reports them as unused.
module accel_top
  import icu_pkg::*;
#(
  parameter int unsigned       NUM_PU          = 10,
  parameter logic [NUM_PU-1:0] PU_IS_2X        = NUM_PU'(10'b10_0111_1000),
  parameter int unsigned       SLR_SPLIT       = 5,
  parameter int unsigned       SLR_XING_STAGES = 13,
  parameter int unsigned       R               = 64,
  parameter int unsigned       ACT_DEPTH       = 1024,
  parameter int unsigned       OUT_LINES       = 512,
  parameter int unsigned       RES_LINES       = 512
) (
  input  logic               clk,
  input  logic               rst_n,
  // host control (AXI4-Lite)
  input  logic               s_awvalid,
  output logic               s_awready,
  input  logic [7:0]         s_awaddr,
  input  logic               s_wvalid,
  output logic               s_wready,
  input  logic [31:0]        s_wdata,
  output logic               s_bvalid,
  input  logic               s_bready,
  output logic [1:0]         s_bresp,
  input  logic               s_arvalid,
  output logic               s_arready,
  input  logic [7:0]         s_araddr,
  output logic               s_rvalid,
  input  logic               s_rready,
  output logic [31:0]        s_rdata,
  output logic [1:0]         s_rresp,
  // HBM ports, one set per PU
  output logic               io_rd_valid  [NUM_PU],
  input  logic               io_rd_ready  [NUM_PU],
  output logic [HADDR_W-1:0] io_rd_addr   [NUM_PU],
  input  logic               io_rsp_valid [NUM_PU],
  input  logic [DATA_W-1:0]  io_rsp_data  [NUM_PU],
  output logic               io_wr_valid  [NUM_PU],
  input  logic               io_wr_ready  [NUM_PU],
  output logic [HADDR_W-1:0] io_wr_addr   [NUM_PU],
  output logic [DATA_W-1:0]  io_wr_data   [NUM_PU],
  output logic               wra_rd_valid [NUM_PU],
  input  logic               wra_rd_ready [NUM_PU],
  output logic [HADDR_W-1:0] wra_rd_addr  [NUM_PU],
  input  logic               wra_rsp_valid[NUM_PU],
  input  logic [DATA_W-1:0]  wra_rsp_data [NUM_PU]
);
  // ---------------- configuration link ----------------
  logic              start, stop;
  logic [NUM_PU-1:0] pu_done, pu_busy;
  logic              cf_valid [NUM_PU+1];
  logic              cf_ready [NUM_PU+1];
  cfg_beat_t         cf_beat  [NUM_PU+1];
  logic              lc_valid [NUM_PU];
  logic              lc_ready [NUM_PU];
  cfg_beat_t         lc_beat  [NUM_PU];

  cfg_axil_bridge #(.NUM_PU(NUM_PU)) u_bridge (
    .clk, .rst_n,
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata,
    .s_bvalid, .s_bready, .s_bresp, .s_arvalid, .s_arready, .s_araddr,
    .s_rvalid, .s_rready, .s_rdata, .s_rresp,
    .m_valid(cf_valid[0]), .m_ready(cf_ready[0]), .m_beat(cf_beat[0]),
    .start, .stop, .pu_done, .pu_busy
  );
  assign cf_ready[NUM_PU] = 1'b1;   // beats for PIDs that do not exist are dropped

  // ---------------- ISU chain wiring ----------------
  // up[i]: from node i (M2) toward node i+1 (S2); dn[i]: from node i+1 (M1)
  // toward node i (S1)
  logic   up_v  [NUM_PU], up_r  [NUM_PU];
  token_t up_t  [NUM_PU];
  logic   upx_v [NUM_PU], upx_r [NUM_PU];
  token_t upx_t [NUM_PU];
  logic   dn_v  [NUM_PU], dn_r  [NUM_PU];
  token_t dn_t  [NUM_PU];
  logic   dnx_v [NUM_PU], dnx_r [NUM_PU];
  token_t dnx_t [NUM_PU];

  for (genvar i = 0; i < NUM_PU; i++) begin : g_pu
    localparam int unsigned C_I = PU_IS_2X[i] ? 8 : 4;

    logic    s_v [3], s_r [3], m_v [3], m_r [3];
    token_t  s_t [3], m_t [3];
    logic    c_valid [3], c_ready [3], c_done [3];
    pu_cmd_t c_cmd [3];
    logic [2:0]  grp_busy;
    logic [15:0] grp_rounds [3];
    logic        req_stall, ack_stall;
    logic [1:0]  in_full, out_full;
    logic        gemm_busy;

    cfg_switch #(.PID(PID_W'(i))) u_cfg (
      .clk, .rst_n,
      .s_valid(cf_valid[i]), .s_ready(cf_ready[i]), .s_beat(cf_beat[i]),
      .l_valid(lc_valid[i]), .l_ready(lc_ready[i]), .l_beat(lc_beat[i]),
      .n_valid(cf_valid[i+1]), .n_ready(cf_ready[i+1]), .n_beat(cf_beat[i+1])
    );

    icu #(.PID(PID_W'(i))) u_icu (
      .clk, .rst_n,
      .cfg_valid(lc_valid[i]), .cfg_ready(lc_ready[i]), .cfg_beat(lc_beat[i]),
      .start, .stop, .busy(pu_busy[i]), .done(pu_done[i]),
      .tin_valid(m_v[0]), .tin_ready(m_r[0]), .tin(m_t[0]),
      .tout_valid(s_v[0]), .tout_ready(s_r[0]), .tout(s_t[0]),
      .cmd_valid(c_valid), .cmd_ready(c_ready), .cmd(c_cmd), .cmd_done(c_done),
      .grp_busy, .grp_rounds, .req_wait_stall(req_stall), .ack_wait_stall(ack_stall)
    );

    isu #(.PID(PID_W'(i))) u_isu (
      .clk, .rst_n,
      .s_valid(s_v), .s_ready(s_r), .s_tok(s_t),
      .m_valid(m_v), .m_ready(m_r), .m_tok(m_t)
    );

    pu #(.R(R), .C(C_I), .ACT_DEPTH(ACT_DEPTH), .OUT_LINES(OUT_LINES),
         .RES_LINES(RES_LINES)) u_pu (
      .clk, .rst_n,
      .cmd_valid(c_valid), .cmd_ready(c_ready), .cmd(c_cmd), .cmd_done(c_done),
      .io_rd_valid(io_rd_valid[i]), .io_rd_ready(io_rd_ready[i]), .io_rd_addr(io_rd_addr[i]),
      .io_rsp_valid(io_rsp_valid[i]), .io_rsp_data(io_rsp_data[i]),
      .io_wr_valid(io_wr_valid[i]), .io_wr_ready(io_wr_ready[i]),
      .io_wr_addr(io_wr_addr[i]), .io_wr_data(io_wr_data[i]),
      .wra_rd_valid(wra_rd_valid[i]), .wra_rd_ready(wra_rd_ready[i]),
      .wra_rd_addr(wra_rd_addr[i]),
      .wra_rsp_valid(wra_rsp_valid[i]), .wra_rsp_data(wra_rsp_data[i]),
      .in_full, .out_full, .gemm_busy
    );

    // M2 -> up link; M1 -> down link
    assign up_v[i] = m_v[2];
    assign up_t[i] = m_t[2];
    assign m_r[2]  = up_r[i];
    if (i > 0) begin : g_m1
      assign dn_v[i-1] = m_v[1];
      assign dn_t[i-1] = m_t[1];
      assign m_r[1]    = dn_r[i-1];
    end else begin : g_m1_end
      assign m_r[1] = 1'b1;           // nothing lies below PID 0
    end
    // S2 <- up link of node i-1; S1 <- down link from node i+1
    if (i > 0) begin : g_s2
      assign s_v[2]       = upx_v[i-1];
      assign s_t[2]       = upx_t[i-1];
      assign upx_r[i-1]   = s_r[2];
    end else begin : g_s2_end
      assign s_v[2] = 1'b0;
      assign s_t[2] = '0;
    end
    if (i < NUM_PU - 1) begin : g_s1
      assign s_v[1]  = dnx_v[i];
      assign s_t[1]  = dnx_t[i];
      assign dnx_r[i] = s_r[1];
    end else begin : g_s1_end
      assign s_v[1] = 1'b0;
      assign s_t[1] = '0;
    end
  end

  // links between neighbouring ISUs: SLR crossing registers at the boundary
  for (genvar i = 0; i < NUM_PU - 1; i++) begin : g_link
    localparam int unsigned ST = (i + 1 == SLR_SPLIT) ? SLR_XING_STAGES : 0;
    axis_pipe #(.W(TOKEN_W), .STAGES(ST)) u_up (
      .clk, .rst_n,
      .s_valid(up_v[i]), .s_ready(up_r[i]), .s_data(up_t[i]),
      .m_valid(upx_v[i]), .m_ready(upx_r[i]), .m_data(upx_t[i])
    );
    axis_pipe #(.W(TOKEN_W), .STAGES(ST)) u_dn (
      .clk, .rst_n,
      .s_valid(dn_v[i]), .s_ready(dn_r[i]), .s_data(dn_t[i]),
      .m_valid(dnx_v[i]), .m_ready(dnx_r[i]), .m_data(dnx_t[i])
    );
  end
  assign up_r[NUM_PU-1] = 1'b1;       // nothing lies above the last PID
endmodule
