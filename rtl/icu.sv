// icu: the Instruction Controller Unit of one PU.
//
// Three independent groups (Load, Compute, Store), each with its own dual-port
// instruction BRAM and decoder, so that activation loads, GEMMs and stores of
// one PU run concurrently and meet only through the PU's buffers. Two
// synchronization tables hold the state of inter-PU flow control: the REQ table
// (polled by the Load group's WAIT_REQ) and the ACK table (polled by the Store
// group's WAIT_ACK), both addressed by {BID, SRC_PID}. Tokens arriving from the
// local ISU (ISULink, M0) set an entry of the table their REQ/ACK bit selects;
// SEND tokens of the Load and Store groups leave through a mux and FIFO to the
// local ISU (S0), except tokens addressed to this PU itself: these skip the
// switch fabric and set the local table straight from the FIFO (a token from
// the ISU has priority in the same cycle). Configuration beats of the CfgLink addressed to this PU are
// routed by their group field into the matching instruction BRAM.
// start launches all three groups at address 0; stop ends them at their next
// instruction boundary (or out of a WAIT). done rises when all three groups
// have finished their NR rounds.
// Which table each group polls follows the instruction lists of the ISA (LD:
// WAIT_REQ/SEND_ACK, ST: WAIT_ACK/SEND_REQ).
module icu
  import icu_pkg::*;
#(
  parameter logic [PID_W-1:0] PID = '0
) (
  input  logic      clk,
  input  logic      rst_n,
  // configuration link (beats already selected for this PU)
  input  logic      cfg_valid,
  output logic      cfg_ready,
  input  cfg_beat_t cfg_beat,
  // host control
  input  logic      start,
  input  logic      stop,
  output logic      busy,
  output logic      done,
  // ISULink
  input  logic      tin_valid,
  output logic      tin_ready,
  input  token_t    tin,
  output logic      tout_valid,
  input  logic      tout_ready,
  output token_t    tout,
  // PU commands, one channel per group (index icu_group_e)
  output logic      cmd_valid [3],
  input  logic      cmd_ready [3],
  output pu_cmd_t   cmd       [3],
  input  logic      cmd_done  [3],
  // monitoring
  output logic [2:0]  grp_busy,
  output logic [15:0] grp_rounds [3],
  output logic        req_wait_stall,
  output logic        ack_wait_stall
);
  logic               ram_en    [3];
  logic               ram_we    [3];
  logic [IADDR_W-1:0] ram_addr  [3];
  logic [INSTR_W-1:0] ram_wdata [3];
  logic [INSTR_W-1:0] ram_rdata [3];
  logic               tv        [3];
  logic               tr        [3];
  token_t             tk        [3];
  logic [BID_W-1:0]   p_bid     [3];
  logic [PID_W-1:0]   p_pid     [3];
  logic               p_hit     [3];
  logic               p_clr     [3];
  logic [2:0]         g_done;
  logic               stall     [3];

  assign cfg_ready = 1'b1;
  assign tin_ready = 1'b1;

  // same-PU delivery: a FIFO token for this PID sets the local table directly
  logic   f_valid, f_ready, self_tok, set_valid;
  token_t f_tok, set_tok;
  assign self_tok   = f_tok.tdest == PID;
  assign tout_valid = f_valid && !self_tok;
  assign tout       = f_tok;
  assign f_ready    = self_tok ? !tin_valid : tout_ready;
  assign set_valid  = tin_valid || (f_valid && self_tok);
  assign set_tok    = tin_valid ? tin : f_tok;

  for (genvar g = 0; g < 3; g++) begin : g_grp
    icu_instr_ram u_ram (
      .clk,
      .a_we   (cfg_valid && cfg_beat.group == icu_group_e'(g)),
      .a_addr (cfg_beat.addr),
      .a_wdata(cfg_beat.data),
      .b_en   (ram_en[g]), .b_we(ram_we[g]), .b_addr(ram_addr[g]),
      .b_wdata(ram_wdata[g]), .b_rdata(ram_rdata[g])
    );
    icu_group_ctrl #(.GROUP(icu_group_e'(g)), .PID(PID)) u_dec (
      .clk, .rst_n, .start, .stop,
      .busy(grp_busy[g]), .done(g_done[g]), .rounds(grp_rounds[g]),
      .ram_en(ram_en[g]), .ram_we(ram_we[g]), .ram_addr(ram_addr[g]),
      .ram_wdata(ram_wdata[g]), .ram_rdata(ram_rdata[g]),
      .tok_valid(tv[g]), .tok_ready(tr[g]), .tok(tk[g]),
      .poll_bid(p_bid[g]), .poll_pid(p_pid[g]), .poll_hit(p_hit[g]), .poll_clr(p_clr[g]),
      .cmd_valid(cmd_valid[g]), .cmd_ready(cmd_ready[g]), .cmd(cmd[g]), .cmd_done(cmd_done[g]),
      .wait_stall(stall[g])
    );
  end

  assign busy = |grp_busy;
  assign done = &g_done;
  assign req_wait_stall = stall[GRP_LD];
  assign ack_wait_stall = stall[GRP_ST];

  // REQ table: set by REQ tokens, polled by the Load group
  icu_sync_table u_req (
    .clk, .rst_n,
    .set_en (set_valid && !set_tok.tdata.is_ack),
    .set_bid(set_tok.tdata.bid), .set_pid(set_tok.tdata.src_pid),
    .poll_bid(p_bid[GRP_LD]), .poll_pid(p_pid[GRP_LD]),
    .poll_hit(p_hit[GRP_LD]), .poll_clr(p_clr[GRP_LD])
  );
  // ACK table: set by ACK tokens, polled by the Store group
  icu_sync_table u_ack (
    .clk, .rst_n,
    .set_en (set_valid && set_tok.tdata.is_ack),
    .set_bid(set_tok.tdata.bid), .set_pid(set_tok.tdata.src_pid),
    .poll_bid(p_bid[GRP_ST]), .poll_pid(p_pid[GRP_ST]),
    .poll_hit(p_hit[GRP_ST]), .poll_clr(p_clr[GRP_ST])
  );
  assign p_hit[GRP_CP] = 1'b0;   // the Compute group has no Sync instructions
  assign tr[GRP_CP]    = 1'b0;

  icu_token_out u_tout (
    .clk, .rst_n,
    .ld_valid(tv[GRP_LD]), .ld_ready(tr[GRP_LD]), .ld_tok(tk[GRP_LD]),
    .st_valid(tv[GRP_ST]), .st_ready(tr[GRP_ST]), .st_tok(tk[GRP_ST]),
    .m_valid(f_valid), .m_ready(f_ready), .m_tok(f_tok)
  );
endmodule
