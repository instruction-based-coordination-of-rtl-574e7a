// icu_group_ctrl: instruction decoder and sequencer of one ICU group
// (Load, Compute or Store; GROUP selects which).
//
// It runs the group's program out of its instruction BRAM (port B here):
//   * ProgCtrl  PRG_PRM    latches NR and ICU_BA. When an instruction with
//               PRG_END completes, the round counter advances and the pointer
//               jumps to ICU_BA; NR = 0 repeats until stop/reset, otherwise the
//               group halts after NR rounds and raises `done`.
//   * Config    *_PRM      latches the transfer pattern or URAM address.
//   * DataMove  *_ADM      hands (CUR_BA, LEN) and the latched pattern to the
//               address generator and issues each burst to the PU, waiting
//               for its completion. The instruction and its address are
//               latched for a following AddrCyc.
//   * AddrCyc   CYCLE_ADDR writes back the predecessor's CUR_BA and its own IC
//               (IC = 0: IC, CUR_BA = NC, BA; else IC-1, CUR_BA + AOFFS).
//   * Sync      SEND_*     pushes a token {BID, own PID, REQ/ACK} to DST_PID
//               into the ISULink FIFO and goes on; WAIT_* polls the group's
//               synchronization table at {BID, SRC_PID} until the entry is set,
//               then clears it. Both write back BID/IC (NC = 0: bypass,
//               IC = 0: BID, IC = BASE_BID, NC, else BID+1, IC-1).
//   * Compute   GEMM       issues the GEMM to the PU and waits for completion.
// Instructions that do not belong to the group (Table I(c) of the ISA) are
// skipped. The ISA, the write-back rules and the round control follow the
// paper; the state machine, the one-instruction-at-a-time execution and the
// handshakes to the PU are this design's.
//
// Timing: a fetch takes two cycles (address, data); Config and ProgCtrl take
// three in all, an AddrCyc four (two write-backs). Each burst is handed over
// with cmd_valid/cmd_ready and completes on a one-cycle cmd_done pulse.
// Every flip-flop resets asynchronously; the only synchronous use of rst_n is
// the `disable iff` of the assertions, which a lint tool may still report as
// a reset used both ways.
module icu_group_ctrl
  import icu_pkg::*;
#(
  parameter icu_group_e       GROUP = GRP_LD,
  parameter logic [PID_W-1:0] PID   = '0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               stop,
  output logic               busy,
  output logic               done,
  output logic [15:0]        rounds,
  // instruction BRAM, port B
  output logic               ram_en,
  output logic               ram_we,
  output logic [IADDR_W-1:0] ram_addr,
  output logic [INSTR_W-1:0] ram_wdata,
  input  logic [INSTR_W-1:0] ram_rdata,
  // outgoing control tokens
  output logic               tok_valid,
  input  logic               tok_ready,
  output token_t             tok,
  // synchronization table poll
  output logic [BID_W-1:0]   poll_bid,
  output logic [PID_W-1:0]   poll_pid,
  input  logic               poll_hit,
  output logic               poll_clr,
  // PU command
  output logic               cmd_valid,
  input  logic               cmd_ready,
  output pu_cmd_t            cmd,
  input  logic               cmd_done,
  // activity, for monitoring
  output logic               wait_stall
);
  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_DEC, S_ADM_ISSUE, S_ADM_WAIT, S_CMD_ISSUE, S_CMD_WAIT,
    S_WB_PRED, S_WB_CUR, S_SEND, S_WAIT, S_NEXT
  } state_e;

  state_e             st;
  instr_t             ir, pred_ir, rd_ir;
  logic [IADDR_W-1:0] pc, pred_pc, loop_ba;
  logic [15:0]        nr;
  pat_t               pat_r;
  logic [UADDR_W-1:0] uram_r;
  pu_op_e             op_r;
  logic               stop_req;
  logic               last_r;

  // address generator
  logic               ag_start, ag_valid, ag_ready, ag_first, ag_last;
  logic [HADDR_W-1:0] ag_addr, ag_base;
  logic [LEN_W-1:0]   ag_len_o, ag_len;
  pat_t               ag_pat;

  icu_addr_gen u_ag (
    .clk, .rst_n, .start(ag_start), .base(ag_base), .len(ag_len), .pat(ag_pat),
    .b_valid(ag_valid), .b_ready(ag_ready), .b_addr(ag_addr), .b_len(ag_len_o),
    .b_first(ag_first), .b_last(ag_last)
  );

  prg_prm_t  rd_prg;
  uram_prm_t rd_uram;
  assign rd_ir   = instr_t'(ram_rdata);
  assign rd_prg  = prg_prm_t'(rd_ir.payload);
  assign rd_uram = uram_prm_t'(rd_ir.payload);

  // ---- which opcodes this group executes, and what they ask of the PU -------
  logic   legal;
  logic   is_adm, is_pat;
  pu_op_e dec_op;
  always_comb begin
    legal  = 1'b0;
    is_adm = 1'b0;
    is_pat = 1'b0;
    dec_op = PC_LD_ACT;
    unique case (rd_ir.opcd)
      OP_PRG_PRM, OP_CYCLE_ADDR: legal = 1'b1;
      OP_LINEAR_ADM: begin
        legal = (GROUP != GRP_CP); is_adm = 1'b1;
        dec_op = (GROUP == GRP_ST) ? PC_ST_OUT : PC_LD_ACT;
      end
      OP_IM2COL_PRM, OP_IM2COL_ADM: begin
        legal = (GROUP == GRP_LD); is_adm = (rd_ir.opcd == OP_IM2COL_ADM); is_pat = 1'b1;
        dec_op = PC_LD_ACT;
      end
      OP_STRIDE_PRM, OP_STRIDE_ADM: begin
        legal = (GROUP != GRP_CP); is_adm = (rd_ir.opcd == OP_STRIDE_ADM); is_pat = 1'b1;
        dec_op = (GROUP == GRP_ST) ? PC_ST_OUT : PC_LD_ACT;
      end
      OP_URAM_PRM: legal = (GROUP == GRP_CP);
      OP_WEIGHTS_ADM: begin
        legal = (GROUP == GRP_CP); is_adm = 1'b1; dec_op = PC_LD_W;
      end
      OP_RES_ADD_STRIDE_PRM, OP_RES_ADD_STRIDE_ADM: begin
        legal = (GROUP == GRP_CP); is_adm = (rd_ir.opcd == OP_RES_ADD_STRIDE_ADM);
        is_pat = 1'b1; dec_op = PC_LD_RES;
      end
      OP_RES_ADD_ADM: begin
        legal = (GROUP == GRP_CP); is_adm = 1'b1; dec_op = PC_LD_RES;
      end
      OP_SEND_REQ, OP_WAIT_ACK: legal = (GROUP == GRP_ST);
      OP_SEND_ACK, OP_WAIT_REQ: legal = (GROUP == GRP_LD);
      OP_GEMM: begin legal = (GROUP == GRP_CP); dec_op = PC_GEMM; end
      default: legal = 1'b0;
    endcase
  end

  // ---- fields of the current instruction ------------------------------------
  sync_t sy, sy_next;
  cyc_t  cy;
  adm_t  pred_adm, pred_adm_new;
  assign sy       = sync_t'(ir.payload);
  assign sy_next  = sync_update(sy);
  assign cy       = cyc_t'(ir.payload);
  assign pred_adm = adm_t'(pred_ir.payload);
  cyc_t  cy_new;
  always_comb begin
    cy_new              = cy;
    cy_new.ic           = cyc_next_ic(cy);
    pred_adm_new        = pred_adm;
    pred_adm_new.cur_ba = cyc_next_ba(cy, pred_adm.cur_ba);
  end

  // address generator inputs come straight from the instruction being decoded
  always_comb begin
    adm_t a;
    a        = adm_t'(rd_ir.payload);
    ag_base  = a.cur_ba;
    ag_len   = a.len;
    ag_pat   = pat_r;
    if (!(rd_ir.opcd inside {OP_IM2COL_ADM, OP_STRIDE_ADM, OP_RES_ADD_STRIDE_ADM})) begin
      ag_pat = '{outer_stride: '0, n_outer: 10'd1, inner_stride: '0, n_inner: 8'd1};
    end
  end
  assign ag_start = (st == S_DEC) && legal && is_adm;
  assign ag_ready = (st == S_ADM_ISSUE) && cmd_ready;

  // ---- outputs --------------------------------------------------------------
  always_comb begin
    ram_en    = 1'b0;
    ram_we    = 1'b0;
    ram_addr  = pc;
    ram_wdata = ir;
    tok_valid = 1'b0;
    tok.tdest         = sy.pid;
    tok.tdata.bid     = sy.bid;
    tok.tdata.src_pid = PID;
    tok.tdata.is_ack  = (ir.opcd == OP_SEND_ACK);
    poll_bid  = sy.bid;
    poll_pid  = sy.pid;
    poll_clr  = 1'b0;
    cmd_valid = 1'b0;
    cmd           = '0;
    cmd.op        = op_r;
    cmd.addr      = ag_addr;
    cmd.len       = ag_len_o;
    cmd.first     = ag_first;
    cmd.last      = ag_last;
    cmd.uram_addr = uram_r;
    cmd.gemm      = gemm_t'(ir.payload);
    wait_stall    = 1'b0;
    unique case (st)
      S_FETCH: ram_en = 1'b1;
      S_ADM_ISSUE: cmd_valid = ag_valid;
      S_CMD_ISSUE: cmd_valid = 1'b1;
      S_WB_PRED: begin
        ram_en    = 1'b1;
        ram_we    = 1'b1;
        ram_addr  = pred_pc;
        ram_wdata = {pred_ir.opcd, pred_ir.prg_end, PAYLD_W'(pred_adm_new)};
      end
      S_WB_CUR: begin
        ram_en    = 1'b1;
        ram_we    = 1'b1;
        ram_wdata = {ir.opcd, ir.prg_end, PAYLD_W'(cy_new)};
      end
      S_SEND: begin
        tok_valid = 1'b1;
        ram_en    = tok_ready;
        ram_we    = tok_ready;
        ram_wdata = {ir.opcd, ir.prg_end, PAYLD_W'(sy_next)};
      end
      S_WAIT: begin
        poll_clr   = poll_hit;
        ram_en     = poll_hit;
        ram_we     = poll_hit;
        ram_wdata  = {ir.opcd, ir.prg_end, PAYLD_W'(sy_next)};
        wait_stall = !poll_hit;
      end
      default: ;
    endcase
  end

  // ---- sequencer --------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      pc <= '0; pred_pc <= '0; loop_ba <= '0;
      ir <= '0; pred_ir <= '0;
      nr <= 16'd1; rounds <= '0;
      pat_r <= '0; uram_r <= '0; op_r <= PC_LD_ACT;
      busy <= 1'b0; done <= 1'b0; stop_req <= 1'b0; last_r <= 1'b0;
    end else begin
      if (stop && busy) stop_req <= 1'b1;
      unique case (st)
        S_IDLE: begin
          stop_req <= 1'b0;
          if (start) begin
            pc <= '0; loop_ba <= '0; nr <= 16'd1; rounds <= '0;
            busy <= 1'b1; done <= 1'b0;
            st <= S_FETCH;
          end
        end
        S_FETCH: st <= S_DEC;
        S_DEC: begin
          ir   <= rd_ir;
          op_r <= dec_op;
          if (!legal) begin
            st <= S_NEXT;
          end else begin
            unique case (rd_ir.opcd)
              OP_PRG_PRM: begin
                nr      <= rd_prg.nr;
                loop_ba <= rd_prg.icu_ba;
                st      <= S_NEXT;
              end
              OP_URAM_PRM: begin
                uram_r <= rd_uram.uram_addr;
                st     <= S_NEXT;
              end
              OP_CYCLE_ADDR: st <= S_WB_PRED;
              OP_SEND_REQ, OP_SEND_ACK: st <= S_SEND;
              OP_WAIT_REQ, OP_WAIT_ACK: st <= S_WAIT;
              OP_GEMM: st <= S_CMD_ISSUE;
              default: begin
                if (is_adm) begin
                  pred_pc <= pc;
                  pred_ir <= rd_ir;
                  st      <= S_ADM_ISSUE;
                end else begin
                  if (is_pat) pat_r <= pat_t'(rd_ir.payload);
                  st <= S_NEXT;
                end
              end
            endcase
          end
        end
        S_ADM_ISSUE: if (ag_valid && cmd_ready) begin
          last_r <= ag_last;
          st     <= S_ADM_WAIT;
        end
        S_ADM_WAIT: if (cmd_done) st <= last_r ? S_NEXT : S_ADM_ISSUE;
        S_CMD_ISSUE: if (cmd_ready) st <= S_CMD_WAIT;
        S_CMD_WAIT: if (cmd_done) st <= S_NEXT;
        S_WB_PRED: begin
          pred_ir <= {pred_ir.opcd, pred_ir.prg_end, PAYLD_W'(pred_adm_new)};
          st      <= S_WB_CUR;
        end
        S_WB_CUR: st <= S_NEXT;
        S_SEND: if (tok_ready) st <= S_NEXT;
        S_WAIT: begin
          if (poll_hit) st <= S_NEXT;
          else if (stop_req || stop) begin
            busy <= 1'b0;
            st   <= S_IDLE;
          end
        end
        S_NEXT: begin
          if (stop_req) begin
            busy <= 1'b0;
            st   <= S_IDLE;
          end else if (ir.prg_end) begin
            rounds <= rounds + 1'b1;
            if (nr == 0 || rounds + 16'd1 < nr) begin
              pc <= loop_ba;
              st <= S_FETCH;
            end else begin
              busy <= 1'b0;
              done <= 1'b1;
              st   <= S_IDLE;
            end
          end else begin
            pc <= pc + 1'b1;
            st <= S_FETCH;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // a burst is handed over only while the decoder is issuing one
  assert property (@(posedge clk) disable iff (!rst_n) cmd_done |-> (st == S_ADM_WAIT || st == S_CMD_WAIT))
    else $error("icu_group_ctrl: completion without an outstanding command");
endmodule
