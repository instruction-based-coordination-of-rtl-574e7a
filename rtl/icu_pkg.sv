// icu_pkg: types and constants shared by the instruction controllers (ICU),
// the synchronization network (ISU), the configuration link and the PUs.
//
// Every instruction is 64 bits wide and begins with the operation code and the
// program-end flag, as the ISA requires; the ISA names the fields of each
// instruction type but not their bit positions or widths, so the layout below
// is this design's own:
//
//   [63:59] OPCD   [58] PRG_END   [57:0] payload (one packed struct per type)
//
// Addresses on the HBM side are in 256-bit words. Control tokens of the ISU
// network carry {BID, SRC_PID, REQ/ACK} in TDATA and DST_PID in TDEST.
package icu_pkg;

  localparam int unsigned INSTR_W  = 64;
  localparam int unsigned IADDR_W  = 9;    // 512 instructions per ICU group
  localparam int unsigned PID_W    = 4;    // up to 16 PUs
  localparam int unsigned BID_W    = 4;    // up to 16 buffer identifiers
  localparam int unsigned HADDR_W  = 28;   // HBM word address (256-bit words)
  localparam int unsigned LEN_W    = 16;   // burst length in words
  localparam int unsigned DATA_W   = 256;  // HBM data-mover word
  localparam int unsigned UADDR_W  = 16;   // weight memory word address
  localparam int unsigned PAYLD_W  = 58;

  typedef enum logic [4:0] {
    OP_NOP                = 5'd0,
    OP_PRG_PRM            = 5'd1,
    OP_LINEAR_ADM         = 5'd2,
    OP_IM2COL_PRM         = 5'd3,
    OP_IM2COL_ADM         = 5'd4,
    OP_STRIDE_PRM         = 5'd5,
    OP_STRIDE_ADM         = 5'd6,
    OP_CYCLE_ADDR         = 5'd7,
    OP_SEND_REQ           = 5'd8,
    OP_SEND_ACK           = 5'd9,
    OP_WAIT_REQ           = 5'd10,
    OP_WAIT_ACK           = 5'd11,
    OP_URAM_PRM           = 5'd12,
    OP_WEIGHTS_ADM        = 5'd13,
    OP_RES_ADD_STRIDE_PRM = 5'd14,
    OP_RES_ADD_STRIDE_ADM = 5'd15,
    OP_RES_ADD_ADM        = 5'd16,
    OP_GEMM               = 5'd17
  } opcd_e;

  typedef enum logic [1:0] {GRP_LD = 2'd0, GRP_CP = 2'd1, GRP_ST = 2'd2} icu_group_e;

  typedef struct packed {
    opcd_e               opcd;
    logic                prg_end;
    logic [PAYLD_W-1:0]  payload;
  } instr_t;

  // ProgCtrl (PRG_PRM): NR rounds (0 = endless), ICU_BA loop base address
  typedef struct packed {
    logic [PAYLD_W-25-1:0] rsvd;
    logic [IADDR_W-1:0]    icu_ba;
    logic [15:0]           nr;
  } prg_prm_t;

  // DataMove (*_ADM): current base address and length
  typedef struct packed {
    logic [PAYLD_W-44-1:0] rsvd;
    logic [LEN_W-1:0]      len;
    logic [HADDR_W-1:0]    cur_ba;
  } adm_t;

  // AddrCyc (CYCLE_ADDR)
  typedef struct packed {
    logic [6:0]           ic;
    logic [6:0]           nc;
    logic [15:0]          aoffs;
    logic [HADDR_W-1:0]   ba;
  } cyc_t;

  // Sync (SEND_REQ/SEND_ACK/WAIT_REQ/WAIT_ACK); pid is DST_PID or SRC_PID
  typedef struct packed {
    logic [PAYLD_W-20-1:0] rsvd;
    logic [3:0]            ic;
    logic [3:0]            nc;
    logic [BID_W-1:0]      base_bid;
    logic [BID_W-1:0]      bid;
    logic [PID_W-1:0]      pid;
  } sync_t;

  // Config for patterned transfers (IM2COL_PRM, STRIDE_PRM, RES_ADD_STRIDE_PRM):
  // bursts at base + o*outer_stride + i*inner_stride, o < n_outer, i < n_inner
  typedef struct packed {
    logic [19:0] outer_stride;
    logic [9:0]  n_outer;
    logic [19:0] inner_stride;
    logic [7:0]  n_inner;
  } pat_t;

  // Config URAM_PRM: weight memory destination of the next WEIGHTS_ADM
  typedef struct packed {
    logic [PAYLD_W-UADDR_W-1:0] rsvd;
    logic [UADDR_W-1:0]         uram_addr;
  } uram_prm_t;

  // Compute (GEMM): O[R x P] = W[R x M] * A[M x P], M = k_chunks * C
  typedef struct packed {
    logic [PAYLD_W-50-1:0] rsvd;
    logic [11:0]           ncols;      // P
    logic [11:0]           k_chunks;   // M / C
    logic [UADDR_W-1:0]    uram_base;  // bias word (if bias_en) then weights
    logic                  release_in; // input bank consumed after this GEMM
    logic                  bias_en;
    logic                  add_en;     // residual addition
    logic [4:0]            shift;      // power-of-two scale: >> shift
    logic                  round_en;   // round to nearest on the shift
    logic                  relu;
  } gemm_t;

  // ---- PU command issued by an ICU group decoder --------------------------
  typedef enum logic [2:0] {
    PC_LD_ACT = 3'd0,   // HBM -> input ping-pong bank
    PC_ST_OUT = 3'd1,   // output ping-pong bank -> HBM
    PC_LD_W   = 3'd2,   // HBM -> weight URAMs
    PC_LD_RES = 3'd3,   // HBM -> residual buffer
    PC_GEMM   = 3'd4
  } pu_op_e;

  typedef struct packed {
    pu_op_e               op;
    logic [HADDR_W-1:0]   addr;
    logic [LEN_W-1:0]     len;
    logic                 first;     // first burst of an instruction
    logic                 last;      // last burst of an instruction
    logic [UADDR_W-1:0]   uram_addr;
    gemm_t                gemm;
  } pu_cmd_t;

  // ---- ISU control token --------------------------------------------------
  typedef struct packed {
    logic [BID_W-1:0] bid;
    logic [PID_W-1:0] src_pid;
    logic             is_ack;     // 0: REQ, 1: ACK
  } tok_data_t;

  typedef struct packed {
    logic [PID_W-1:0] tdest;      // DST_PID
    tok_data_t        tdata;
  } token_t;

  localparam int unsigned TOKEN_W = $bits(token_t);

  // ---- CfgLink beat ---------------------------------------------------------
  typedef struct packed {
    logic [PID_W-1:0]   pid;
    icu_group_e         group;
    logic [IADDR_W-1:0] addr;
    logic [INSTR_W-1:0] data;
  } cfg_beat_t;

  localparam int unsigned CFG_W = $bits(cfg_beat_t);

  // ---- dynamic-instruction write-back rules ----------------------------------
  // Sync: bypass when NC = 0, reload when IC = 0, otherwise step.
  function automatic sync_t sync_update(sync_t s);
    sync_t r = s;
    if (s.nc == 0) begin
      r = s;
    end else if (s.ic == 0) begin
      r.bid = s.base_bid;
      r.ic  = s.nc;
    end else begin
      r.bid = s.bid + 1'b1;
      r.ic  = s.ic - 1'b1;
    end
    return r;
  endfunction

  // AddrCyc: returns the predecessor's next CUR_BA; the new IC via cyc_next_ic
  function automatic logic [HADDR_W-1:0] cyc_next_ba(cyc_t c, logic [HADDR_W-1:0] cur_ba);
    return (c.ic == 0) ? c.ba : cur_ba + HADDR_W'(c.aoffs);
  endfunction

  function automatic logic [6:0] cyc_next_ic(cyc_t c);
    return (c.ic == 0) ? c.nc : c.ic - 1'b1;
  endfunction

  // ---- instruction builders (used by program generators and testbenches) ----
  function automatic instr_t mk_instr(opcd_e op, logic [PAYLD_W-1:0] p, logic prg_end = 1'b0);
    instr_t i;
    i.opcd = op; i.prg_end = prg_end; i.payload = p;
    return i;
  endfunction

  function automatic instr_t i_prg(int nr, int ba);
    prg_prm_t p = '0;
    p.nr = 16'(nr); p.icu_ba = IADDR_W'(ba);
    return mk_instr(OP_PRG_PRM, p);
  endfunction

  function automatic instr_t i_adm(opcd_e op, longint ba, int len, logic prg_end = 1'b0);
    adm_t p = '0;
    p.cur_ba = HADDR_W'(ba); p.len = LEN_W'(len);
    return mk_instr(op, p, prg_end);
  endfunction

  function automatic instr_t i_cyc(longint ba, int aoffs, int nc, int ic, logic prg_end = 1'b0);
    cyc_t p;
    p.ba = HADDR_W'(ba); p.aoffs = 16'(aoffs); p.nc = 7'(nc); p.ic = 7'(ic);
    return mk_instr(OP_CYCLE_ADDR, p, prg_end);
  endfunction

  function automatic instr_t i_sync(opcd_e op, int pid, int bid, int base_bid, int nc, int ic,
                                    logic prg_end = 1'b0);
    sync_t p = '0;
    p.pid = PID_W'(pid); p.bid = BID_W'(bid); p.base_bid = BID_W'(base_bid);
    p.nc = 4'(nc); p.ic = 4'(ic);
    return mk_instr(op, p, prg_end);
  endfunction

  function automatic instr_t i_pat(opcd_e op, int n_inner, int inner_stride, int n_outer,
                                   int outer_stride);
    pat_t p;
    p.n_inner = 8'(n_inner); p.inner_stride = 20'(inner_stride);
    p.n_outer = 10'(n_outer); p.outer_stride = 20'(outer_stride);
    return mk_instr(op, p);
  endfunction

  function automatic instr_t i_uram(int a);
    uram_prm_t p = '0;
    p.uram_addr = UADDR_W'(a);
    return mk_instr(OP_URAM_PRM, p);
  endfunction

  function automatic instr_t i_gemm(gemm_t g, logic prg_end = 1'b0);
    return mk_instr(OP_GEMM, PAYLD_W'(g), prg_end);
  endfunction

endpackage
