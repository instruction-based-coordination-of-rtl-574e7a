// icu_token_out: the ICU's outgoing control-token path. The SEND instructions
// of the Load and Store decoders are merged by a multiplexer and written into
// a small FIFO that drives the ISULink (slave port S0 of the local ISU).
// A decoder's token is accepted as soon as the FIFO has room, so SEND does not
// wait for the network. When both decoders offer a token in the same cycle the
// grant alternates (round robin); the FIFO depth (4) is this design's choice,
// the paper asks only for "a small FIFO".
module icu_token_out
  import icu_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   ld_valid,
  output logic   ld_ready,
  input  token_t ld_tok,
  input  logic   st_valid,
  output logic   st_ready,
  input  token_t st_tok,
  output logic   m_valid,
  input  logic   m_ready,
  output token_t m_tok
);
  logic   pick_st, prio_st;
  logic   f_valid, f_ready;
  token_t f_tok;
  logic [$clog2(DEPTH):0] unused_count;

  // pick ST when only ST asks, or both ask and it is ST's turn
  assign pick_st  = st_valid && (!ld_valid || prio_st);
  assign f_valid  = ld_valid || st_valid;
  assign f_tok    = pick_st ? st_tok : ld_tok;
  assign ld_ready = f_ready && !pick_st;
  assign st_ready = f_ready && pick_st;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) prio_st <= 1'b0;
    else if (f_valid && f_ready) prio_st <= !pick_st;
  end

  sync_fifo #(.W(TOKEN_W), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(f_valid), .in_ready(f_ready), .in_data(f_tok),
    .out_valid(m_valid), .out_ready(m_ready), .out_data(m_tok),
    .count(unused_count)
  );
endmodule
