// icu_addr_gen: the ICU's IM2COL / stride address generator.
//
// A patterned DataMove instruction (IM2COL_ADM, STRIDE_ADM,
// RES_ADD_STRIDE_ADM) is expanded into n_outer x n_inner linear bursts of LEN
// words at  CUR_BA + o*outer_stride + i*inner_stride  (inner index fastest).
// A linear DataMove is the same with n_outer = n_inner = 1. A count of zero is
// taken as one. The generator is loaded by a start pulse and then offers one
// burst at a time on a valid/ready output, marking the first and last burst.
// The pattern semantics are this design's choice: an IM2COL row is read as
// kernel-row segments (inner loop over kernel rows, outer loop over output
// pixels), which covers stride patterns as the one-level case.
module icu_addr_gen
  import icu_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [HADDR_W-1:0] base,
  input  logic [LEN_W-1:0]   len,
  input  pat_t               pat,
  output logic               b_valid,
  input  logic               b_ready,
  output logic [HADDR_W-1:0] b_addr,
  output logic [LEN_W-1:0]   b_len,
  output logic               b_first,
  output logic               b_last
);
  logic [7:0]          ni, i_cnt;
  logic [9:0]          no, o_cnt;
  logic [19:0]         st_i, st_o;
  logic [HADDR_W-1:0]  row_addr, cur_addr;
  logic                active;
  logic                first_q;

  assign b_valid = active;
  assign b_addr  = cur_addr;
  assign b_len   = len;
  assign b_first = first_q;
  assign b_last  = (i_cnt == ni - 1'b1) && (o_cnt == no - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; first_q <= 1'b0;
      i_cnt <= '0; o_cnt <= '0; ni <= 8'd1; no <= 10'd1;
      st_i <= '0; st_o <= '0; row_addr <= '0; cur_addr <= '0;
    end else if (start) begin
      active   <= 1'b1;
      first_q  <= 1'b1;
      i_cnt    <= '0;
      o_cnt    <= '0;
      ni       <= (pat.n_inner == 0) ? 8'd1  : pat.n_inner;
      no       <= (pat.n_outer == 0) ? 10'd1 : pat.n_outer;
      st_i     <= pat.inner_stride;
      st_o     <= pat.outer_stride;
      row_addr <= base;
      cur_addr <= base;
    end else if (active && b_ready) begin
      first_q <= 1'b0;
      if (b_last) begin
        active <= 1'b0;
      end else if (i_cnt == ni - 1'b1) begin
        i_cnt    <= '0;
        o_cnt    <= o_cnt + 1'b1;
        row_addr <= row_addr + HADDR_W'(st_o);
        cur_addr <= row_addr + HADDR_W'(st_o);
      end else begin
        i_cnt    <= i_cnt + 1'b1;
        cur_addr <= cur_addr + HADDR_W'(st_i);
      end
    end
  end
endmodule
