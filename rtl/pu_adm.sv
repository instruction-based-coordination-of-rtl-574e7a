// pu_adm: a data mover between the HBM and a PU's on-chip buffers, standing
// in for the AXI DataMover of the baseline PU. A read engine (memory to
// stream) and, when HAS_WR, a write engine (stream to memory) run
// independently, each taking one (address, length) command at a time.
//
// Read: one request per 256-bit word is issued on the memory read port as
// fast as it accepts them; responses return in order (any latency) and leave
// on o_valid/o_data with their index in the burst; rd_done pulses once the
// last response has arrived.
// Write: word i of the burst is fetched from the source buffer (src_re,
// src_idx; data one cycle later) and written with wr_valid/wr_ready; a word
// is written once accepted, and wr_done pulses after the last. Two cycles per
// word.
// The memory ports are a simplified request/response form of AXI4 (single-word
// requests, no burst, no write response channel); the paper uses the AMD IP
// and gives only its role and its command/status structure.
module pu_adm
  import icu_pkg::*;
#(
  parameter bit HAS_WR = 1'b1
) (
  input  logic               clk,
  input  logic               rst_n,
  // read command and output stream
  input  logic               rd_cmd_valid,
  output logic               rd_cmd_ready,
  input  logic [HADDR_W-1:0] rd_cmd_addr,
  input  logic [LEN_W-1:0]   rd_cmd_len,
  output logic               o_valid,
  output logic [DATA_W-1:0]  o_data,
  output logic [LEN_W-1:0]   o_idx,
  output logic               rd_done,
  // memory read port
  output logic               mr_req_valid,
  input  logic               mr_req_ready,
  output logic [HADDR_W-1:0] mr_req_addr,
  input  logic               mr_rsp_valid,
  input  logic [DATA_W-1:0]  mr_rsp_data,
  // write command and source
  input  logic               wr_cmd_valid,
  output logic               wr_cmd_ready,
  input  logic [HADDR_W-1:0] wr_cmd_addr,
  input  logic [LEN_W-1:0]   wr_cmd_len,
  output logic               src_re,
  output logic [LEN_W-1:0]   src_idx,
  input  logic [DATA_W-1:0]  src_data,
  output logic               wr_done,
  // memory write port
  output logic               mw_valid,
  input  logic               mw_ready,
  output logic [HADDR_W-1:0] mw_addr,
  output logic [DATA_W-1:0]  mw_data
);
  // ---------------- read engine ----------------
  logic               r_busy;
  logic [HADDR_W-1:0] r_addr;
  logic [LEN_W-1:0]   r_left, r_len, r_got;

  assign rd_cmd_ready = !r_busy;
  assign mr_req_valid = r_busy && (r_left != 0);
  assign mr_req_addr  = r_addr;
  assign o_valid      = r_busy && mr_rsp_valid;
  assign o_data       = mr_rsp_data;
  assign o_idx        = r_got;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_busy <= 1'b0; r_addr <= '0; r_left <= '0; r_len <= '0; r_got <= '0;
      rd_done <= 1'b0;
    end else begin
      rd_done <= 1'b0;
      if (!r_busy) begin
        if (rd_cmd_valid) begin
          r_busy <= (rd_cmd_len != 0);
          rd_done <= (rd_cmd_len == 0);
          r_addr <= rd_cmd_addr;
          r_left <= rd_cmd_len;
          r_len  <= rd_cmd_len;
          r_got  <= '0;
        end
      end else begin
        if (mr_req_valid && mr_req_ready) begin
          r_addr <= r_addr + 1'b1;
          r_left <= r_left - 1'b1;
        end
        if (mr_rsp_valid) begin
          r_got <= r_got + 1'b1;
          if (r_got + 1'b1 == r_len) begin
            r_busy  <= 1'b0;
            rd_done <= 1'b1;
          end
        end
      end
    end
  end

  // ---------------- write engine ----------------
  if (HAS_WR) begin : g_wr
    typedef enum logic [1:0] {W_IDLE, W_FETCH, W_SEND} wst_e;
    wst_e               w_st;
    logic [HADDR_W-1:0] w_addr;
    logic [LEN_W-1:0]   w_idx, w_len;
    logic [DATA_W-1:0]  w_data;

    assign wr_cmd_ready = (w_st == W_IDLE);
    assign src_re       = (w_st == W_FETCH);
    assign src_idx      = w_idx;
    assign mw_valid     = (w_st == W_SEND);
    assign mw_addr      = w_addr;
    // data requested in W_FETCH arrives in the first W_SEND cycle; hold it
    logic fetched;
    assign mw_data      = fetched ? src_data : w_data;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        w_st <= W_IDLE; w_addr <= '0; w_idx <= '0; w_len <= '0;
        wr_done <= 1'b0; fetched <= 1'b0;
      end else begin
        wr_done <= 1'b0;
        fetched <= src_re;
        unique case (w_st)
          W_IDLE: if (wr_cmd_valid) begin
            w_addr <= wr_cmd_addr;
            w_len  <= wr_cmd_len;
            w_idx  <= '0;
            if (wr_cmd_len == 0) wr_done <= 1'b1;
            else                 w_st    <= W_FETCH;
          end
          W_FETCH: w_st <= W_SEND;
          W_SEND: if (mw_ready) begin
            w_addr <= w_addr + 1'b1;
            w_idx  <= w_idx + 1'b1;
            if (w_idx + 1'b1 == w_len) begin
              w_st    <= W_IDLE;
              wr_done <= 1'b1;
            end else begin
              w_st <= W_FETCH;
            end
          end
          default: w_st <= W_IDLE;
        endcase
      end
    end
    always_ff @(posedge clk) if (fetched) w_data <= src_data;
  end else begin : g_no_wr
    assign wr_cmd_ready = 1'b0;
    assign src_re       = 1'b0;
    assign src_idx      = '0;
    assign mw_valid     = 1'b0;
    assign mw_addr      = '0;
    assign mw_data      = '0;
    assign wr_done      = 1'b0;
  end
endmodule
