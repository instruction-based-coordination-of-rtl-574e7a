// icu_sync_table: one synchronization-state table of the ICU (the REQ LUTRAM
// or the ACK LUTRAM). One bit per {BID, SRC_PID} pair records that a control
// token of this table's kind has arrived from PU SRC_PID for buffer BID.
//
// Set port: a token delivered by the local ISU (M0) sets its entry.
// Poll port: a WAIT instruction reads the entry at {BID, SRC_PID}
// combinationally (poll_hit) and, once it is set, pulses poll_clr to clear it
// and proceed. A set and a clear of the same entry in one cycle leave it set,
// so a token arriving while its predecessor is being consumed is not lost.
module icu_sync_table #(
  parameter int unsigned BID_W = icu_pkg::BID_W,
  parameter int unsigned PID_W = icu_pkg::PID_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             set_en,
  input  logic [BID_W-1:0] set_bid,
  input  logic [PID_W-1:0] set_pid,
  input  logic [BID_W-1:0] poll_bid,
  input  logic [PID_W-1:0] poll_pid,
  output logic             poll_hit,
  input  logic             poll_clr
);
  localparam int unsigned N = 2**(BID_W+PID_W);
  logic [N-1:0] state;
  logic [BID_W+PID_W-1:0] set_a, poll_a;

  assign set_a    = {set_bid, set_pid};
  assign poll_a   = {poll_bid, poll_pid};
  assign poll_hit = state[poll_a];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= '0;
    end else begin
      if (poll_clr) state[poll_a] <= 1'b0;
      if (set_en)   state[set_a]  <= 1'b1;
    end
  end
endmodule
