// isu: Instruction Synchronization Unit, one node of the peer-to-peer network
// that carries single-beat REQ/ACK control tokens between PUs.
//
// A 3x3 stream switch. Slave (input) ports: S0 injection from the local ICU,
// S1 tokens travelling toward lower PIDs, S2 tokens travelling toward higher
// PIDs. Master (output) ports: M0 delivery to the local ICU, M1 toward lower
// PIDs, M2 toward higher PIDs. The routing table is fixed by the node's PID:
// TDEST equal to PID goes to M0, below it to M1, above it to M2, which gives
// the reachable pairs printed for the ISU (S0 -> M0/M1/M2, S1 -> M0/M1,
// S2 -> M0/M2). Each master arbitrates among the slaves that want it with a
// one-transfer round robin: after every transfer the slave just served gets
// the lowest priority. S1 and S2 enter through a register slice and every
// master leaves through one (axis_pipe, one stage each), so a hop between
// neighbouring ISUs costs two cycles and an S0 -> M0 delivery one.
// The port roles and arbitration follow the paper; mapping "left/right" to
// lower/higher PID, the routing rule and the register-slice placement are this
// design's choices.
// A lint tool may report rst_n as used both synchronously and asynchronously:
// the synchronous use is only the `disable iff` of the handshake assertion
// below, which is not logic; every flip-flop resets asynchronously.
module isu
  import icu_pkg::*;
#(
  parameter logic [PID_W-1:0] PID = '0
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   s_valid [3],
  output logic   s_ready [3],
  input  token_t s_tok   [3],
  output logic   m_valid [3],
  input  logic   m_ready [3],
  output token_t m_tok   [3]
);
  // input register slices (S0 is driven by the local FIFO directly)
  logic   i_valid [3];
  logic   i_ready [3];
  token_t i_tok   [3];

  assign i_valid[0] = s_valid[0];
  assign i_tok[0]   = s_tok[0];
  assign s_ready[0] = i_ready[0];
  for (genvar s = 1; s < 3; s++) begin : g_in
    axis_pipe #(.W(TOKEN_W), .STAGES(1)) u_rs (
      .clk, .rst_n,
      .s_valid(s_valid[s]), .s_ready(s_ready[s]), .s_data(s_tok[s]),
      .m_valid(i_valid[s]), .m_ready(i_ready[s]), .m_data(i_tok[s])
    );
  end

  // routing: which master each slave's head token wants
  logic [2:0] want [3];   // want[s][m]
  always_comb begin
    for (int s = 0; s < 3; s++) begin
      want[s] = '0;
      if (i_valid[s]) begin
        if (i_tok[s].tdest == PID)     want[s][0] = 1'b1;
        else if (i_tok[s].tdest < PID) want[s][1] = 1'b1;
        else                           want[s][2] = 1'b1;
      end
    end
    // fixed routing table: S1 may not turn back up, S2 may not turn back down
    want[1][2] = 1'b0;
    want[2][1] = 1'b0;
  end

  // per-master round-robin arbitration
  logic [1:0] last_g [3];    // slave served last by each master
  logic [2:0] grant  [3];    // grant[m][s]
  logic       o_valid [3];
  logic       o_ready [3];
  token_t     o_tok   [3];

  always_comb begin
    for (int m = 0; m < 3; m++) begin
      grant[m] = '0;
      // search from the slave after the last one served
      for (int k = 1; k <= 3; k++) begin
        int s;
        s = (int'(last_g[m]) + k) % 3;
        if (grant[m] == 0 && want[s][m]) grant[m][s] = 1'b1;
      end
      o_valid[m] = |grant[m];
      o_tok[m]   = '0;
      for (int s = 0; s < 3; s++) if (grant[m][s]) o_tok[m] = i_tok[s];
    end
    for (int s = 0; s < 3; s++) begin
      i_ready[s] = 1'b0;
      for (int m = 0; m < 3; m++) if (grant[m][s] && o_ready[m]) i_ready[s] = 1'b1;
    end
  end

  for (genvar m = 0; m < 3; m++) begin : g_out
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) last_g[m] <= 2'd2;
      else if (o_valid[m] && o_ready[m]) begin
        for (int s = 0; s < 3; s++) if (grant[m][s]) last_g[m] <= 2'(s);
      end
    end
    axis_pipe #(.W(TOKEN_W), .STAGES(1)) u_rs (
      .clk, .rst_n,
      .s_valid(o_valid[m]), .s_ready(o_ready[m]), .s_data(o_tok[m]),
      .m_valid(m_valid[m]), .m_ready(m_ready[m]), .m_data(m_tok[m])
    );
  end

  // a token is routed to exactly one master
  for (genvar s = 0; s < 3; s++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) $onehot0(want[s]))
      else $error("isu: token routed to several ports");
  end
endmodule
