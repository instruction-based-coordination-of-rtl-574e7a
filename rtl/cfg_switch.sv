// cfg_switch: one node of the daisy-chained configuration link. A beat whose
// PID equals this node's PID is delivered to the local ICU (which then routes
// it by group into an instruction BRAM); any other beat is passed on to the
// next node through a register stage. Routing by PID first and by group
// second follows the paper; the one-stage forwarding is this design's choice.
module cfg_switch
  import icu_pkg::*;
#(
  parameter logic [PID_W-1:0] PID = '0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      s_valid,
  output logic      s_ready,
  input  cfg_beat_t s_beat,
  output logic      l_valid,     // to the local ICU
  input  logic      l_ready,
  output cfg_beat_t l_beat,
  output logic      n_valid,     // to the next node
  input  logic      n_ready,
  output cfg_beat_t n_beat
);
  logic f_valid, f_ready, mine;

  assign mine    = (s_beat.pid == PID);
  assign l_valid = s_valid && mine;
  assign l_beat  = s_beat;
  assign f_valid = s_valid && !mine;
  assign s_ready = mine ? l_ready : f_ready;

  axis_pipe #(.W(CFG_W), .STAGES(1)) u_fwd (
    .clk, .rst_n,
    .s_valid(f_valid), .s_ready(f_ready), .s_data(s_beat),
    .m_valid(n_valid), .m_ready(n_ready), .m_data(n_beat)
  );
endmodule
