// axis_pipe: a chain of STAGES register slices on a valid/ready stream.
//
// Used as the register slice behind each ISU switch output and, with more
// stages, as the SLR crossing registers that carry control tokens between the
// two super logic regions. Each stage is a skid buffer (an output register
// and a spare) whose ready is itself a register, so stages cut the ready path
// as well as the data path. The chain moves one word per cycle and adds STAGES
// cycles of latency. STAGES = 0 is a wire.
// The number of stages on the SLR crossing is this design's choice; it is set
// so that a crossing costs the 13 extra cycles the measured latencies show.
module axis_pipe #(
  parameter int unsigned W      = 16,
  parameter int unsigned STAGES = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         s_valid,
  output logic         s_ready,
  input  logic [W-1:0] s_data,
  output logic         m_valid,
  input  logic         m_ready,
  output logic [W-1:0] m_data
);
  if (STAGES == 0) begin : g_wire
    assign m_valid = s_valid;
    assign s_ready = m_ready;
    assign m_data  = s_data;
  end else begin : g_regs
    logic [STAGES:0]        v;
    logic [STAGES:0]        rdy;
    logic [STAGES:0][W-1:0] d;
    assign v[0]        = s_valid;
    assign d[0]        = s_data;
    assign s_ready     = rdy[0];
    assign rdy[STAGES] = m_ready;
    assign m_valid     = v[STAGES];
    assign m_data      = d[STAGES];
    for (genvar i = 1; i <= STAGES; i++) begin : g_st
      // skid buffer: a main register and a spare; ready is a register, so no
      // combinational path runs from m_ready back to s_ready
      logic         sk_v;
      logic [W-1:0] sk_d;
      assign rdy[i-1] = !sk_v;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          v[i] <= 1'b0; d[i] <= '0; sk_v <= 1'b0; sk_d <= '0;
        end else if (!v[i] || rdy[i]) begin
          // output register free or draining: refill from the spare or input
          if (sk_v) begin
            v[i] <= 1'b1; d[i] <= sk_d; sk_v <= 1'b0;
          end else begin
            v[i] <= v[i-1]; d[i] <= d[i-1];
          end
        end else if (v[i-1] && !sk_v) begin
          // output stalled: park the incoming word in the spare
          sk_v <= 1'b1; sk_d <= d[i-1];
        end
      end
    end
  end
endmodule
