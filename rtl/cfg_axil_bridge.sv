// cfg_axil_bridge: host side of the configuration link (CfgLink).
//
// An AXI4-Lite slave with a few control registers, bridged to the AXI4-Stream
// that runs daisy-chained through all PUs. The host loads a program word by
// word: it writes the two halves of a 64-bit instruction, then the target
// register, whose write emits one stream beat {PID, group, address, data}.
// The same registers start and stop the ICUs and report their state.
//
//   0x00 INSTR_LO  (W)  instruction bits [31:0]
//   0x04 INSTR_HI  (W)  instruction bits [63:32]
//   0x08 TARGET    (W)  [8:0] BRAM address, [13:12] group (0 LD, 1 CP, 2 ST),
//                       [19:16] PID; the write sends the beat
//   0x0C CTRL      (W)  bit 0: start all ICUs, bit 1: stop all ICUs (pulses)
//   0x10 DONE      (R)  one bit per PU: all groups finished their rounds
//   0x14 BUSY      (R)  one bit per PU
//   0x18 BEATS     (R)  number of beats sent
//
// One write and one read are handled at a time; the write response of a TARGET
// write waits until the beat has left. The paper gives the AXIL-to-AXIS
// structure; the register map is this design's.
module cfg_axil_bridge
  import icu_pkg::*;
#(
  parameter int unsigned NUM_PU = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [7:0]        s_awaddr,
  input  logic              s_wvalid,
  output logic              s_wready,
  input  logic [31:0]       s_wdata,
  output logic              s_bvalid,
  input  logic              s_bready,
  output logic [1:0]        s_bresp,
  input  logic              s_arvalid,
  output logic              s_arready,
  input  logic [7:0]        s_araddr,
  output logic              s_rvalid,
  input  logic              s_rready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  // CfgLink stream
  output logic              m_valid,
  input  logic              m_ready,
  output cfg_beat_t         m_beat,
  // ICU control and status
  output logic              start,
  output logic              stop,
  input  logic [NUM_PU-1:0] pu_done,
  input  logic [NUM_PU-1:0] pu_busy
);
  logic [31:0] lo, hi, beats;
  logic        wr_go;

  assign wr_go     = s_awvalid && s_wvalid && !s_bvalid && !m_valid;
  assign s_awready = wr_go;
  assign s_wready  = wr_go;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lo <= '0; hi <= '0; beats <= '0;
      m_valid <= 1'b0; m_beat <= '0;
      s_bvalid <= 1'b0; start <= 1'b0; stop <= 1'b0;
      s_rvalid <= 1'b0; s_rdata <= '0;
    end else begin
      start <= 1'b0;
      stop  <= 1'b0;
      if (m_valid && m_ready) begin
        m_valid  <= 1'b0;
        s_bvalid <= 1'b1;
        beats    <= beats + 1'b1;
      end
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_go) begin
        unique case (s_awaddr)
          8'h00: begin lo <= s_wdata; s_bvalid <= 1'b1; end
          8'h04: begin hi <= s_wdata; s_bvalid <= 1'b1; end
          8'h08: begin
            m_valid      <= 1'b1;
            m_beat.data  <= {hi, lo};
            m_beat.addr  <= s_wdata[IADDR_W-1:0];
            m_beat.group <= icu_group_e'(s_wdata[13:12]);
            m_beat.pid   <= s_wdata[16 +: PID_W];
          end
          8'h0C: begin
            start <= s_wdata[0];
            stop  <= s_wdata[1];
            s_bvalid <= 1'b1;
          end
          default: s_bvalid <= 1'b1;
        endcase
      end
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        unique case (s_araddr)
          8'h10:   s_rdata <= 32'(pu_done);
          8'h14:   s_rdata <= 32'(pu_busy);
          8'h18:   s_rdata <= beats;
          default: s_rdata <= '0;
        endcase
      end
    end
  end
endmodule
