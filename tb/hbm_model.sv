// hbm_model: behavioural stand-in for the HBM stacks, used by the PU and
// top-level testbenches. NRD read ports and NWR write ports share one word
// memory of 2**MEM_AW 256-bit words (addresses wrap). A read request accepted
// on port i returns its word LAT cycles later on the same port, in order.
// Writes take effect at the accepting edge. Requests seen while rst_n is low
// are ignored. When BP is set, every port's
// ready is dropped at random (about one cycle in four) to exercise
// back-pressure; the `stall_cycles` counter counts cycles in which a port had
// a request pending but was not ready. Testbenches reach `mem` hierarchically
// to preload and inspect data.
`timescale 1ns/1ps
module hbm_model #(
  parameter int unsigned NRD    = 1,
  parameter int unsigned NWR    = 1,
  parameter int unsigned LAT    = 16,
  parameter int unsigned MEM_AW = 14,
  parameter int unsigned AW     = 28,
  parameter int unsigned DW     = 256
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          bp,
  input  logic          rd_valid [NRD],
  output logic          rd_ready [NRD],
  input  logic [AW-1:0] rd_addr  [NRD],
  output logic          rsp_valid[NRD],
  output logic [DW-1:0] rsp_data [NRD],
  input  logic          wr_valid [NWR],
  output logic          wr_ready [NWR],
  input  logic [AW-1:0] wr_addr  [NWR],
  input  logic [DW-1:0] wr_data  [NWR],
  output int            stall_cycles
);
  logic [DW-1:0] mem [2**MEM_AW];
  logic          pv [NRD][LAT];
  logic [DW-1:0] pd [NRD][LAT];

  initial begin
    stall_cycles = 0;
    for (int i = 0; i < NRD; i++) begin
      rd_ready[i] = 1'b1;
      for (int j = 0; j < LAT; j++) begin pv[i][j] = 1'b0; pd[i][j] = '0; end
    end
    for (int i = 0; i < NWR; i++) wr_ready[i] = 1'b1;
    for (int i = 0; i < 2**MEM_AW; i++) mem[i] = '0;
  end

  always @(negedge clk) begin
    for (int i = 0; i < NRD; i++) rd_ready[i] = !bp || ($urandom % 4 != 0);
    for (int i = 0; i < NWR; i++) wr_ready[i] = !bp || ($urandom % 4 != 0);
  end

  always_comb for (int i = 0; i < NRD; i++) begin
    rsp_valid[i] = pv[i][LAT-1];
    rsp_data[i]  = pd[i][LAT-1];
  end

  always @(posedge clk) begin
    int n;
    n = 0;
    for (int i = 0; i < NRD; i++) begin
      for (int j = LAT - 1; j > 0; j--) begin pv[i][j] <= pv[i][j-1]; pd[i][j] <= pd[i][j-1]; end
      pv[i][0] <= rst_n && rd_valid[i] && rd_ready[i];
      pd[i][0] <= mem[rd_addr[i][MEM_AW-1:0]];
      if (rd_valid[i] && !rd_ready[i]) n++;
    end
    for (int i = 0; i < NWR; i++) begin
      if (rst_n && wr_valid[i] && wr_ready[i]) mem[wr_addr[i][MEM_AW-1:0]] <= wr_data[i];
      if (wr_valid[i] && !wr_ready[i]) n++;
    end
    stall_cycles <= stall_cycles + n;
  end
endmodule
