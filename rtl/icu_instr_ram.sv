// icu_instr_ram: the dual-port instruction memory of one ICU group (one
// 36 Kb block RAM: 512 x 64 bits). Port A is written by the configuration
// link when a program is loaded. Port B belongs to the group's decoder: it
// fetches instructions and writes back the state of dynamic instructions
// (Sync and AddrCyc) and of the DataMove instruction an AddrCyc updates.
// Both ports are synchronous; a read on port B returns data one cycle later.
// If both ports write the same address in one cycle, port B wins.
module icu_instr_ram #(
  parameter int unsigned AW = icu_pkg::IADDR_W,
  parameter int unsigned DW = icu_pkg::INSTR_W
) (
  input  logic          clk,
  // port A: configuration write
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [DW-1:0] a_wdata,
  // port B: decoder read / write-back
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [DW-1:0] b_wdata,
  output logic [DW-1:0] b_rdata
);
  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (a_we && !(b_en && b_we && b_addr == a_addr)) mem[a_addr] <= a_wdata;
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      b_rdata <= mem[b_addr];
    end
  end
endmodule
