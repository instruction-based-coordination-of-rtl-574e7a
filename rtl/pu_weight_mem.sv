// pu_weight_mem: the weight and bias store of a PU (the PU's UltraRAMs).
//
// One word per address holds the R x C weights the array consumes in one
// step (R*C bytes); a bias word holds R 32-bit biases in its low bits. Words
// are filled 256 bits at a time from the data mover (part `wpart` of word
// `waddr`) and read whole, one cycle after the address. The default depth
// gives 64 UltraRAMs of 4096 x 64 bits per PU (640 URAMs over 10 PUs, as in the
// resource table); the word organisation is this design's.
module pu_weight_mem #(
  parameter int unsigned WW    = 4096,   // word width, R*C*8
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned PW    = 256     // write part width
) (
  input  logic                         clk,
  input  logic                         we,
  input  logic [$clog2(DEPTH)-1:0]     waddr,
  input  logic [$clog2(WW/PW)-1:0]     wpart,
  input  logic [PW-1:0]                wdata,
  input  logic                         re,
  input  logic [$clog2(DEPTH)-1:0]     raddr,
  output logic [WW-1:0]                rdata
);
  logic [WW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr][wpart*PW +: PW] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
