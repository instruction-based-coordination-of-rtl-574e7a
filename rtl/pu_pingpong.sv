// pu_pingpong: a two-bank (ping-pong) on-chip buffer between one producer and
// one consumer, used for the PU's input activations (Load group -> GEMM) and
// output activations (GEMM -> Store group).
//
// Each bank is either free or full. The producer writes into bank p_bank while
// p_ready says it is free, and marks it full with a p_done pulse, after which
// it moves to the other bank. The consumer reads bank c_bank while c_ready
// says it is full (read data one cycle after the address) and frees it with
// c_done. A producer that finds its next bank still full is held back: this is
// how a slow consumer throttles the groups upstream. Banks are used strictly in
// alternation on both sides.
// Every flip-flop resets asynchronously; the only synchronous use of rst_n is
// the `disable iff` of the assertions, which a lint tool may still report as
// a reset used both ways.
module pu_pingpong #(
  parameter int unsigned W     = 256,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // producer
  output logic                     p_ready,
  output logic                     p_bank,
  input  logic                     p_done,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  // consumer
  output logic                     c_ready,
  output logic                     c_bank,
  input  logic                     c_done,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata,
  // state
  output logic [1:0]               full
);
  logic [W-1:0] mem [2*DEPTH];

  assign p_ready = !full[p_bank];
  assign c_ready = full[c_bank];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full   <= '0;
      p_bank <= 1'b0;
      c_bank <= 1'b0;
    end else begin
      if (p_done) begin
        full[p_bank] <= 1'b1;
        p_bank       <= !p_bank;
      end
      if (c_done) begin
        full[c_bank] <= 1'b0;
        c_bank       <= !c_bank;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (we) mem[{p_bank, waddr}] <= wdata;
    if (re) rdata <= mem[{c_bank, raddr}];
  end

  assert property (@(posedge clk) disable iff (!rst_n) p_done |-> p_ready)
    else $error("pu_pingpong: producer released a bank it did not own");
  assert property (@(posedge clk) disable iff (!rst_n) c_done |-> c_ready)
    else $error("pu_pingpong: consumer released an empty bank");
endmodule
