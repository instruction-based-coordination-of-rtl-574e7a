// sync_fifo: small synchronous first-in first-out buffer with valid/ready on
// both sides. DEPTH entries (a power of two), registered storage, the head is
// visible on the output in the cycle after it is written. Used at the ICU's
// ISULink output so that SEND instructions do not wait for the network.
module sync_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_w, do_r;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != 0);
  assign out_data  = mem[rp];
  assign do_w = in_valid && in_ready;
  assign do_r = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_w) wp <= wp + 1'b1;
      if (do_r) rp <= rp + 1'b1;
      count <= count + (AW+1)'(do_w) - (AW+1)'(do_r);
    end
  end

  always_ff @(posedge clk) begin
    if (do_w) mem[wp] <= in_data;
  end
endmodule
