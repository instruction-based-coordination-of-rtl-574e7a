// pu_systolic_array: the GEMM engine of a PU, an R x C array of INT8
// multiply-accumulate cells for O[N x P] = W[N x M] * A[M x P].
//
// R is the output-row parallelism (over N) and C the dot-product parallelism
// (over M): in every enabled cycle each of the R rows multiplies its C
// weights of the current M-chunk with the same C activations of the current
// output column and adds the C products to its 32-bit accumulator. A step
// marked `first` starts a column (the accumulator is loaded with the bias or
// zero); the cycle after a step marked `last` the R finished sums are on
// `acc` with `out_valid` high for one cycle. One step per cycle, so a column
// of M = K*C takes K cycles and the array sustains R*C MACs per cycle.
// The paper gives the R x C organisation (64x4 for PU1x, 64x8 for PU2x) and
// its parallelism; the baseline PU's cell-level systolic timing and double-rate
// DSP clock are not described in the paper, so the cells here take the
// activations broadcast and run on the one system clock.
//
// Weight word layout: byte r*C + c is the weight of row r, element c.
module pu_systolic_array #(
  parameter int unsigned R = 64,
  parameter int unsigned C = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic              first,
  input  logic              last,
  input  logic [R*C*8-1:0]  w,
  input  logic [C*8-1:0]    a,
  input  logic              bias_en,
  input  logic [R*32-1:0]   bias,
  output logic              out_valid,
  output logic [R*32-1:0]   acc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      acc       <= '0;
    end else begin
      out_valid <= en && last;
      if (en) begin
        for (int r = 0; r < R; r++) begin
          logic signed [31:0] sum;
          sum = first ? (bias_en ? $signed(bias[r*32 +: 32]) : 32'sd0)
                      : $signed(acc[r*32 +: 32]);
          for (int c = 0; c < C; c++) begin
            sum = sum + 32'($signed(w[(r*C+c)*8 +: 8]) * $signed(a[c*8 +: 8]));
          end
          acc[r*32 +: 32] <= sum;
        end
      end
    end
  end
endmodule
