// pu_vector_unit: post-processing of one output column of R accumulators.
//
// For every row: y = acc, rounded to nearest (add 2^(shift-1)) when round_en,
// arithmetically shifted right by `shift` (the power-of-two quantization
// scale), plus the INT8 residual of that row when add_en (residual shortcut
// addition), clipped at zero when relu, and saturated to INT8. One pipeline
// register: the column appears on `y` one cycle after `in_valid`.
// The operations (activation, power-of-two scales, residual add) are the
// paper's; their order and the rounding rule are this design's choice.
module pu_vector_unit #(
  parameter int unsigned R = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [R*32-1:0] acc,
  input  logic [R*8-1:0]  res,
  input  logic [4:0]      shift,
  input  logic            round_en,
  input  logic            add_en,
  input  logic            relu,
  output logic            out_valid,
  output logic [R*8-1:0]  y
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int r = 0; r < R; r++) begin
          logic signed [33:0] v;
          v = 34'($signed(acc[r*32 +: 32]));
          if (round_en && shift != 0) v = v + (34'sd1 <<< (shift - 5'd1));
          v = v >>> shift;
          if (add_en) v = v + 34'($signed(res[r*8 +: 8]));
          if (relu && v < 0) v = '0;
          if (v > 34'sd127)       y[r*8 +: 8] <= 8'sd127;
          else if (v < -34'sd128) y[r*8 +: 8] <= 8'h80;
          else                    y[r*8 +: 8] <= v[7:0];
        end
      end
    end
  end
endmodule
