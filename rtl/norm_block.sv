// norm_block: batch normalization with frozen statistics, which after
// training reduces to a per-channel multiply and add:
//   y = sat16(((x * scale) >>> FRAC) + shift)   when en, else y = x.
// scale and shift are 16-bit values with FRAC fractional bits, one pair per
// lane. One register stage. The multiply-add form follows the paper; the
// number format and the bypass are this design's choices.
module norm_block
  import accel_pkg::*;
#(
  parameter int unsigned LANES = SLICES
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  in_valid,
  input  data_t x     [LANES],
  input  data_t scale [LANES],
  input  data_t shift [LANES],
  output logic  out_valid,
  output data_t y     [LANES]
);
  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      if (en) y[l] <= sat16(((acc_t'(x[l]) * acc_t'(scale[l])) >>> FRAC) + acc_t'(shift[l]));
      else    y[l] <= x[l];
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
