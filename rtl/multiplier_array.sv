// multiplier_array: the 32-slice 3x3 multiplier array of one engine. Slice s,
// position k multiplies x[s][k] by w[s][k] (16 x 16 -> 32 bit signed). What x
// holds depends on the convolution mode and is decided by the line buffer:
// the 3x3 window of one channel (depthwise, standard) or one pixel of the
// slice's channel copied to all 9 positions (pointwise, where position k then
// belongs to output channel k). The product is registered: out_valid and
// p[][] follow in_valid by one cycle. The array itself follows the paper;
// the single register stage is this design's choice.
module multiplier_array
  import accel_pkg::*;
#(
  parameter int unsigned LANES = SLICES
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  data_t x [LANES][KK],
  input  data_t w [LANES][KK],
  output logic  out_valid,
  output prod_t p [LANES][KK]
);

  always_ff @(posedge clk) begin
    for (int s = 0; s < LANES; s++)
      for (int k = 0; k < KK; k++)
        p[s][k] <= prod_t'(x[s][k]) * prod_t'(w[s][k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
