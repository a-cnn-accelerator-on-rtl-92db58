// mme: one matrix multiplication engine, the pipeline
//   line buffer -> 3x3 multiplier array -> adder tree -> Norm -> ReLU -> pooling
// for 32 slices, as in the paper's engine figure. The engine takes one pixel
// of 32 channels per push (in_valid) and produces up to 32 output channels
// per output pixel: 32 in depthwise mode, 9 in pointwise mode (outputs 0..8),
// 10 in standard mode (outputs 0..9). Weights, biases and normalization
// parameters come in parallel from the weight buffer and parameter registers
// and must stay constant during a pass. psum (pointwise only) must be
// presented together with the pixel it belongs to; it is delayed here to
// meet the products at the adder tree.
// Latency from the push that completes an output to out_valid: 7 cycles
// (line buffer 1, multipliers 1, adder tree 2, Norm 1, ReLU 1, pooling 1).
// Throughput: one output pixel per push.
module mme
  import accel_pkg::*;
#(
  parameter int unsigned MAXW = M_MAX,
  parameter int unsigned NW   = NUM_WIDTHS,
  parameter int unsigned WIDTHS [NW] = WIDTHS_DEF
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  mme_cfg_t cfg,
  input  logic     in_valid,
  input  data_t    in_data [SLICES],
  input  data_t    psum    [PW_OUT],
  input  data_t    weight  [SLICES][KK],
  input  data_t    bias    [SLICES],
  input  data_t    scale   [SLICES],
  input  data_t    shift   [SLICES],
  output logic     out_valid,
  output data_t    out     [SLICES]
);

  logic  win_valid, mul_valid, add_valid, norm_valid, relu_valid;
  data_t win    [SLICES][KK];
  prod_t prod   [SLICES][KK];
  data_t sum    [SLICES];
  data_t normed [SLICES];
  data_t act    [SLICES];
  data_t psum_d1 [PW_OUT];
  data_t psum_d2 [PW_OUT];

  always_ff @(posedge clk) begin
    psum_d1 <= psum;
    psum_d2 <= psum_d1;
  end

  line_buffer #(.LANES(SLICES), .MAXW(MAXW), .NW(NW), .WIDTHS(WIDTHS)) u_lb (
    .clk, .rst_n, .start, .mode(cfg.mode), .width(cfg.width), .stride2(cfg.stride2),
    .in_valid, .in_data, .win_valid, .win);

  multiplier_array #(.LANES(SLICES)) u_mul (
    .clk, .rst_n, .in_valid(win_valid), .x(win), .w(weight),
    .out_valid(mul_valid), .p(prod));

  adder_tree u_add (
    .clk, .rst_n, .mode(cfg.mode), .psum_en(cfg.psum_en), .in_valid(mul_valid),
    .p(prod), .bias, .psum(psum_d2), .out_valid(add_valid), .out(sum));

  norm_block #(.LANES(SLICES)) u_norm (
    .clk, .rst_n, .en(cfg.norm_en), .in_valid(add_valid), .x(sum), .scale, .shift,
    .out_valid(norm_valid), .y(normed));

  relu_block #(.LANES(SLICES)) u_relu (
    .clk, .rst_n, .mode(cfg.relu), .in_valid(norm_valid), .x(normed),
    .out_valid(relu_valid), .y(act));

  pooling_block #(.LANES(SLICES)) u_pool (
    .clk, .rst_n, .start, .mode(cfg.pool), .size(cfg.pool_size), .recip(cfg.pool_recip),
    .in_valid(relu_valid), .x(act), .out_valid, .y(out));

endmodule
