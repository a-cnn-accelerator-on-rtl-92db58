// cnn_accel: top level of the depthwise-separable CNN accelerator. One array
// of four matrix multiplication engines does every layer (standard 3x3
// convolution of the image, depthwise 3x3, pointwise 1x1, with optional
// normalization, ReLU/ReLU6 and pooling). Around it:
//   - weight buffer: ping-pong, 2 x 1152 16-bit weights (36 Kb), filled from
//     the load stream while the other bank drives the engines;
//   - parameter registers: ping-pong, 2 x 384 words (bias, scale, shift of
//     the 128 outputs of a pass), filled from the same stream after the
//     weights of each set;
//   - feature map buffer: 12544 words x 128 channels x 16 bit (24.5 Mb)
//     holding all intermediate maps;
//   - control FSM: cuts a layer into passes and sequences them.
// The image of the first layer enters through the image stream directly into
// the engines, as in the paper's overview figure (memory -> MME array).
// The DMA engine, external memory interface, DDR4, soft processor and flash
// of the paper's system are outside this module; their traffic appears as
// the load stream (wt_*), the image stream (img_*) and the host port of the
// feature map buffer (host_*; usable while busy is low).
// A layer starts with a one-cycle start while busy is low and ends with a
// one-cycle done. Load stream: one beat is 32 words; a weight set is 36
// beats of weights (word 288m+9s+k = engine m, slice s, position k) followed
// by 12 beats of parameters (bias[0..127], scale[0..127], shift[0..127]).
module cnn_accel
  import accel_pkg::*;
#(
  parameter int unsigned MAXW = M_MAX,
  parameter int unsigned NW   = NUM_WIDTHS,
  parameter int unsigned WIDTHS [NW] = WIDTHS_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  // layer command
  input  logic        start,
  input  layer_t      layer,
  input  logic [FMB_AW-1:0] dst_stride,
  output logic        busy,
  output logic        done,
  // weight / parameter load stream
  input  logic        wt_valid,
  output logic        wt_ready,
  input  data_t       wt_data [LOAD_BEAT],
  // image stream (3 channels per pixel)
  input  logic        img_valid,
  output logic        img_ready,
  input  data_t       img_data [3],
  // host access to the feature map buffer
  input  logic        host_we,
  input  logic [FMB_AW-1:0] host_waddr,
  input  data_t       host_wdata [FM_LANES],
  input  logic [FM_LANES-1:0] host_wmask,
  input  logic        host_re,
  input  logic [FMB_AW-1:0] host_raddr,
  output data_t       host_rdata [FM_LANES],
  // event counters
  output logic [31:0] stat_wait_cycles,
  output logic [31:0] stat_img_stalls,
  output logic [31:0] stat_passes,
  output logic [31:0] stat_psum_passes
);

  // Weight and parameter buffers.
  logic  w_full, p_full, swap, w_ready, p_ready, w_active, p_active;
  data_t wts    [WSET];
  data_t params [PSET];

  weight_buffer #(.DEPTH(WSET), .BEAT(LOAD_BEAT)) u_wbuf (
    .clk, .rst_n, .ld_valid(wt_valid && !w_full), .ld_ready(w_ready), .ld_data(wt_data),
    .load_full(w_full), .swap, .active_bank(w_active), .rd_data(wts));

  weight_buffer #(.DEPTH(PSET), .BEAT(LOAD_BEAT)) u_pbuf (
    .clk, .rst_n, .ld_valid(wt_valid && w_full), .ld_ready(p_ready), .ld_data(wt_data),
    .load_full(p_full), .swap, .active_bank(p_active), .rd_data(params));

  assign wt_ready = w_full ? p_ready : w_ready;

  // Control.
  mme_cfg_t cfg;
  logic       mme_start, arr_in_valid, arr_pad, arr_from_img, arr_out_valid;
  logic [1:0] in_chunk;
  logic [6:0] lane_base;
  logic [7:0] out_limit;
  logic       c_re_a, c_re_b, c_we;
  logic [FMB_AW-1:0] c_raddr_a, c_raddr_b, c_waddr;

  control_fsm u_ctrl (
    .clk, .rst_n, .start, .layer, .dst_stride, .busy, .done,
    .wb_full(w_full && p_full), .swap,
    .mme_start, .cfg, .in_chunk, .lane_base, .out_limit,
    .arr_in_valid, .arr_pad, .arr_from_img, .arr_out_valid,
    .re_a(c_re_a), .raddr_a(c_raddr_a), .re_b(c_re_b), .raddr_b(c_raddr_b),
    .we(c_we), .waddr(c_waddr),
    .img_valid, .img_ready,
    .stat_wait_cycles, .stat_img_stalls, .stat_passes, .stat_psum_passes);

  // Feature map buffer with host access while idle.
  data_t fm_rdata_a [FM_LANES];
  data_t fm_rdata_b [FM_LANES];
  data_t arr_out    [FM_LANES];
  data_t fm_wdata   [FM_LANES];
  logic [FM_LANES-1:0] arr_mask, fm_wmask;

  always_comb begin
    fm_wdata = busy ? arr_out : host_wdata;
    fm_wmask = busy ? arr_mask : host_wmask;
  end

  feature_map_buffer #(.DEPTH(FMB_DEPTH), .LANES(FM_LANES), .AW(FMB_AW)) u_fmb (
    .clk,
    .we(busy ? c_we : host_we), .waddr(busy ? c_waddr : host_waddr),
    .wdata(fm_wdata), .wmask(fm_wmask),
    .re_a(busy ? c_re_a : host_re), .raddr_a(busy ? c_raddr_a : host_raddr),
    .rdata_a(fm_rdata_a),
    .re_b(c_re_b), .raddr_b(c_raddr_b), .rdata_b(fm_rdata_b));

  assign host_rdata = fm_rdata_a;

  // Image pixels are registered to line up with buffer reads.
  data_t img_q [3];
  always_ff @(posedge clk) if (img_valid && img_ready) img_q <= img_data;

  data_t arr_in [FM_LANES];
  always_comb begin
    for (int l = 0; l < FM_LANES; l++) begin
      if (arr_pad)           arr_in[l] = '0;
      else if (arr_from_img) arr_in[l] = (l < 3) ? img_q[l] : data_t'(0);
      else                   arr_in[l] = fm_rdata_a[l];
    end
  end

  mme_array #(.MAXW(MAXW), .NW(NW), .WIDTHS(WIDTHS)) u_array (
    .clk, .rst_n, .start(mme_start), .cfg, .in_chunk, .lane_base, .out_limit,
    .in_valid(arr_in_valid), .in_word(arr_in), .psum_word(fm_rdata_b),
    .wts, .params, .out_valid(arr_out_valid), .out_word(arr_out), .out_mask(arr_mask));

  // Both buffers are swapped together and must stay in step.
  a_banks_in_step: assert property (@(posedge clk) disable iff (!rst_n) w_active == p_active);

endmodule
