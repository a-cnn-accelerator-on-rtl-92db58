// mme_array: the array of NUM_MME (4) engines with the routing between them
// and the 128-lane words of the feature-map buffer (lane = channel within a
// group of 128).
// Input routing by mode:
//   depthwise: engine m, slice s <- lane 32m+s (128 channels in parallel)
//   pointwise: every engine <- lanes 32*in_chunk .. +31 (the same 32 input
//              channels; engines differ in their weights, 36 outputs per pass)
//   standard : slice s <- lane s%3 (the three colour channels)
// Output packing: engine output k of engine m has the pass-wide index q:
//   depthwise q = 32m+k, pointwise q = 9m+k (k<9), standard q = 10m+k (k<10);
// it is written to lane lane_base+q (depthwise: lane q) when q < out_limit.
// In pointwise mode psum for output q is read from the same lane.
// Weights: engine m slice s position k uses wts[288m+9s+k]. Parameters: the
// bias, scale and shift of engine output k of engine m are params[32m+k],
// params[128+32m+k] and params[256+32m+k].
// Latency: the engine latency (7 cycles). The array size follows the paper;
// the lane routing and packing are this design's choices.
module mme_array
  import accel_pkg::*;
#(
  parameter int unsigned MAXW = M_MAX,
  parameter int unsigned NW   = NUM_WIDTHS,
  parameter int unsigned WIDTHS [NW] = WIDTHS_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  mme_cfg_t    cfg,
  input  logic [1:0]  in_chunk,
  input  logic [6:0]  lane_base,
  input  logic [7:0]  out_limit,
  input  logic        in_valid,
  input  data_t       in_word   [FM_LANES],
  input  data_t       psum_word [FM_LANES],
  input  data_t       wts       [WSET],
  input  data_t       params    [PSET],
  output logic        out_valid,
  output data_t       out_word  [FM_LANES],
  output logic [FM_LANES-1:0] out_mask
);

  data_t m_in    [NUM_MME][SLICES];
  data_t m_psum  [NUM_MME][PW_OUT];
  data_t m_w     [NUM_MME][SLICES][KK];
  data_t m_bias  [NUM_MME][SLICES];
  data_t m_scale [NUM_MME][SLICES];
  data_t m_shift [NUM_MME][SLICES];
  data_t m_out   [NUM_MME][SLICES];
  logic  [NUM_MME-1:0] m_valid;

  always_comb begin
    for (int m = 0; m < NUM_MME; m++) begin
      for (int s = 0; s < SLICES; s++) begin
        case (cfg.mode)
          MODE_PW:  m_in[m][s] = in_word[32*int'(in_chunk) + s];
          MODE_STD: m_in[m][s] = in_word[s % 3];
          default:  m_in[m][s] = in_word[32*m + s];
        endcase
        for (int k = 0; k < KK; k++) m_w[m][s][k] = wts[W_PER_MME*m + KK*s + k];
        m_bias[m][s]  = params[32*m + s];
        m_scale[m][s] = params[FM_LANES + 32*m + s];
        m_shift[m][s] = params[2*FM_LANES + 32*m + s];
      end
      for (int c = 0; c < PW_OUT; c++)
        m_psum[m][c] = psum_word[(int'(lane_base) + PW_OUT*m + c) % FM_LANES];
    end
  end

  for (genvar m = 0; m < NUM_MME; m++) begin : g_mme
    mme #(.MAXW(MAXW), .NW(NW), .WIDTHS(WIDTHS)) u_mme (
      .clk, .rst_n, .start, .cfg, .in_valid,
      .in_data(m_in[m]), .psum(m_psum[m]), .weight(m_w[m]),
      .bias(m_bias[m]), .scale(m_scale[m]), .shift(m_shift[m]),
      .out_valid(m_valid[m]), .out(m_out[m]));
  end

  assign out_valid = &m_valid;   // all engines run in lock step

  always_comb begin
    for (int l = 0; l < FM_LANES; l++) begin
      out_word[l] = '0;
      out_mask[l] = 1'b0;
    end
    for (int m = 0; m < NUM_MME; m++) begin
      for (int k = 0; k < SLICES; k++) begin
        int q, lane, nk;
        case (cfg.mode)
          MODE_PW:  begin q = PW_OUT*m + k;  nk = PW_OUT;  lane = int'(lane_base) + q; end
          MODE_STD: begin q = STD_OUT*m + k; nk = STD_OUT; lane = int'(lane_base) + q; end
          default:  begin q = SLICES*m + k;  nk = SLICES;  lane = q; end
        endcase
        if (k < nk && q < int'(out_limit) && lane < FM_LANES) begin
          out_word[lane] = m_out[m][k];
          out_mask[lane] = 1'b1;
        end
      end
    end
  end

endmodule
