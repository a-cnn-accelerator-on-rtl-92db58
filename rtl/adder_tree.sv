// adder_tree: the configurable adder tree of one engine. It sums the 32x9
// products of the multiplier array in one of three ways and adds the bias:
//   depthwise: out[s] = sum_k p[s][k] + bias[s]               (32 outputs)
//   standard : out[j] = sum_{s=3j..3j+2} sum_k p[s][k] + bias[j] (10 outputs,
//              three slices hold the three input channels of one kernel)
//   pointwise: out[c] = sum_s p[s][c] + (psum_en ? psum[c] : bias[c])
//              (9 outputs; psum is the running sum of earlier 32-channel
//              slices of the input, the paper's divide-and-conquer)
// Sums are kept at 2*FRAC fractional bits; bias and psum are aligned by a
// shift of FRAC, the result is shifted back by FRAC and saturated to 16 bits.
// Built from 8-input trees as in the paper's figure: in pointwise mode four
// 8-input trees per output cover the 32 slices and are added pairwise; in
// depthwise mode one 8-input tree per slice covers products 0..7 and the
// ninth product is added in the second stage. Two register stages: out_valid
// follows in_valid by two cycles.
// The paper gives the 8-input trees, the mode multiplexer and that biases are
// added here. Which adder is used in which mode is drawn in colour in the
// figure and does not match the sums the text asks for, so the sums follow
// the text. The standard-convolution grouping and psum input are this
// design's own.
module adder_tree
  import accel_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  conv_mode_t mode,
  input  logic       psum_en,
  input  logic       in_valid,
  input  prod_t      p    [SLICES][KK],
  input  data_t      bias [SLICES],
  input  data_t      psum [PW_OUT],
  output logic       out_valid,
  output data_t      out  [SLICES]
);

  // Stage 1: 8-input trees.
  prod_t pw_in [PW_OUT][4][8];
  prod_t dw_in [SLICES][8];
  acc_t  pw_part [PW_OUT][4];
  acc_t  dw_part [SLICES];

  always_comb begin
    for (int c = 0; c < PW_OUT; c++)
      for (int t = 0; t < 4; t++)
        for (int i = 0; i < 8; i++)
          pw_in[c][t][i] = p[8*t+i][c];
    for (int s = 0; s < SLICES; s++)
      for (int i = 0; i < 8; i++)
        dw_in[s][i] = p[s][i];
  end

  for (genvar c = 0; c < PW_OUT; c++) begin : g_pw
    for (genvar t = 0; t < 4; t++) begin : g_t
      adder_tree8 u_tree (.a(pw_in[c][t]), .sum(pw_part[c][t]));
    end
  end
  for (genvar s = 0; s < SLICES; s++) begin : g_dw
    adder_tree8 u_tree (.a(dw_in[s]), .sum(dw_part[s]));
  end

  acc_t  pw_q [PW_OUT][4];
  acc_t  dw_q [SLICES];
  prod_t p8_q [SLICES];
  data_t bias_q [SLICES];
  data_t psum_q [PW_OUT];
  conv_mode_t mode_q;
  logic  psum_en_q;
  logic  v1;

  always_ff @(posedge clk) begin
    pw_q   <= pw_part;
    dw_q   <= dw_part;
    for (int s = 0; s < SLICES; s++) p8_q[s] <= p[s][8];
    bias_q <= bias;
    psum_q <= psum;
    mode_q <= mode;
    psum_en_q <= psum_en;
  end

  // Stage 2: mode-dependent combination, bias, rounding.
  acc_t full [SLICES];
  always_comb begin
    for (int s = 0; s < SLICES; s++) full[s] = '0;
    case (mode_q)
      MODE_PW: begin
        for (int c = 0; c < PW_OUT; c++) begin
          data_t addend;
          addend  = psum_en_q ? psum_q[c] : bias_q[c];
          full[c] = (pw_q[c][0] + pw_q[c][1]) + (pw_q[c][2] + pw_q[c][3])
                    + (acc_t'(addend) <<< FRAC);
        end
      end
      MODE_STD: begin
        for (int j = 0; j < STD_OUT; j++) begin
          full[j] = acc_t'(bias_q[j]) <<< FRAC;
          for (int i = 0; i < 3; i++)
            full[j] = full[j] + dw_q[3*j+i] + acc_t'(p8_q[3*j+i]);
        end
      end
      default: begin
        for (int s = 0; s < SLICES; s++)
          full[s] = dw_q[s] + acc_t'(p8_q[s]) + (acc_t'(bias_q[s]) <<< FRAC);
      end
    endcase
  end

  always_ff @(posedge clk) begin
    for (int s = 0; s < SLICES; s++) out[s] <= sat16(full[s] >>> FRAC);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin v1 <= 1'b0; out_valid <= 1'b0; end
    else begin v1 <= in_valid; out_valid <= v1; end
  end

endmodule
