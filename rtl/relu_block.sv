// relu_block: the selectable activation stage after normalization. Three
// options as in the paper: no ReLU (pass), standard ReLU max(x,0) and ReLU6
// min(max(x,0),6.0), where 6.0 is 6 << FRAC. One register stage.
module relu_block
  import accel_pkg::*;
#(
  parameter int unsigned LANES = SLICES
) (
  input  logic       clk,
  input  logic       rst_n,
  input  relu_mode_t mode,
  input  logic       in_valid,
  input  data_t      x [LANES],
  output logic       out_valid,
  output data_t      y [LANES]
);
  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      case (mode)
        RELU_STD: y[l] <= (x[l] < 0) ? data_t'(0) : x[l];
        RELU_6:   y[l] <= (x[l] < 0) ? data_t'(0) : ((x[l] > RELU6_MAX) ? RELU6_MAX : x[l]);
        default:  y[l] <= x[l];
      endcase
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
