// pooling_block: the last stage of an engine. Pixels of each output channel
// leave the engine one at a time, so pooling works on runs of S consecutive
// pixels per lane (S = pool_size; S = M*M gives global pooling):
//   average: acc += x * recip, recip = 1/S as unsigned Q1.15, one more
//            multiply-accumulate stage as the paper describes; on the S-th
//            pixel y = sat16(acc >>> 15)
//   max    : one more comparison stage, y = max of the S pixels
//   none   : y = x
// out_valid is high for one cycle after every S-th input (every input when
// pooling is off). start clears the run counter. One register stage.
// Pooling over consecutive pixels follows the paper's description; the Q1.15
// reciprocal and the run-based window are this design's choices.
module pooling_block
  import accel_pkg::*;
#(
  parameter int unsigned LANES = SLICES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  pool_mode_t  mode,
  input  logic [15:0] size,
  input  logic [15:0] recip,
  input  logic        in_valid,
  input  data_t       x [LANES],
  output logic        out_valid,
  output data_t       y [LANES]
);
  acc_t        acc [LANES];
  logic [15:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      out_valid <= 1'b0;
      for (int l = 0; l < LANES; l++) begin acc[l] <= '0; y[l] <= '0; end
    end else if (start) begin
      cnt <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (mode == POOL_NONE) begin
          out_valid <= 1'b1;
          y <= x;
        end else begin
          logic last;
          last = (cnt == size - 16'd1);
          cnt  <= last ? 16'd0 : cnt + 16'd1;
          out_valid <= last;
          for (int l = 0; l < LANES; l++) begin
            acc_t nxt;
            if (mode == POOL_AVG)
              nxt = ((cnt == 16'd0) ? acc_t'(0) : acc[l]) + acc_t'(x[l]) * acc_t'({1'b0, recip});
            else
              nxt = (cnt == 16'd0 || acc_t'(x[l]) > acc[l]) ? acc_t'(x[l]) : acc[l];
            acc[l] <= nxt;
            if (last) y[l] <= (mode == POOL_AVG) ? sat16(nxt >>> 15) : data_t'(nxt);
          end
        end
      end
    end
  end
endmodule
