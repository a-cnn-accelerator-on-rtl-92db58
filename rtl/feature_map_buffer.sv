// feature_map_buffer: on-chip store of the intermediate feature maps. DEPTH
// words of LANES 16-bit channels each; the default 12544 x 128 x 16 bit is
// the paper's 24.5 Mb (exactly one 112x112 map of 128 channels). A map of C
// channels and N pixels occupies ceil(C/128) groups of N consecutive words.
// One write port with a per-lane write mask and two read ports, both with one
// cycle of latency: port A feeds the engines, port B returns pointwise
// partial sums. Each lane is its own memory array, as block RAMs would be.
// The two read ports and the mask are this design's choices.
module feature_map_buffer
  import accel_pkg::*;
#(
  parameter int unsigned DEPTH = FMB_DEPTH,
  parameter int unsigned LANES = FM_LANES,
  parameter int unsigned AW    = FMB_AW
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  data_t            wdata [LANES],
  input  logic [LANES-1:0] wmask,
  input  logic             re_a,
  input  logic [AW-1:0]    raddr_a,
  output data_t            rdata_a [LANES],
  input  logic             re_b,
  input  logic [AW-1:0]    raddr_b,
  output data_t            rdata_b [LANES]
);
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    data_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we && wmask[l] && int'(waddr) < DEPTH) mem[waddr] <= wdata[l];
      if (re_a) rdata_a[l] <= mem[raddr_a];
      if (re_b) rdata_b[l] <= mem[raddr_b];
    end
  end
endmodule
