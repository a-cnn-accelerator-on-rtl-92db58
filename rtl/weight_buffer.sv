// weight_buffer: ping-pong register buffer between external memory and the
// multiplier arrays. Two banks of DEPTH 16-bit words; while the active bank
// drives all DEPTH words in parallel (rd_data) to the engines, the other bank
// is filled from the load stream, and swap exchanges their roles.
// With DEPTH = 1152 (4 engines x 32 slices x 9 weights) the two banks hold
// 36 Kb, the size the paper gives; the same module with DEPTH = 384 holds the
// bias, scale and shift registers of the array.
// Load stream: ld_valid/ld_ready handshake, BEAT words per beat, filled in
// word order; after DEPTH/BEAT beats the load bank is full (load_full) and
// ld_ready drops. swap is honoured only when load_full: the full bank becomes
// active and the old active bank becomes the (empty) load bank.
// Built from registers, not RAM, as the paper's resource table (no RAM
// blocks for the weight buffer) suggests. The stream format is this design's
// choice.
module weight_buffer
  import accel_pkg::*;
#(
  parameter int unsigned DEPTH = WSET,
  parameter int unsigned BEAT  = LOAD_BEAT
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  ld_valid,
  output logic  ld_ready,
  input  data_t ld_data [BEAT],
  output logic  load_full,
  input  logic  swap,
  output logic  active_bank,
  output data_t rd_data [DEPTH]
);
  localparam int unsigned NBEATS = DEPTH / BEAT;
  localparam int unsigned BW = $clog2(NBEATS + 1);

  data_t bank [2][DEPTH];
  logic [BW-1:0] beat;

  assign load_full = (beat == BW'(NBEATS));
  assign ld_ready  = !load_full;

  always_ff @(posedge clk) begin
    if (ld_valid && ld_ready)
      for (int i = 0; i < BEAT; i++)
        bank[!active_bank][int'(beat)*BEAT + i] <= ld_data[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat <= '0;
      active_bank <= 1'b0;
    end else if (swap && load_full) begin
      active_bank <= !active_bank;
      beat <= '0;
    end else if (ld_valid && ld_ready) begin
      beat <= beat + BW'(1);
    end
  end

  always_comb
    for (int i = 0; i < DEPTH; i++) rd_data[i] = bank[active_bank][i];

  // A swap request must find a complete bank.
  a_swap_full: assert property (@(posedge clk) disable iff (!rst_n) swap |-> load_full);

endmodule
