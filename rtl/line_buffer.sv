// line_buffer: the 32-slice line buffer at the front of a matrix
// multiplication engine. Each slice is a chain of (K-1)*M_MAX+K registers
// split into three rows: two rows of M_MAX registers and a last row of 3.
// The input of rows 1 and 2 is taken from the end of the previous row through
// a multiplexer whose inputs are the taps at the supported map widths
// (WIDTHS), so the working length (K-1)*M+K follows the width M chosen for
// the pass, as in the paper's line-buffer figure. The first three registers
// of each row form the 3x3 window.
//
// Depthwise and standard modes: a window is reported once its centre pixel
// has all of its neighbours in the chain, i.e. M+1 pushes after the centre
// entered. Neighbours outside the map are forced to zero (zero padding of 1),
// and with stride2 only windows centred on even rows and columns are
// reported. A pass therefore pushes M*M pixels followed by M+1 flush pixels.
// Pointwise mode: every pushed pixel is reported at once, copied to all 9
// window positions (a 1x1 window), one output per push.
//
// Timing: win_valid rises the cycle after the push that completes the window
// and win[] is valid in that cycle. start clears the position counters.
// Zero padding, the flush and the pointwise broadcast are this design's
// choices; the paper gives the register chain, the row multiplexers and the
// length formula.
module line_buffer
  import accel_pkg::*;
#(
  parameter int unsigned LANES = SLICES,
  parameter int unsigned MAXW  = M_MAX,
  parameter int unsigned NW    = NUM_WIDTHS,
  parameter int unsigned WIDTHS [NW] = WIDTHS_DEF
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  conv_mode_t    mode,
  input  logic [MW-1:0] width,
  input  logic          stride2,
  input  logic          in_valid,
  input  data_t         in_data [LANES],
  output logic          win_valid,
  output data_t         win [LANES][KK]
);

  data_t row0 [LANES][MAXW];
  data_t row1 [LANES][MAXW];
  data_t row2 [LANES][3];
  data_t tap0 [LANES];
  data_t tap1 [LANES];

  logic [16:0]   cnt;           // pushes since start
  logic [MW-1:0] crow, ccol;    // centre of the next window
  logic [MW-1:0] qrow, qcol;    // centre of the reported window
  logic          q_pw;

  // Row multiplexers: take the previous row's output at the selected width.
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      tap0[l] = row0[l][MAXW-1];
      tap1[l] = row1[l][MAXW-1];
      for (int i = 0; i < NW; i++) begin
        if (width == MW'(WIDTHS[i])) begin
          tap0[l] = row0[l][WIDTHS[i]-1];
          tap1[l] = row1[l][WIDTHS[i]-1];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int l = 0; l < LANES; l++) begin
        row0[l][0] <= in_data[l];
        row1[l][0] <= tap0[l];
        row2[l][0] <= tap1[l];
        for (int j = 1; j < MAXW; j++) begin
          row0[l][j] <= row0[l][j-1];
          row1[l][j] <= row1[l][j-1];
        end
        for (int j = 1; j < 3; j++) row2[l][j] <= row2[l][j-1];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; crow <= '0; ccol <= '0; qrow <= '0; qcol <= '0;
      win_valid <= 1'b0; q_pw <= 1'b0;
    end else if (start) begin
      cnt <= '0; crow <= '0; ccol <= '0;
      win_valid <= 1'b0;
    end else begin
      win_valid <= 1'b0;
      if (in_valid) begin
        cnt <= cnt + 17'd1;
        q_pw <= (mode == MODE_PW);
        if (mode == MODE_PW) begin
          win_valid <= 1'b1;
        end else if (cnt >= 17'(width) + 17'd1 && crow < width) begin
          win_valid <= !stride2 || (!crow[0] && !ccol[0]);
          qrow <= crow;
          qcol <= ccol;
          if (ccol == width - MW'(1)) begin
            ccol <= '0;
            crow <= crow + MW'(1);
          end else begin
            ccol <= ccol + MW'(1);
          end
        end
      end
    end
  end

  // Window k = ky*3+kx (ky, kx = 0 top/left) sits at row 2-ky, column 2-kx.
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      for (int ky = 0; ky < 3; ky++) begin
        for (int kx = 0; kx < 3; kx++) begin
          logic outside;
          data_t v;
          case (ky)
            0:       v = row2[l][2-kx];
            1:       v = row1[l][2-kx];
            default: v = row0[l][2-kx];
          endcase
          outside = (ky == 0 && qrow == '0) || (ky == 2 && qrow == width - MW'(1)) ||
                    (kx == 0 && qcol == '0) || (kx == 2 && qcol == width - MW'(1));
          if (q_pw)         win[l][ky*3+kx] = row0[l][0];
          else if (outside) win[l][ky*3+kx] = '0;
          else              win[l][ky*3+kx] = v;
        end
      end
    end
  end

endmodule
