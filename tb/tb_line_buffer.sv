// tb_line_buffer: random maps of two widths from the supported list are
// pushed through the line buffer in depthwise mode with stride 1 and 2, and
// in pointwise mode. Every window is compared with the zero-padded 3x3
// neighbourhood of its centre taken from the testbench's copy of the map;
// the testbench also checks the number of windows (M*M, or ceil(M/2)^2 with
// stride 2), their raster order, and that each appears one cycle after the
// push that completes it. Pushes have random gaps.
module tb_line_buffer;
  import accel_pkg::*;
  localparam int unsigned L = 3;
  localparam int unsigned MAXW = 9;
  localparam int unsigned NW = 3;
  localparam int unsigned WL [NW] = '{9, 6, 5};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, stride2, in_valid, win_valid;
  conv_mode_t mode;
  logic [MW-1:0] width;
  data_t in_data [L];
  data_t win [L][KK];
  int checks = 0, failures = 0;

  line_buffer #(.LANES(L), .MAXW(MAXW), .NW(NW), .WIDTHS(WL)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int img [L][MAXW*MAXW];
  int M, nwin, exp_r, exp_c, pushes_done;
  logic expect_next;

  function automatic int pix(int l, int r, int c);
    if (r < 0 || c < 0 || r >= M || c >= M) return 0;
    return img[l][r*M + c];
  endfunction

  // Expectation registered at the push edge, checked half a cycle later.
  logic exp_q;
  int er_q, ec_q;
  always @(posedge clk) begin
    exp_q <= expect_next && in_valid;
    er_q  <= exp_r;
    ec_q  <= exp_c;
  end

  // Checker: a window must appear exactly when expected.
  always @(negedge clk) begin
    if (rst_n) begin
      if (win_valid != exp_q) begin
        checks++; failures++;
        $display("win_valid=%0d expected %0d (r=%0d c=%0d)", win_valid, exp_q, er_q, ec_q);
      end
      if (win_valid) begin
        for (int l = 0; l < L; l++)
          for (int k = 0; k < KK; k++) begin
            int e;
            e = (mode == MODE_PW) ? pix(l, er_q, ec_q) : pix(l, er_q + k/3 - 1, ec_q + k%3 - 1);
            checks++;
            if (int'(win[l][k]) != e) begin
              failures++;
              if (failures < 10) $display("M=%0d r=%0d c=%0d l=%0d k=%0d got %0d exp %0d", M, er_q, ec_q, l, k, win[l][k], e);
            end
          end
        nwin++;
      end
    end
  end

  task automatic run(conv_mode_t md, int m, logic s2);
    int npush, step_c;
    @(negedge clk);
    mode = md; M = m; width = MW'(m); stride2 = s2;
    for (int l = 0; l < L; l++) for (int i = 0; i < m*m; i++) img[l][i] = int'(data_t'($urandom));
    start = 1; expect_next = 0;
    @(negedge clk);
    start = 0;
    nwin = 0;
    npush = (md == MODE_PW) ? m*m : m*m + m + 1;
    for (int n = 0; n < npush; n++) begin
      int centre;
      while ($urandom_range(0, 3) == 0) begin in_valid = 0; expect_next = 0; @(negedge clk); end
      in_valid = 1;
      for (int l = 0; l < L; l++) in_data[l] = (n < m*m) ? data_t'(img[l][n]) : data_t'(0);
      centre = (md == MODE_PW) ? n : n - m - 1;
      expect_next = 0;
      if (centre >= 0 && centre < m*m) begin
        exp_r = centre / m; exp_c = centre % m;
        expect_next = (md == MODE_PW) || !s2 || (exp_r % 2 == 0 && exp_c % 2 == 0);
      end
      @(negedge clk);
      in_valid = 0;
      expect_next = 0;
    end
    @(negedge clk);
    checks++;
    step_c = s2 ? (m + 1) / 2 : m;
    if (nwin != step_c * step_c) begin
      failures++;
      $display("M=%0d s2=%0d: %0d windows, expected %0d", m, s2, nwin, step_c * step_c);
    end
  endtask

  initial begin
    start = 0; in_valid = 0; mode = MODE_DW; width = 5; stride2 = 0; expect_next = 0; M = 5;
    for (int l = 0; l < L; l++) in_data[l] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(MODE_DW, 5, 0);
    run(MODE_DW, 6, 0);
    run(MODE_DW, 9, 0);
    run(MODE_DW, 5, 1);
    run(MODE_DW, 6, 1);
    run(MODE_STD, 6, 1);
    run(MODE_PW, 6, 0);
    run(MODE_DW, 5, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
