// tb_mme: one engine (32 slices, line buffer shortened to 8 with widths 8,
// 6, 5) runs complete passes in every mode: depthwise with stride 1 and 2,
// standard convolution of a 3-channel map, pointwise with bias and with
// partial sums, combined with normalization, ReLU, ReLU6, average and max
// pooling. Random maps and weights; every output is compared with the
// convolution computed in the testbench, the output count is checked, and
// the latency of 7 cycles from push to output is checked in pointwise mode.
module tb_mme;
  import accel_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned MAXW = 8;
  localparam int unsigned NW = 3;
  localparam int unsigned WL [NW] = '{8, 6, 5};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, in_valid, out_valid;
  mme_cfg_t cfg;
  data_t in_data [SLICES];
  data_t psum [PW_OUT];
  data_t weight [SLICES][KK];
  data_t bias [SLICES];
  data_t scale [SLICES];
  data_t shift [SLICES];
  data_t out [SLICES];
  int checks = 0, failures = 0;

  mme #(.MAXW(MAXW), .NW(NW), .WIDTHS(WL)) dut (.*);

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int img [SLICES][64];
  int ps [PW_OUT][64];
  int M;
  int got [1024][SLICES];
  int ngot;
  int cyc, first_push_cyc, first_out_cyc;

  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n && out_valid) begin
    for (int k = 0; k < SLICES; k++) got[ngot][k] = int'(out[k]);
    if (ngot == 0) first_out_cyc = cyc;
    ngot++;
  end

  function automatic int px(int l, int r, int c);
    if (r < 0 || c < 0 || r >= M || c >= M) return 0;
    return img[l][r*M + c];
  endfunction

  task automatic run(conv_mode_t md, int m, bit s2, bit pe, bit ne, relu_mode_t rl, pool_mode_t pm, int S, bit gaps);
    int nout, side, npush;
    int exp_pix [$][SLICES];
    @(negedge clk);
    M = m;
    cfg.mode = md; cfg.width = MW'(m); cfg.stride2 = s2; cfg.psum_en = pe; cfg.norm_en = ne;
    cfg.relu = rl; cfg.pool = pm; cfg.pool_size = 16'(S); cfg.pool_recip = 16'(32768 / S);
    for (int s = 0; s < SLICES; s++) begin
      for (int k = 0; k < KK; k++) weight[s][k] = data_t'($urandom_range(0, 512) - 256);
      bias[s] = data_t'($urandom_range(0, 1024) - 512);
      scale[s] = data_t'($urandom_range(0, 512));
      shift[s] = data_t'($urandom_range(0, 512) - 256);
      for (int i = 0; i < m*m; i++) img[s][i] = $urandom_range(0, 2048) - 1024;
    end
    for (int c = 0; c < PW_OUT; c++) for (int i = 0; i < m*m; i++) ps[c][i] = $urandom_range(0, 4096) - 2048;
    // reference, in output raster order
    side = (md != MODE_PW && s2) ? (m + 1) / 2 : m;
    for (int r = 0; r < m; r++) for (int c = 0; c < m; c++) begin
      int v [SLICES];
      if (md != MODE_PW && s2 && (r % 2 != 0 || c % 2 != 0)) continue;
      for (int k = 0; k < SLICES; k++) v[k] = 0;
      case (md)
        MODE_DW: for (int k = 0; k < SLICES; k++) begin
          longint acc;
          acc = longint'(bias[k]) * 256;
          for (int q = 0; q < KK; q++) acc += longint'(px(k, r + q/3 - 1, c + q%3 - 1)) * longint'(weight[k][q]);
          v[k] = post(sat(acc >>> 8), ne, scale[k], shift[k], int'(rl));
        end
        MODE_STD: for (int j = 0; j < 10; j++) begin
          longint acc;
          acc = longint'(bias[j]) * 256;
          for (int i = 0; i < 3; i++)
            for (int q = 0; q < KK; q++) acc += longint'(px(i, r + q/3 - 1, c + q%3 - 1)) * longint'(weight[3*j+i][q]);
          v[j] = post(sat(acc >>> 8), ne, scale[j], shift[j], int'(rl));
        end
        default: for (int j = 0; j < PW_OUT; j++) begin
          longint acc;
          acc = longint'(pe ? ps[j][r*m+c] : int'(bias[j])) * 256;
          for (int s = 0; s < SLICES; s++) acc += longint'(img[s][r*m+c]) * longint'(weight[s][j]);
          v[j] = post(sat(acc >>> 8), ne, scale[j], shift[j], int'(rl));
        end
      endcase
      exp_pix.push_back(v);
    end
    nout = (pm == POOL_NONE) ? side * side : side * side / S;
    start = 1;
    @(negedge clk);
    start = 0;
    ngot = 0;
    npush = (md == MODE_PW) ? m*m : m*m + m + 1;
    for (int n = 0; n < npush; n++) begin
      while (gaps && $urandom_range(0, 4) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1;
      if (n == 0) first_push_cyc = cyc;
      // in standard mode the array routes channel s%3 to slice s
      for (int s = 0; s < SLICES; s++) in_data[s] = (n < m*m) ? data_t'(img[(md == MODE_STD) ? s % 3 : s][n]) : data_t'(0);
      for (int c = 0; c < PW_OUT; c++) psum[c] = (n < m*m) ? data_t'(ps[c][n]) : data_t'(0);
      @(negedge clk);
    end
    in_valid = 0;
    repeat (12) @(negedge clk);
    checks++;
    if (ngot != nout) begin failures++; $display("mode %0d M %0d: %0d outputs, expected %0d", md, m, ngot, nout); end
    if (md == MODE_PW && !gaps) begin
      checks++;
      if (first_out_cyc - first_push_cyc != 7) begin
        failures++; $display("latency %0d, expected 7", first_out_cyc - first_push_cyc);
      end
    end
    for (int o = 0; o < ngot && o < nout; o++) begin
      int nk;
      nk = (md == MODE_DW) ? SLICES : (md == MODE_STD ? 10 : PW_OUT);
      for (int k = 0; k < nk; k++) begin
        int e;
        if (pm == POOL_NONE) e = exp_pix[o][k];
        else begin
          int run_v [$];
          for (int i = 0; i < S; i++) run_v.push_back(exp_pix[o*S + i][k]);
          e = pool_run(run_v, int'(pm), 32768 / S);
        end
        checks++;
        if (got[o][k] != e) begin
          failures++;
          if (failures < 10) $display("mode %0d M %0d out %0d ch %0d: got %0d exp %0d", md, m, o, k, got[o][k], e);
        end
      end
    end
  endtask

  initial begin
    start = 0; in_valid = 0; cfg = '0; cfg.width = 5; cfg.pool_size = 1;
    for (int s = 0; s < SLICES; s++) begin
      in_data[s] = 0; bias[s] = 0; scale[s] = 0; shift[s] = 0;
      for (int k = 0; k < KK; k++) weight[s][k] = 0;
    end
    for (int c = 0; c < PW_OUT; c++) psum[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(MODE_DW, 5, 0, 0, 0, RELU_NONE, POOL_NONE, 1, 0);
    run(MODE_DW, 6, 1, 0, 1, RELU_6, POOL_NONE, 1, 1);
    run(MODE_DW, 8, 0, 0, 1, RELU_STD, POOL_MAX, 4, 1);
    run(MODE_STD, 8, 1, 0, 1, RELU_6, POOL_NONE, 1, 0);
    run(MODE_STD, 6, 0, 0, 0, RELU_NONE, POOL_AVG, 36, 1);
    run(MODE_PW, 5, 0, 0, 0, RELU_NONE, POOL_NONE, 1, 0);
    run(MODE_PW, 6, 0, 1, 1, RELU_6, POOL_NONE, 1, 0);
    run(MODE_PW, 5, 0, 1, 1, RELU_STD, POOL_AVG, 25, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
