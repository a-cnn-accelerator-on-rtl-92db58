// tb_mme_array: the four-engine array (line buffers shortened to 8) runs a
// depthwise pass over 128-lane words with only 70 valid channels, a
// pointwise pass reading input slice 2 (lanes 64..95), writing 28 outputs
// from lane 100 and adding partial sums read from those lanes, and a
// standard pass on lanes 0..2. Every output word is compared lane by lane,
// mask included, with the convolution computed in the testbench from the
// documented weight and parameter layout.
module tb_mme_array;
  import accel_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned MAXW = 8;
  localparam int unsigned WL [NUM_WIDTHS] = '{8, 6, 5, 5, 5, 5};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, in_valid, out_valid;
  mme_cfg_t cfg;
  logic [1:0] in_chunk;
  logic [6:0] lane_base;
  logic [7:0] out_limit;
  data_t in_word [FM_LANES];
  data_t psum_word [FM_LANES];
  data_t wts [WSET];
  data_t params [PSET];
  data_t out_word [FM_LANES];
  logic [FM_LANES-1:0] out_mask;
  int checks = 0, failures = 0;

  mme_array #(.MAXW(MAXW), .WIDTHS(WL)) dut (.*);

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int img [FM_LANES][64];
  int ps [FM_LANES][64];
  int M;
  int got [64][FM_LANES];
  logic [FM_LANES-1:0] gmask [64];
  int ngot;
  always @(negedge clk) if (rst_n && out_valid) begin
    for (int l = 0; l < FM_LANES; l++) got[ngot][l] = int'(out_word[l]);
    gmask[ngot] = out_mask;
    ngot++;
  end

  function automatic int px(int l, int r, int c);
    if (r < 0 || c < 0 || r >= M || c >= M) return 0;
    return img[l][r*M + c];
  endfunction

  task automatic run(conv_mode_t md, int m, int chunk, int lb, int lim, bit pe);
    int npush, nk;
    @(negedge clk);
    M = m;
    cfg = '0; cfg.mode = md; cfg.width = MW'(m); cfg.psum_en = pe; cfg.norm_en = 1;
    cfg.relu = RELU_NONE; cfg.pool = POOL_NONE; cfg.pool_size = 1; cfg.pool_recip = 16'h8000;
    in_chunk = 2'(chunk); lane_base = 7'(lb); out_limit = 8'(lim);
    for (int i = 0; i < WSET; i++) wts[i] = data_t'($urandom_range(0, 512) - 256);
    for (int i = 0; i < FM_LANES; i++) begin
      params[i] = data_t'($urandom_range(0, 512) - 256);
      params[FM_LANES + i] = data_t'($urandom_range(0, 512));
      params[2*FM_LANES + i] = data_t'($urandom_range(0, 256) - 128);
    end
    for (int l = 0; l < FM_LANES; l++) for (int i = 0; i < m*m; i++) begin
      img[l][i] = $urandom_range(0, 2048) - 1024;
      ps[l][i] = $urandom_range(0, 2048) - 1024;
    end
    start = 1;
    @(negedge clk);
    start = 0;
    ngot = 0;
    npush = (md == MODE_PW) ? m*m : m*m + m + 1;
    for (int n = 0; n < npush; n++) begin
      in_valid = 1;
      for (int l = 0; l < FM_LANES; l++) begin
        in_word[l] = (n < m*m) ? data_t'(img[l][n]) : data_t'(0);
        psum_word[l] = (n < m*m) ? data_t'(ps[l][n]) : data_t'(0);
      end
      @(negedge clk);
    end
    in_valid = 0;
    repeat (12) @(negedge clk);
    checks++;
    if (ngot != m*m) begin failures++; $display("mode %0d: %0d outputs, exp %0d", md, ngot, m*m); end
    nk = (md == MODE_DW) ? 32 : (md == MODE_PW ? 9 : 10);
    for (int o = 0; o < ngot && o < m*m; o++) begin
      int r, c;
      logic [FM_LANES-1:0] emask;
      r = o / m; c = o % m;
      emask = '0;
      for (int mm = 0; mm < NUM_MME; mm++) for (int k = 0; k < nk; k++) begin
        int q, lane, v;
        longint acc;
        q = nk * mm + k;
        lane = (md == MODE_DW) ? q : lb + q;
        if (q >= lim || lane >= FM_LANES) continue;
        emask[lane] = 1'b1;
        case (md)
          MODE_DW: begin
            acc = longint'(params[32*mm + k]) * 256;
            for (int t = 0; t < KK; t++) acc += longint'(px(q, r + t/3 - 1, c + t%3 - 1)) * longint'(wts[288*mm + 9*k + t]);
          end
          MODE_STD: begin
            acc = longint'(params[32*mm + k]) * 256;
            for (int ch = 0; ch < 3; ch++)
              for (int t = 0; t < KK; t++) acc += longint'(px(ch, r + t/3 - 1, c + t%3 - 1)) * longint'(wts[288*mm + 9*(3*k + ch) + t]);
          end
          default: begin
            acc = longint'(pe ? ps[lane][o] : int'(params[32*mm + k])) * 256;
            for (int s = 0; s < 32; s++) acc += longint'(img[32*chunk + s][o]) * longint'(wts[288*mm + 9*s + k]);
          end
        endcase
        v = post(sat(acc >>> 8), 1, params[FM_LANES + 32*mm + k], params[2*FM_LANES + 32*mm + k], 0);
        checks++;
        if (got[o][lane] != v) begin
          failures++;
          if (failures < 10) $display("mode %0d pixel %0d lane %0d got %0d exp %0d", md, o, lane, got[o][lane], v);
        end
      end
      checks++;
      if (gmask[o] != emask) begin failures++; $display("mode %0d pixel %0d mask %h exp %h", md, o, gmask[o], emask); end
    end
  endtask

  initial begin
    start = 0; in_valid = 0; cfg = '0; cfg.width = 5; cfg.pool_size = 1;
    in_chunk = 0; lane_base = 0; out_limit = 0;
    for (int l = 0; l < FM_LANES; l++) begin in_word[l] = 0; psum_word[l] = 0; end
    for (int i = 0; i < WSET; i++) wts[i] = 0;
    for (int i = 0; i < PSET; i++) params[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(MODE_DW, 6, 0, 0, 70, 0);
    run(MODE_PW, 5, 2, 100, 36, 1);
    run(MODE_PW, 5, 1, 36, 36, 0);
    run(MODE_STD, 5, 0, 0, 40, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
