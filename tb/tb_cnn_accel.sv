// tb_cnn_accel: end-to-end test of the accelerator with every parameter at
// its default (line buffers for widths up to 224, 4 engines, 24.5 Mb feature
// map buffer). A small network is run layer by layer, each layer started by
// a command and fed by a weight stream that the testbench packs from random
// per-layer weights in the documented pass order:
//   L1 standard 3x3, 14x14x3 image -> 7x7x40, stride 2, Norm, ReLU6
//   L2 depthwise 7x7x40, stride 1, Norm, ReLU6
//   L3 pointwise 7x7, 40 -> 150 channels (5 output blocks x 2 input slices,
//      partial sums through the buffer), Norm, ReLU6
//   L4 depthwise 7x7x150 -> 4x4x150, stride 2 (two 128-channel groups), ReLU
//   L5 pointwise 7x7, 40 -> 20 with global 7x7 average pooling
//   L6 depthwise 7x7x40 with max pooling over runs of 7 pixels, ReLU
// After each layer the output region is read back through the host port and
// compared with a model computed in the testbench from the layer's math.
// The image stream and the weight stream have random gaps, so image stalls
// and waits for weights occur; the testbench counts passes, partial-sum
// passes, weight waits, image stalls, stride-2 layers, both pooling modes
// and multi-group layers, and fails any that never happened.
module tb_cnn_accel;
  import accel_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  layer_t layer;
  logic [FMB_AW-1:0] dst_stride;
  logic wt_valid, wt_ready, img_valid, img_ready;
  data_t wt_data [LOAD_BEAT];
  data_t img_data [3];
  logic host_we, host_re;
  logic [FMB_AW-1:0] host_waddr, host_raddr;
  data_t host_wdata [FM_LANES];
  logic [FM_LANES-1:0] host_wmask;
  data_t host_rdata [FM_LANES];
  logic [31:0] stat_wait_cycles, stat_img_stalls, stat_passes, stat_psum_passes;

  cnn_accel dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference state ----------------
  int fm [int][FM_LANES];           // model of the feature map buffer (sparse)
  int img [14*14][3];
  int wk [256][256];                // pointwise w[o][i] / depthwise w[c][k] / standard w[o][3*ch+k]
  int bias_v [256], scale_v [256], shift_v [256];

  // weight stream: beats in an array, sent by the streamer process
  data_t beats [8192][LOAD_BEAT];
  int nbeats = 0, bptr = 0;

  task automatic push_set(data_t wv [WSET], data_t pv [PSET]);
    for (int b = 0; b < WSET / LOAD_BEAT; b++) begin
      for (int i = 0; i < LOAD_BEAT; i++) beats[nbeats][i] = wv[b*LOAD_BEAT + i];
      nbeats++;
    end
    for (int b = 0; b < PSET / LOAD_BEAT; b++) begin
      for (int i = 0; i < LOAD_BEAT; i++) beats[nbeats][i] = pv[b*LOAD_BEAT + i];
      nbeats++;
    end
  endtask

  // handshakes are counted at the clock edge that takes them
  always @(posedge clk) if (rst_n && wt_valid && wt_ready) bptr <= bptr + 1;
  always @(posedge clk) if (rst_n && img_valid && img_ready) iptr <= iptr + 1;

  always @(negedge clk) begin
    if (rst_n) begin
      wt_valid = (bptr < nbeats) && ($urandom_range(0, 3) != 0);
      if (bptr < nbeats) for (int i = 0; i < LOAD_BEAT; i++) wt_data[i] = beats[bptr][i];
    end
  end

  // image stream
  int iptr = 0, img_n = 0;
  always @(negedge clk) begin
    if (rst_n) begin
      img_valid = (iptr < img_n) && ($urandom_range(0, 4) != 0);
      for (int c = 0; c < 3; c++) img_data[c] = (iptr < img_n) ? data_t'(img[iptr][c]) : data_t'(0);
    end
  end

  function automatic int rd(int addr, int lane);
    if (fm.exists(addr)) return fm[addr][lane];
    return 0;
  endfunction

  // ---------------- per-layer packing and model ----------------
  function automatic void set_params(ref data_t pv [PSET], input int m, input int k, input int o);
    pv[32*m + k]       = data_t'(bias_v[o]);
    pv[128 + 32*m + k] = data_t'(scale_v[o]);
    pv[256 + 32*m + k] = data_t'(shift_v[o]);
  endfunction

  task automatic rand_weights(int no, int ni);
    for (int o = 0; o < no; o++) begin
      for (int i = 0; i < ni; i++) wk[o][i] = $urandom_range(0, 160) - 80;
      bias_v[o] = $urandom_range(0, 256) - 128;
      scale_v[o] = $urandom_range(128, 384);
      shift_v[o] = $urandom_range(0, 128) - 64;
    end
  endtask

  task automatic pack_layer(layer_t L);
    data_t wv [WSET];
    data_t pv [PSET];
    int M, N, P;
    M = int'(L.width); N = int'(L.in_ch); P = int'(L.out_ch);
    case (L.mode)
      MODE_STD: begin
        for (int i = 0; i < WSET; i++) wv[i] = 0;
        for (int i = 0; i < PSET; i++) pv[i] = 0;
        for (int m = 0; m < NUM_MME; m++)
          for (int j = 0; j < 10; j++) begin
            int o;
            o = 10*m + j;
            if (o < P) begin
              for (int ch = 0; ch < 3; ch++)
                for (int k = 0; k < KK; k++) wv[288*m + 9*(3*j + ch) + k] = data_t'(wk[o][9*ch + k]);
              set_params(pv, m, j, o);
            end
          end
        push_set(wv, pv);
      end
      MODE_DW: begin
        for (int g = 0; g * 128 < N; g++) begin
          for (int i = 0; i < WSET; i++) wv[i] = 0;
          for (int i = 0; i < PSET; i++) pv[i] = 0;
          for (int m = 0; m < NUM_MME; m++)
            for (int s = 0; s < 32; s++) begin
              int c;
              c = g*128 + 32*m + s;
              if (c < N) begin
                for (int k = 0; k < KK; k++) wv[288*m + 9*s + k] = data_t'(wk[c][k]);
                set_params(pv, m, s, c);
              end
            end
          push_set(wv, pv);
        end
      end
      default: begin
        int ob;
        ob = 0;
        while (ob < P) begin
          int n;
          n = 36;
          if (128 - ob % 128 < n) n = 128 - ob % 128;
          if (P - ob < n) n = P - ob;
          for (int ic = 0; ic * 32 < N; ic++) begin
            for (int i = 0; i < WSET; i++) wv[i] = 0;
            for (int i = 0; i < PSET; i++) pv[i] = 0;
            for (int m = 0; m < NUM_MME; m++)
              for (int c = 0; c < 9; c++) begin
                int q;
                q = 9*m + c;
                if (q < n) begin
                  for (int s = 0; s < 32; s++)
                    if (ic*32 + s < N) wv[288*m + 9*s + c] = data_t'(wk[ob + q][ic*32 + s]);
                  set_params(pv, m, c, ob + q);
                end
              end
            push_set(wv, pv);
          end
          ob += n;
        end
      end
    endcase
  endtask

  // expected output values of a layer: res[ch][q]
  int res [256][256];
  int res_n;

  task automatic model_layer(layer_t L);
    int M, N, P, side, src;
    int pre [256][256];
    M = int'(L.width); N = int'(L.in_ch); P = (L.mode == MODE_DW) ? N : int'(L.out_ch);
    side = (L.mode != MODE_PW && L.stride2) ? (M + 1) / 2 : M;
    src = int'(L.src_base);
    for (int o = 0; o < P; o++) begin
      int q;
      q = 0;
      for (int r = 0; r < M; r++) for (int c = 0; c < M; c++) begin
        longint acc;
        int v;
        if (L.mode != MODE_PW && L.stride2 && (r % 2 != 0 || c % 2 != 0)) continue;
        case (L.mode)
          MODE_STD: begin
            acc = longint'(bias_v[o]) * 256;
            for (int ch = 0; ch < 3; ch++)
              for (int k = 0; k < KK; k++) begin
                int rr, cc;
                rr = r + k/3 - 1; cc = c + k%3 - 1;
                if (rr >= 0 && cc >= 0 && rr < M && cc < M)
                  acc += longint'(img[rr*M + cc][ch]) * longint'(wk[o][9*ch + k]);
              end
            v = sat(acc >>> 8);
          end
          MODE_DW: begin
            acc = longint'(bias_v[o]) * 256;
            for (int k = 0; k < KK; k++) begin
              int rr, cc;
              rr = r + k/3 - 1; cc = c + k%3 - 1;
              if (rr >= 0 && cc >= 0 && rr < M && cc < M)
                acc += longint'(rd(src + (o/128)*M*M + rr*M + cc, o % 128)) * longint'(wk[o][k]);
            end
            v = sat(acc >>> 8);
          end
          default: begin
            v = bias_v[o];
            for (int ic = 0; ic * 32 < N; ic++) begin
              acc = longint'(v) * 256;
              for (int i = ic*32; i < ic*32 + 32 && i < N; i++)
                acc += longint'(rd(src + (i/128)*M*M + r*M + c, i % 128)) * longint'(wk[o][i]);
              v = sat(acc >>> 8);
            end
          end
        endcase
        pre[o][q] = post(v, L.norm_en, scale_v[o], shift_v[o], int'(L.relu));
        q++;
      end
      if (L.pool == POOL_NONE) begin
        res_n = q;
        for (int i = 0; i < q; i++) res[o][i] = pre[o][i];
      end else begin
        int S;
        S = int'(L.pool_size);
        res_n = q / S;
        for (int j = 0; j < res_n; j++) begin
          int run_v [$];
          for (int i = 0; i < S; i++) run_v.push_back(pre[o][j*S + i]);
          res[o][j] = pool_run(run_v, int'(L.pool), int'(L.pool_recip));
        end
      end
    end
  endtask

  // counters of mechanisms
  int n_stride2 = 0, n_avg = 0, n_max = 0, n_multi_group = 0, n_relu6 = 0, n_relu = 0, n_std = 0;

  task automatic run_layer(string name, layer_t L, int ds);
    int P, cyc0, cyc;
    P = (L.mode == MODE_DW) ? int'(L.in_ch) : int'(L.out_ch);
    pack_layer(L);
    model_layer(L);
    @(negedge clk);
    layer = L; dst_stride = FMB_AW'(ds); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    // read back and compare
    for (int q = 0; q < res_n; q++)
      for (int g = 0; g * 128 < P; g++) begin
        int a;
        a = int'(L.dst_base) + g*ds + q;
        @(negedge clk);
        host_re = 1; host_raddr = FMB_AW'(a);
        @(negedge clk);
        host_re = 0;
        for (int l = 0; l < 128 && g*128 + l < P; l++) begin
          checks++;
          if (int'(host_rdata[l]) != res[g*128 + l][q]) begin
            failures++;
            if (failures < 12) $display("%s: ch %0d pixel %0d got %0d exp %0d", name, g*128 + l, q, host_rdata[l], res[g*128 + l][q]);
          end
          fm[a][l] = res[g*128 + l][q];
        end
      end
    if (L.stride2 && L.mode != MODE_PW) n_stride2++;
    if (L.pool == POOL_AVG) n_avg++;
    if (L.pool == POOL_MAX) n_max++;
    if (L.relu == RELU_6) n_relu6++;
    if (L.relu == RELU_STD) n_relu++;
    if (L.mode == MODE_STD) n_std++;
    if ((L.mode == MODE_DW && L.in_ch > 128) || (L.mode == MODE_PW && L.out_ch > 128)) n_multi_group++;
    $display("%s: %0d cycles, %0d outputs per channel", name, cyc, res_n);
  endtask

  function automatic layer_t mk(conv_mode_t md, int w, bit s2, int n, int p, int src, int dst,
                                bit ne, relu_mode_t rl, pool_mode_t pm, int S);
    layer_t L;
    L.mode = md; L.width = MW'(w); L.stride2 = s2; L.in_ch = 12'(n); L.out_ch = 12'(p);
    L.src_base = FMB_AW'(src); L.dst_base = FMB_AW'(dst); L.norm_en = ne; L.relu = rl;
    L.pool = pm; L.pool_size = 16'(S); L.pool_recip = 16'(32768 / S);
    return L;
  endfunction

  initial begin
    start = 0; layer = '0; dst_stride = '0; wt_valid = 0; img_valid = 0;
    host_we = 0; host_re = 0; host_waddr = 0; host_raddr = 0; host_wmask = 0;
    for (int i = 0; i < LOAD_BEAT; i++) wt_data[i] = 0;
    for (int i = 0; i < 3; i++) img_data[i] = 0;
    for (int i = 0; i < FM_LANES; i++) host_wdata[i] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;

    // L1: image -> 7x7x40 at word 0
    for (int i = 0; i < 14*14; i++) for (int c = 0; c < 3; c++) img[i][c] = $urandom_range(0, 512) - 256;
    img_n = 14*14;
    rand_weights(40, 27);
    run_layer("L1 standard", mk(MODE_STD, 14, 1, 3, 40, 0, 0, 1, RELU_6, POOL_NONE, 1), 49);
    // L2: depthwise 7x7x40 -> word 100
    rand_weights(40, 9);
    run_layer("L2 depthwise", mk(MODE_DW, 7, 0, 40, 40, 0, 100, 1, RELU_6, POOL_NONE, 1), 49);
    // L3: pointwise 40 -> 150 -> word 200 (groups 49 apart)
    rand_weights(150, 40);
    run_layer("L3 pointwise", mk(MODE_PW, 7, 0, 40, 150, 100, 200, 1, RELU_6, POOL_NONE, 1), 49);
    // L4: depthwise 150 channels, stride 2 -> word 400
    rand_weights(150, 9);
    run_layer("L4 depthwise s2", mk(MODE_DW, 7, 1, 150, 150, 200, 400, 1, RELU_STD, POOL_NONE, 1), 16);
    // L5: pointwise 40 -> 20 with global average pooling -> word 500
    rand_weights(20, 40);
    run_layer("L5 pointwise avgpool", mk(MODE_PW, 7, 0, 40, 20, 100, 500, 0, RELU_NONE, POOL_AVG, 49), 1);
    // L6: depthwise with max pooling over 7 pixels -> word 600
    rand_weights(40, 9);
    run_layer("L6 depthwise maxpool", mk(MODE_DW, 7, 0, 40, 40, 0, 600, 0, RELU_STD, POOL_MAX, 7), 7);

    $display("passes=%0d psum_passes=%0d weight_wait_cycles=%0d image_stalls=%0d stride2=%0d avgpool=%0d maxpool=%0d multigroup=%0d relu6=%0d relu=%0d standard=%0d",
             stat_passes, stat_psum_passes, stat_wait_cycles, stat_img_stalls, n_stride2, n_avg, n_max,
             n_multi_group, n_relu6, n_relu, n_std);
    checks++; if (stat_passes != 32'(1 + 1 + 10 + 2 + 2 + 1)) begin failures++; $display("pass count %0d", stat_passes); end
    checks++; if (stat_psum_passes == 0) failures++;
    checks++; if (stat_wait_cycles == 0) failures++;
    checks++; if (stat_img_stalls == 0) failures++;
    checks++; if (n_stride2 == 0 || n_avg == 0 || n_max == 0 || n_multi_group == 0 || n_relu6 == 0 || n_relu == 0 || n_std == 0) failures++;
    checks++; if (bptr != nbeats) begin failures++; $display("weight beats left over"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
