// tb_adder_tree: random products are summed in all three modes (depthwise,
// standard, pointwise with bias and with partial sum). Each result is
// compared, two cycles after the input, with the sum the mode asks for,
// computed in the testbench with 64-bit integers and then shifted by 8 and
// saturated. Inputs are applied every cycle to check the throughput.
module tb_adder_tree;
  import accel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  conv_mode_t mode;
  logic psum_en, in_valid, out_valid;
  prod_t p [SLICES][KK];
  data_t bias [SLICES];
  data_t psum [PW_OUT];
  data_t out [SLICES];
  int checks = 0, failures = 0;

  adder_tree dut (.*);

  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_a [512][SLICES];
  int nexp_a [512];
  int wr_i = 0, rd_i = 0;
  int mode_cnt [3] = '{0, 0, 0};

  // Checker: compares two cycles after each input.
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      int e [SLICES];
      int n;
      e = exp_a[rd_i];
      n = nexp_a[rd_i];
      rd_i++;
      for (int s = 0; s < n; s++) begin
        checks++;
        if (int'(out[s]) != e[s]) begin
          failures++;
          if (failures < 10) $display("out[%0d]=%0d exp %0d", s, out[s], e[s]);
        end
      end
    end
  end

  initial begin
    in_valid = 0; mode = MODE_DW; psum_en = 0;
    for (int s = 0; s < SLICES; s++) begin bias[s] = 0; for (int k = 0; k < KK; k++) p[s][k] = 0; end
    for (int c = 0; c < PW_OUT; c++) psum[c] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      int e [SLICES];
      int n;
      longint acc;
      logic big;
      mode = conv_mode_t'(t % 3);
      psum_en = (t % 6) == 5;
      big = (t % 7 == 0);
      for (int s = 0; s < SLICES; s++) begin
        bias[s] = data_t'($urandom_range(0, 2000) - 1000);
        for (int k = 0; k < KK; k++)
          p[s][k] = big ? prod_t'($urandom) : prod_t'($urandom_range(0, 200000) - 100000);
      end
      for (int c = 0; c < PW_OUT; c++) psum[c] = data_t'($urandom);
      for (int s = 0; s < SLICES; s++) e[s] = 0;
      case (mode)
        MODE_DW: begin
          n = SLICES;
          for (int s = 0; s < SLICES; s++) begin
            acc = longint'(bias[s]) * 256;
            for (int k = 0; k < KK; k++) acc += longint'(p[s][k]);
            e[s] = sat(acc >>> 8);
          end
        end
        MODE_STD: begin
          n = 10;
          for (int j = 0; j < 10; j++) begin
            acc = longint'(bias[j]) * 256;
            for (int s = 3*j; s < 3*j+3; s++) for (int k = 0; k < KK; k++) acc += longint'(p[s][k]);
            e[j] = sat(acc >>> 8);
          end
        end
        default: begin
          n = PW_OUT;
          for (int c = 0; c < PW_OUT; c++) begin
            acc = longint'(psum_en ? psum[c] : bias[c]) * 256;
            for (int s = 0; s < SLICES; s++) acc += longint'(p[s][c]);
            e[c] = sat(acc >>> 8);
          end
        end
      endcase
      mode_cnt[int'(mode)]++;
      exp_a[wr_i] = e;
      nexp_a[wr_i] = n;
      wr_i++;
      in_valid = 1;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (rd_i != wr_i) begin failures++; $display("%0d results missing", wr_i - rd_i); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
