// tb_pooling_block: runs of S pixels (several S, including S = 1 and 49 as
// in a 7x7 global pool) are pushed in every pooling mode, with gaps between
// pushes; the testbench checks that exactly one output appears per run, one
// cycle after the run's last pixel, and that it equals the maximum or the
// sum of x*recip shifted right by 15.
module tb_pooling_block;
  import accel_pkg::*;
  localparam int unsigned L = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, in_valid, out_valid;
  pool_mode_t mode;
  logic [15:0] size, recip;
  data_t x [L];
  data_t y [L];
  int checks = 0, failures = 0;

  pooling_block #(.LANES(L)) dut (.*);

  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sizes [4] = '{1, 4, 49, 7};
  initial begin
    start = 0; in_valid = 0; mode = POOL_NONE; size = 1; recip = 16'h8000;
    for (int l = 0; l < L; l++) x[l] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int mi = 0; mi < 3; mi++) begin
      for (int si = 0; si < 4; si++) begin
        int S;
        S = sizes[si];
        @(negedge clk);
        mode = pool_mode_t'(mi); size = 16'(S); recip = 16'(32768 / S);
        start = 1;
        @(negedge clk);
        start = 0;
        for (int run = 0; run < 3; run++) begin
          longint acc [L];
          int mx [L];
          int nout;
          for (int l = 0; l < L; l++) begin acc[l] = 0; mx[l] = -40000; end
          for (int i = 0; i < S; i++) begin
            int outs;
            in_valid = 1;
            for (int l = 0; l < L; l++) begin
              x[l] = data_t'($urandom_range(0, 4000) - 2000);
              acc[l] += longint'(x[l]) * longint'(recip);
              if (int'(x[l]) > mx[l]) mx[l] = int'(x[l]);
            end
            @(negedge clk);
            in_valid = 0;
            // output expected only after the last pixel of the run
            checks++;
            if (mode == POOL_NONE) begin
              if (!out_valid) failures++;
              for (int l = 0; l < L; l++) begin checks++; if (y[l] != x[l]) failures++; end
            end else if (i == S - 1) begin
              if (!out_valid) begin failures++; $display("no output mode %0d S %0d", mi, S); end
              for (int l = 0; l < L; l++) begin
                int e;
                e = (mode == POOL_AVG) ? sat(acc[l] >>> 15) : mx[l];
                checks++;
                if (int'(y[l]) != e) begin
                  failures++;
                  if (failures < 10) $display("mode %0d S %0d y=%0d exp %0d", mi, S, y[l], e);
                end
              end
            end else if (out_valid) begin
              failures++;
              $display("early output mode %0d S %0d i %0d", mi, S, i);
            end
            outs = 0;
            if ($urandom_range(0, 3) == 0) @(negedge clk);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
