// tb_norm_block: random inputs, scales and shifts, with the bypass both on
// and off; the output one cycle later is compared with
// sat16(floor(x*scale/256) + shift) computed in the testbench.
module tb_norm_block;
  import accel_pkg::*;
  localparam int unsigned L = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, in_valid, out_valid;
  data_t x [L];
  data_t scale [L];
  data_t shift [L];
  data_t y [L];
  int checks = 0, failures = 0;

  norm_block #(.LANES(L)) dut (.*);

  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e [L];
    in_valid = 0; en = 0;
    for (int l = 0; l < L; l++) begin x[l] = 0; scale[l] = 0; shift[l] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      en = (t % 4) != 3;
      in_valid = 1;
      for (int l = 0; l < L; l++) begin
        x[l] = data_t'($urandom);
        scale[l] = (t < 100) ? data_t'($urandom_range(0, 1024) - 512) : data_t'($urandom);
        shift[l] = data_t'($urandom);
        if (en) begin
          longint pr;
          pr = longint'(x[l]) * longint'(scale[l]);
          e[l] = sat((pr >>> 8) + longint'(shift[l]));
        end else e[l] = int'(x[l]);
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (int'(y[l]) != e[l]) begin
          failures++;
          if (failures < 10) $display("x=%0d sc=%0d sh=%0d y=%0d exp %0d", x[l], scale[l], shift[l], y[l], e[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
