// tb_relu_block: random values (and the edges 0, 6.0 and the extremes) pass
// through each of the three activation modes and are compared, one cycle
// later, with the activation computed in the testbench.
module tb_relu_block;
  import accel_pkg::*;
  localparam int unsigned L = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  relu_mode_t mode;
  logic in_valid, out_valid;
  data_t x [L];
  data_t y [L];
  int checks = 0, failures = 0;

  relu_block #(.LANES(L)) dut (.*);

  function automatic int ref_relu(relu_mode_t m, int v);
    if (m == RELU_NONE) return v;
    if (v < 0) return 0;
    if (m == RELU_6 && v > 6 * 256) return 6 * 256;
    return v;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e [L];
    in_valid = 0; mode = RELU_NONE;
    for (int l = 0; l < L; l++) x[l] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      mode = relu_mode_t'(t % 3);
      in_valid = 1;
      for (int l = 0; l < L; l++) begin
        case (l)
          0: x[l] = 16'sd1536;
          1: x[l] = 16'sd1537;
          2: x[l] = -16'sd1;
          3: x[l] = 16'sd0;
          default: x[l] = data_t'($urandom);
        endcase
        e[l] = ref_relu(mode, int'(x[l]));
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (int'(y[l]) != e[l]) begin
          failures++;
          if (failures < 10) $display("mode %0d x=%0d y=%0d exp %0d", mode, x[l], y[l], e[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
