// tb_multiplier_array: random operands, including the extreme values, are
// fed every cycle; each product is checked one cycle later against a
// product computed in the testbench.
module tb_multiplier_array;
  import accel_pkg::*;
  localparam int unsigned L = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  data_t x [L][KK];
  data_t w [L][KK];
  prod_t p [L][KK];
  int checks = 0, failures = 0;
  int exp_p [L][KK];

  multiplier_array #(.LANES(L)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0;
    for (int s = 0; s < L; s++) for (int k = 0; k < KK; k++) begin x[s][k] = 0; w[s][k] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      in_valid = 1;
      for (int s = 0; s < L; s++) for (int k = 0; k < KK; k++) begin
        x[s][k] = (t < 2) ? ((t == 0) ? -16'sd32768 : 16'sd32767) : data_t'($urandom);
        w[s][k] = (t < 2) ? -16'sd32768 : data_t'($urandom);
        exp_p[s][k] = int'(x[s][k]) * int'(w[s][k]);
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("missing out_valid at t=%0d", t); end
      for (int s = 0; s < L; s++) for (int k = 0; k < KK; k++) begin
        checks++;
        if (p[s][k] != exp_p[s][k]) begin
          failures++;
          if (failures < 10) $display("p[%0d][%0d]=%0d exp %0d", s, k, p[s][k], exp_p[s][k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
