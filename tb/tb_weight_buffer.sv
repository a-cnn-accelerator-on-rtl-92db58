// tb_weight_buffer: small banks (DEPTH 24, 8 words per beat). Sets of
// random words are loaded with random gaps; the testbench checks that
// ld_ready drops once the load bank is full, that the active bank's outputs
// do not change while the other bank loads, and that after each swap the
// outputs equal the set loaded last (ping-pong order).
module tb_weight_buffer;
  import accel_pkg::*;
  localparam int unsigned D = 24, B = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ld_valid, ld_ready, load_full, swap, active_bank;
  data_t ld_data [B];
  data_t rd_data [D];
  int checks = 0, failures = 0;

  weight_buffer #(.DEPTH(D), .BEAT(B)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t sets [6][D];
  int swaps = 0;

  task automatic check_out(int si, string what);
    for (int i = 0; i < D; i++) begin
      checks++;
      if (rd_data[i] != sets[si][i]) begin
        failures++;
        if (failures < 10) $display("%s: word %0d = %0d, expected %0d (set %0d)", what, i, rd_data[i], sets[si][i], si);
      end
    end
  endtask

  initial begin
    ld_valid = 0; swap = 0;
    for (int i = 0; i < B; i++) ld_data[i] = 0;
    for (int s = 0; s < 6; s++) for (int i = 0; i < D; i++) sets[s][i] = data_t'($urandom);
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 6; s++) begin
      // load set s into the inactive bank
      for (int b = 0; b < D / B; b++) begin
        while ($urandom_range(0, 2) == 0) begin ld_valid = 0; @(negedge clk); end
        ld_valid = 1;
        for (int i = 0; i < B; i++) ld_data[i] = sets[s][b*B + i];
        checks++;
        if (!ld_ready) begin failures++; $display("ld_ready low while loading"); end
        @(negedge clk);
        if (s > 0) check_out(s - 1, "active bank during load");
      end
      ld_valid = 1;
      for (int i = 0; i < B; i++) ld_data[i] = data_t'($urandom);
      checks += 2;
      if (ld_ready) begin failures++; $display("ld_ready high with full bank"); end
      if (!load_full) begin failures++; $display("load_full low after set"); end
      @(negedge clk);
      ld_valid = 0;
      swap = 1;
      @(negedge clk);
      swap = 0;
      swaps++;
      check_out(s, "after swap");
      checks++;
      if (active_bank != 1'(s % 2 == 0)) begin failures++; $display("bank order wrong"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
