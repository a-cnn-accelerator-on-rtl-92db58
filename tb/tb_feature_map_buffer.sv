// tb_feature_map_buffer: a small buffer (64 words x 8 lanes) is written
// with random masks and read through both ports at random addresses every
// cycle; data one cycle after each read are compared with a model memory
// kept in the testbench.
module tb_feature_map_buffer;
  import accel_pkg::*;
  localparam int unsigned D = 64, L = 8, A = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re_a, re_b;
  logic [A-1:0] waddr, raddr_a, raddr_b;
  data_t wdata [L];
  logic [L-1:0] wmask;
  data_t rdata_a [L];
  data_t rdata_b [L];
  int checks = 0, failures = 0;

  feature_map_buffer #(.DEPTH(D), .LANES(L), .AW(A)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t model [D][L];
  initial begin
    data_t ea [L];
    data_t eb [L];
    logic chk;
    we = 0; re_a = 0; re_b = 0; waddr = 0; raddr_a = 0; raddr_b = 0; wmask = 0;
    for (int l = 0; l < L; l++) wdata[l] = 0;
    // initialise every word through the write port
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = A'(a); wmask = '1;
      for (int l = 0; l < L; l++) begin wdata[l] = data_t'($urandom); model[a][l] = wdata[l]; end
    end
    chk = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (chk) begin
        for (int l = 0; l < L; l++) begin
          checks += 2;
          if (rdata_a[l] != ea[l]) begin failures++; if (failures < 10) $display("A lane %0d got %0d exp %0d", l, rdata_a[l], ea[l]); end
          if (rdata_b[l] != eb[l]) begin failures++; if (failures < 10) $display("B lane %0d got %0d exp %0d", l, rdata_b[l], eb[l]); end
        end
      end
      // reads see the memory before this cycle's write
      re_a = 1; re_b = 1;
      raddr_a = A'($urandom); raddr_b = A'($urandom);
      for (int l = 0; l < L; l++) begin ea[l] = model[raddr_a][l]; eb[l] = model[raddr_b][l]; end
      chk = 1;
      we = ($urandom_range(0, 1) == 1);
      waddr = A'($urandom);
      wmask = L'($urandom);
      for (int l = 0; l < L; l++) begin
        wdata[l] = data_t'($urandom);
        if (we && wmask[l]) model[waddr][l] = wdata[l];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
