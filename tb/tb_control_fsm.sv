// tb_control_fsm: the FSM runs a pointwise layer (40 -> 150 channels, 7x7),
// a depthwise layer of 150 channels with stride 2 and a standard layer fed by
// an image stream with gaps. The weight buffer is modelled by a flag that
// becomes full a random time after each swap; the engine array by a 7-cycle
// delay from input to output. At every swap the testbench checks the pass
// configuration (output lanes, output count, input slice, partial-sum and
// normalization flags) against the pass order computed from the layer; it
// also checks the number of buffer reads and writes per pass, the read and
// partial-sum addresses, the write addresses and the done pulse.
module tb_control_fsm;
  import accel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, wb_full, swap, mme_start;
  layer_t layer;
  logic [FMB_AW-1:0] dst_stride;
  mme_cfg_t cfg;
  logic [1:0] in_chunk;
  logic [6:0] lane_base;
  logic [7:0] out_limit;
  logic arr_in_valid, arr_pad, arr_from_img, arr_out_valid;
  logic re_a, re_b, we, img_valid, img_ready;
  logic [FMB_AW-1:0] raddr_a, raddr_b, waddr;
  logic [31:0] stat_wait_cycles, stat_img_stalls, stat_passes, stat_psum_passes;
  int checks = 0, failures = 0;

  control_fsm dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // engine array model: output 7 cycles after each input
  logic [6:0] pipe;
  always @(posedge clk) pipe <= {pipe[5:0], arr_in_valid};
  assign arr_out_valid = pipe[6];

  // weight buffer model
  int fill_delay = 0;
  always @(posedge clk) begin
    if (!rst_n) begin wb_full <= 0; fill_delay <= 5; end
    else if (swap) begin wb_full <= 0; fill_delay <= $urandom_range(0, 60); end
    else if (fill_delay > 0) fill_delay <= fill_delay - 1;
    else wb_full <= 1;
  end

  // image stream with gaps
  always @(negedge clk) img_valid = ($urandom_range(0, 2) != 0);

  // expected pass list
  int e_lb [$], e_lim [$], e_chunk [$], e_psum [$], e_norm [$], e_src [$], e_dst [$];
  int npass, nreads, nwrites, nsteps, exp_reads, exp_writes;
  int cur_src, cur_dst, cur_m;
  logic first_read;

  always @(posedge clk) begin
    if (rst_n && swap) begin
      int i;
      i = npass;
      npass <= npass + 1;
      // configuration seen during the pass is checked on the next cycle
    end
  end

  always @(negedge clk) begin
    if (rst_n && dut.state == 3'd2 && dut.p == 0 && !first_read) begin
      first_read = 1;
      checks += 5;
      if (int'(lane_base) != e_lb[npass-1])   begin failures++; $display("pass %0d lane_base %0d exp %0d", npass-1, lane_base, e_lb[npass-1]); end
      if (int'(out_limit) != e_lim[npass-1])  begin failures++; $display("pass %0d out_limit %0d exp %0d", npass-1, out_limit, e_lim[npass-1]); end
      if (int'(in_chunk) != e_chunk[npass-1]) begin failures++; $display("pass %0d in_chunk %0d exp %0d", npass-1, in_chunk, e_chunk[npass-1]); end
      if (int'(cfg.psum_en) != e_psum[npass-1]) begin failures++; $display("pass %0d psum_en %0d", npass-1, cfg.psum_en); end
      if (int'(cfg.norm_en) != e_norm[npass-1]) begin failures++; $display("pass %0d norm_en %0d", npass-1, cfg.norm_en); end
      cur_src = e_src[npass-1];
      cur_dst = e_dst[npass-1];
    end
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (re_a) begin
        checks++;
        if (int'(raddr_a) != cur_src + nreads) begin failures++; if (failures < 10) $display("read addr %0d exp %0d", raddr_a, cur_src + nreads); end
        nreads <= nreads + 1;
      end
      if (re_b) begin
        checks++;
        if (int'(raddr_b) != cur_dst + nreads) begin failures++; if (failures < 10) $display("psum addr %0d exp %0d", raddr_b, cur_dst + nreads); end
      end
      if (we) begin
        checks++;
        if (int'(waddr) != cur_dst + nwrites) begin failures++; if (failures < 10) $display("write addr %0d exp %0d", waddr, cur_dst + nwrites); end
        nwrites <= nwrites + 1;
      end
      if (arr_in_valid) nsteps <= nsteps + 1;
    end
  end

  task automatic run(layer_t L, int ds, int passes, int reads_per_pass, int steps_per_pass, int writes_per_pass);
    int cyc;
    npass = 0; nreads = 0; nwrites = 0; nsteps = 0;
    @(negedge clk);
    layer = L; dst_stride = FMB_AW'(ds); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    for (int ps = 0; ps < passes; ps++) begin
      first_read = 0;
      while (dut.state != 3'd3) @(negedge clk);   // end of the input phase
      while (dut.state == 3'd3) @(negedge clk);
      checks += 3;
      if (nreads != reads_per_pass) begin failures++; $display("pass %0d: %0d reads, exp %0d", ps, nreads, reads_per_pass); end
      if (nsteps != steps_per_pass) begin failures++; $display("pass %0d: %0d steps, exp %0d", ps, nsteps, steps_per_pass); end
      if (nwrites != writes_per_pass) begin failures++; $display("pass %0d: %0d writes, exp %0d", ps, nwrites, writes_per_pass); end
      nreads = 0; nwrites = 0; nsteps = 0;
      @(negedge clk);
    end
    while (!done && cyc < 100) begin @(negedge clk); cyc++; end
    checks += 2;
    if (cyc >= 100 && !done) begin failures++; $display("no done"); end
    if (npass != passes) begin failures++; $display("%0d passes, exp %0d", npass, passes); end
    e_lb.delete(); e_lim.delete(); e_chunk.delete(); e_psum.delete(); e_norm.delete(); e_src.delete(); e_dst.delete();
  endtask

  initial begin
    layer_t L;
    int ob;
    start = 0; layer = '0; dst_stride = '0; first_read = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // pointwise 40 -> 150, 7x7, src 100, dst 1000, groups 49 apart
    L = '0; L.mode = MODE_PW; L.width = 7; L.in_ch = 40; L.out_ch = 150;
    L.src_base = 100; L.dst_base = 1000; L.norm_en = 1; L.relu = RELU_6; L.pool_size = 1;
    ob = 0;
    while (ob < 150) begin
      int n;
      n = 36;
      if (128 - ob % 128 < n) n = 128 - ob % 128;
      if (150 - ob < n) n = 150 - ob;
      for (int ic = 0; ic < 2; ic++) begin
        e_lb.push_back(ob % 128); e_lim.push_back(n); e_chunk.push_back(ic);
        e_psum.push_back(ic > 0); e_norm.push_back(ic == 1);
        e_src.push_back(100); e_dst.push_back(1000 + (ob / 128) * 49);
      end
      ob += n;
    end
    run(L, 49, 10, 49, 49, 49);

    // depthwise 150 channels, stride 2, 7x7: two groups
    L = '0; L.mode = MODE_DW; L.width = 7; L.stride2 = 1; L.in_ch = 150; L.out_ch = 150;
    L.src_base = 200; L.dst_base = 3000; L.pool_size = 1;
    for (int g = 0; g < 2; g++) begin
      e_lb.push_back(0); e_lim.push_back(g == 0 ? 128 : 22); e_chunk.push_back(0);
      e_psum.push_back(0); e_norm.push_back(0);
      e_src.push_back(200 + 49 * g); e_dst.push_back(3000 + 16 * g);
    end
    run(L, 16, 2, 49, 57, 57);

    // standard conv from the image stream: no buffer reads
    L = '0; L.mode = MODE_STD; L.width = 5; L.in_ch = 3; L.out_ch = 32;
    L.dst_base = 5; L.pool_size = 1;
    e_lb.push_back(0); e_lim.push_back(32); e_chunk.push_back(0); e_psum.push_back(0); e_norm.push_back(0);
    e_src.push_back(0); e_dst.push_back(5);
    run(L, 25, 1, 0, 31, 31);
    checks += 2;
    if (stat_img_stalls == 0) begin failures++; $display("no image stall seen"); end
    if (stat_wait_cycles == 0) begin failures++; $display("no weight wait seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
