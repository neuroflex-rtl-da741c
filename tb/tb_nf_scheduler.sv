// Self-checking test of nf_scheduler: two queued layers with random mode
// bitmasks. The testbench plays both cores (accepting jobs at random, so the
// scheduler must wait) and the compressor (finishing each segment some cycles
// after its last job). Every job must arrive once, on the core its mask bit
// selects, with the fiber pointers of the documented layout; segments must
// be opened with the right address, first column, size and last flag.
module tb_nf_scheduler;
  import nf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, mask_we = 0, mask_bit = 0;
  logic [IDX_W-1:0] mask_addr = '0;
  cmd_t cmd;
  logic ann_job_valid, ann_job_ready, snn_job_valid, snn_job_ready;
  job_t job;
  logic seg_start, seg_last, seg_busy, seg_done, busy, layer_done, dispatch_stall;
  ptr_t seg_addr, seg_next;
  logic [IDX_W-1:0] seg_col0;
  logic [POS_W:0] seg_count;
  int checks = 0, failures = 0, n_ann = 0, n_snn = 0, n_stall = 0, n_layers = 0;
  logic mask [8192];
  always #5 clk = ~clk;
  nf_scheduler dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .mask_we, .mask_addr, .mask_bit,
    .ann_job_valid, .ann_job_ready, .snn_job_valid, .snn_job_ready, .job,
    .seg_start, .seg_addr, .seg_col0, .seg_count, .seg_last, .seg_next, .seg_busy, .seg_done,
    .busy, .layer_done, .dispatch_stall);

  cmd_t layers [2];
  int cur_layer = 0, exp_m = 0, exp_n = 0, seg_left = 0, seg_j = 0, done_cnt = -1;
  logic seg_open = 0;

  always @(negedge clk) begin
    ann_job_ready <= ($urandom_range(3) != 0);
    snn_job_ready <= ($urandom_range(2) != 0);
  end
  assign seg_busy = seg_open;

  always @(posedge clk) if (rst_n) begin
    seg_done <= 1'b0;
    if (dispatch_stall) n_stall++;
    if (layer_done) begin n_layers++; cur_layer <= cur_layer + 1; end
    if (seg_start) begin
      int nseg, left;
      cmd_t c;
      c = layers[cur_layer];
      nseg = (int'(c.n_cols) + 127) / 128;
      left = int'(c.n_cols) - exp_n;
      checks++;
      if (seg_addr != ptr_t'(int'(c.out_base) + exp_m * nseg + exp_n / 128) || int'(seg_col0) != exp_n
          || int'(seg_count) != ((left > 128) ? 128 : left) || seg_last != (left <= 128)) begin
        failures++;
        if (failures < 5) $display("bad segment m=%0d n=%0d", exp_m, exp_n);
      end
      seg_open <= 1'b1;
      seg_left = int'(seg_count);
    end
    if ((ann_job_valid && ann_job_ready) || (snn_job_valid && snn_job_ready)) begin
      cmd_t c;
      c = layers[cur_layer];
      checks++;
      if (int'(job.row) != exp_m || int'(job.col) != exp_n
          || job.a_ptr != ptr_t'(int'(c.a_base) + exp_m * int'(c.kseg))
          || job.b_ptr != ptr_t'(int'(c.b_base) + exp_n * int'(c.kseg))
          || job.theta != c.theta
          || snn_job_valid != mask[int'(c.mask_base) + exp_n]) begin
        failures++;
        if (failures < 5) $display("bad job m=%0d n=%0d got %0d/%0d", exp_m, exp_n, job.row, job.col);
      end
      if (snn_job_valid) n_snn++; else n_ann++;
      seg_left = seg_left - 1;
      if (seg_left == 0) done_cnt = 3;
      if (exp_n + 1 == int'(c.n_cols)) begin exp_n = 0; exp_m = exp_m + 1; end
      else exp_n = exp_n + 1;
      if (exp_m == int'(c.m_rows)) exp_m = 0;
    end
    if (done_cnt > 0) done_cnt = done_cnt - 1;
    else if (done_cnt == 0) begin
      seg_done <= 1'b1;
      seg_open <= 1'b0;
      done_cnt = -1;
    end
  end

  initial begin
    layers[0] = '{m_rows: 16'd3, n_cols: 16'd200, kseg: 16'd2, a_base: 16'd10, b_base: 16'd500,
                  out_base: 16'd3000, theta: 16'd7, mask_base: 16'd0};
    layers[1] = '{m_rows: 16'd2, n_cols: 16'd90, kseg: 16'd3, a_base: 16'd3000, b_base: 16'd1500,
                  out_base: 16'd100, theta: 16'd5, mask_base: 16'd200};
    cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 290; i++) begin
      @(negedge clk);
      mask_we = 1; mask_addr = IDX_W'(i); mask_bit = ($urandom_range(1) == 1);
      mask[i] = mask_bit;
    end
    @(negedge clk);
    mask_we = 0;
    for (int l = 0; l < 2; l++) begin
      cmd = layers[l]; cmd_valid = 1;
      @(negedge clk);
    end
    cmd_valid = 0;
    while (n_layers < 2) @(negedge clk);
    checks++;
    if (n_ann + n_snn != 3 * 200 + 2 * 90 || n_ann == 0 || n_snn == 0 || n_stall == 0) begin
      failures++;
      $display("counts ann=%0d snn=%0d stall=%0d", n_ann, n_snn, n_stall);
    end
    repeat (2) @(negedge clk);
    checks++;
    if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
