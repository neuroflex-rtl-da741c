// Self-checking test of nf_compressor: segments of random size receive their
// results in random order; the written line must be the bitmap/packed
// encoding of the dense values with the given pointer and last flag.
module tb_nf_compressor;
  import nf_pkg::*;
  import tb_nf_util::*;
  logic clk = 0, rst_n = 0;
  logic seg_start = 0, seg_last, seg_busy, seg_done, res_valid = 0, res_ready, cw_valid, cw_ready = 1, zero_skipped;
  ptr_t seg_addr, seg_next, cw_addr;
  logic [IDX_W-1:0] seg_col0;
  logic [POS_W:0] seg_count;
  result_t res;
  line_t cw_line;
  int checks = 0, failures = 0, n_zero = 0;
  always #5 clk = ~clk;
  nf_compressor dut (.clk, .rst_n, .seg_start, .seg_addr, .seg_col0, .seg_count, .seg_last, .seg_next,
    .seg_busy, .seg_done, .res_valid, .res_ready, .res, .cw_valid, .cw_ready, .cw_addr, .cw_line,
    .zero_skipped);
  always @(posedge clk) if (zero_skipped) n_zero++;

  initial begin
    seg_addr = '0; seg_next = '0; seg_col0 = '0; seg_count = '0; seg_last = 0; res = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      int cnt, col0;
      int order [128];
      logic [CHUNK-1:0][7:0] dense;
      line_t exp;
      cnt  = (it % 5 == 0) ? 128 : 1 + int'($urandom_range(127));
      col0 = 128 * int'($urandom_range(20));
      dense = '0;
      for (int i = 0; i < cnt; i++) begin
        dense[i] = ($urandom_range(2) == 0) ? 8'd0 : 8'($urandom_range(8));
        order[i] = i;
      end
      for (int i = cnt - 1; i > 0; i--) begin
        int j, t;
        j = int'($urandom_range(i));
        t = order[i]; order[i] = order[j]; order[j] = t;
      end
      exp = pack_line(dense, (it % 2) == 1, ptr_t'(it + 100));
      @(negedge clk);
      seg_start = 1; seg_addr = ptr_t'(it + 99); seg_col0 = IDX_W'(col0); seg_count = (POS_W+1)'(cnt);
      seg_last = (it % 2) == 1; seg_next = ptr_t'(it + 100);
      @(negedge clk);
      seg_start = 0;
      for (int i = 0; i < cnt; i++) begin
        res = '{row: 16'd3, col: IDX_W'(col0 + order[i]), q: dense[order[i]]};
        res_valid = 1;
        #1;
        while (!res_ready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      res_valid = 0;
      cw_ready = (it % 3 != 0);
      while (!cw_valid) @(negedge clk);
      repeat (2) @(negedge clk);
      cw_ready = 1;
      #1;
      checks++;
      if (cw_line != exp || cw_addr != ptr_t'(it + 99)) begin
        failures++;
        if (failures < 5) $display("line mismatch it=%0d", it);
      end
      @(negedge clk);
      checks++;
      if (seg_busy) failures++;
    end
    checks++;
    if (n_zero == 0) failures++;
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
