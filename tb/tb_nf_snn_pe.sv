// Self-checking test of nf_snn_pe: random sparse neurons of 1..3 chunks are
// fed straight into the PE; each result must equal QCFS of the dot product
// computed here from the dense data, and the chunk timing must respect the
// one-match-per-cycle issue with one bubble cycle per chunk.
module tb_nf_snn_pe;
  import nf_pkg::*;
  import tb_nf_util::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0;
  logic job_valid = 0, job_ready, chunk_valid = 0, chunk_ready, res_valid, res_ready = 1, busy, bubble;
  job_t job;
  chunk_t chunk;
  result_t res;
  logic fifo_stall, inhibit;
  int n_fstall = 0, n_inh = 0;
  always @(posedge clk) begin if (fifo_stall) n_fstall++; if (inhibit) n_inh++; end
  int checks = 0, failures = 0, now = 0, n_hi = 0, n_lo = 0;
  always #5 clk = ~clk;
  always @(posedge clk) now++;
  nf_snn_pe dut (.clk, .rst_n, .job_valid, .job_ready, .job, .chunk_valid, .chunk_ready, .chunk,
    .res_valid, .res_ready, .res, .busy, .bubble, .fifo_stall(fifo_stall), .inhibit(inhibit));

  initial begin
    job = '0; chunk = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      int nch, dot, th, r, prev_load, prev_m, dA, dB;
      logic [CHUNK-1:0][7:0] da, db;
      nch = 1 + int'($urandom_range(2));
      th  = 1 + int'($urandom_range(20));
      dA  = 20 + int'($urandom_range(70));
      dB  = 20 + int'($urandom_range(70));
      dot = 0;
      @(negedge clk);
      job = '{row: IDX_W'(it), col: IDX_W'(it * 3), a_ptr: '0, b_ptr: '0, theta: TH_W'(th)};
      job_valid = 1;
      while (!job_ready) @(negedge clk);
      @(negedge clk);
      job_valid = 0;
      prev_load = -1; prev_m = -1;
      for (int c = 0; c < nch; c++) begin
        int m;
        da = rand_dense(dA, 1, 8);
        db = rand_dense(dB, (it % 4 == 0) ? 1 : -3, 3);
        m = 0;
        for (int i = 0; i < CHUNK; i++)
          if (da[i] != 0 && db[i] != 0) begin
            dot += int'(da[i]) * int'($signed(db[i]));
            m++;
          end
        chunk.a = pack_line(da, c == nch - 1, '0);
        chunk.b = pack_line(db, c == nch - 1, '0);
        chunk_valid = 1;
        #1;
        while (!chunk_ready) begin @(negedge clk); #1; end
      // SNN: a chunk holds the join at least m+1 cycles (laggy prefix and FIFO drain may add more)
      if (prev_load >= 0 && prev_m >= 0) begin
        checks++;
        if (now - prev_load < prev_m + 1) failures++;
      end
        prev_load = now; prev_m = m;
        @(negedge clk);
        chunk_valid = 0;
      end
      while (!res_valid) @(negedge clk);
      r = qcfs_ref(dot, th, L);
      if (r == L) n_hi++;
      if (r == 0) n_lo++;
      checks++;
      if (int'(res.q) != r || res.row != IDX_W'(it) || res.col != IDX_W'(it * 3)) begin
        failures++;
        if (failures < 5) $display("it=%0d dot=%0d th=%0d q=%0d ref=%0d", it, dot, th, res.q, r);
      end
      @(negedge clk);
    end
    checks++;
    if (n_hi == 0 || n_lo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
