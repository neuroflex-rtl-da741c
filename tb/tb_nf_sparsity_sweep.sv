// Activation-sparsity sweep on neuroflex_top at its default size.
//
// The same layer (M=4 rows, K=256 so two lines per fiber, N=128 columns,
// half-sparse INT8 weights) runs three times from the command queue, with
// activations that are 90%, 60% and 25% zero. These are the sparsity points
// the evaluation of the design sweeps. Each column goes to the ANN or SNN core
// by a random mode bit. Every output line is checked against an integer QCFS
// reference, and the cycles per layer are measured from the layer_done
// pulses.
// Timing check: the PEs issue one matched non-zero per cycle, so a denser
// layer must take longer. The test requires the cycle count to rise from the
// 90% point to the 60% point to the 25% point, and each layer to take at
// least (all matches of the layer) / 32 cycles, since each of the 32 PEs
// issues at most one match per cycle.
module tb_nf_sparsity_sweep;
  import nf_pkg::*;
  import tb_nf_util::*;
  localparam int M = 4, K = 256, N = 128, KS = 2, TH = 8, NPTS = 3;
  localparam int B_BASE = 32, A_BASE = 0, O_BASE = 400;
  localparam int ZERO_PCT [NPTS] = '{90, 60, 25};

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, mask_we = 0, mask_bit = 0;
  logic [IDX_W-1:0] mask_addr = '0;
  cmd_t cmd;
  logic host_we = 0, host_re = 0, host_rvalid;
  ptr_t host_waddr = '0, host_raddr = '0;
  line_t host_wline, host_rline;
  logic busy, layer_done;
  logic st_ann, st_snn, st_dstall, st_bub, st_fstall, st_inh, st_conf, st_zero, st_cw;

  neuroflex_top dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .mask_we, .mask_addr, .mask_bit,
    .host_we, .host_waddr, .host_wline, .host_re, .host_raddr, .host_rvalid, .host_rline,
    .busy, .layer_done, .stat_ann_job(st_ann), .stat_snn_job(st_snn), .stat_dispatch_stall(st_dstall),
    .stat_bubble(st_bub), .stat_snn_fifo_stall(st_fstall), .stat_inhibit(st_inh),
    .stat_xbar_conflict(st_conf), .stat_zero_out(st_zero), .stat_cw_stall(st_cw));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycles = 0, layers_done = 0;
  int t_done [NPTS];
  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (layer_done) begin
      if (layers_done < NPTS) t_done[layers_done] = cycles;
      layers_done++;
    end
  end

  logic [7:0] a [NPTS][M][K];
  logic [7:0] b [K][N];
  int         o [NPTS][M][N];
  int         n_match [NPTS];
  logic       mode [N];

  task automatic host_write(int addr, line_t l);
    @(negedge clk);
    host_we = 1; host_waddr = ptr_t'(addr); host_wline = l;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic host_read(int addr, output line_t l);
    @(negedge clk);
    host_re = 1; host_raddr = ptr_t'(addr);
    @(negedge clk);
    host_re = 0;
    l = host_rline;
  endtask

  task automatic put_fiber(int base, logic [7:0] v []);
    for (int s = 0; s < KS; s++) begin
      logic [CHUNK-1:0][7:0] d;
      for (int i = 0; i < CHUNK; i++) d[i] = v[s * CHUNK + i];
      host_write(base + s, pack_line(d, s == KS - 1, ptr_t'(base + s + 1)));
    end
  endtask

  initial begin
    logic [7:0] v [];
    cmd = '0; host_wline = '0;
    // ---- data and reference -----------------------------------------
    for (int k = 0; k < K; k++)
      for (int n = 0; n < N; n++)
        b[k][n] = ($urandom_range(99) < 50) ? 8'(int'($urandom_range(6)) - 3) : 8'd0;
    for (int n = 0; n < N; n++) mode[n] = ($urandom_range(1) == 1);
    for (int p = 0; p < NPTS; p++) begin
      n_match[p] = 0;
      for (int m = 0; m < M; m++)
        for (int k = 0; k < K; k++)
          a[p][m][k] = (int'($urandom_range(99)) < ZERO_PCT[p]) ? 8'd0 : 8'(1 + $urandom_range(7));
      for (int m = 0; m < M; m++)
        for (int n = 0; n < N; n++) begin
          int dot;
          dot = 0;
          for (int k = 0; k < K; k++) begin
            dot += int'(a[p][m][k]) * int'($signed(b[k][n]));
            if (a[p][m][k] != 0 && b[k][n] != 0) n_match[p]++;
          end
          o[p][m][n] = qcfs_ref(dot, TH, 8);
        end
    end
    // ---- load -------------------------------------------------------
    repeat (3) @(posedge clk);
    rst_n = 1;
    v = new[K];
    for (int n = 0; n < N; n++) begin
      for (int k = 0; k < K; k++) v[k] = b[k][n];
      put_fiber(B_BASE + KS * n, v);
    end
    for (int p = 0; p < NPTS; p++)
      for (int m = 0; m < M; m++) begin
        for (int k = 0; k < K; k++) v[k] = a[p][m][k];
        put_fiber(A_BASE + KS * (p * M + m), v);
      end
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      mask_we = 1; mask_addr = IDX_W'(n); mask_bit = mode[n];
    end
    @(negedge clk);
    mask_we = 0;
    // ---- run the three layers ---------------------------------------
    cycles = 0;
    for (int p = 0; p < NPTS; p++) begin
      @(negedge clk);
      cmd = '{m_rows: IDX_W'(M), n_cols: IDX_W'(N), kseg: 16'(KS), a_base: ptr_t'(A_BASE + KS * M * p),
              b_base: ptr_t'(B_BASE), out_base: ptr_t'(O_BASE + M * p), theta: 16'(TH), mask_base: 16'd0};
      cmd_valid = 1;
      while (!cmd_ready) @(negedge clk);
    end
    @(negedge clk);
    cmd_valid = 0;
    while (layers_done < NPTS) @(negedge clk);
    // ---- check outputs ----------------------------------------------
    for (int p = 0; p < NPTS; p++)
      for (int m = 0; m < M; m++) begin
        logic [CHUNK-1:0][7:0] d;
        line_t got, exp;
        for (int i = 0; i < CHUNK; i++) d[i] = 8'(o[p][m][i]);
        exp = pack_line(d, 1'b1, ptr_t'(O_BASE + M * p + m + 1));
        host_read(O_BASE + M * p + m, got);
        checks++;
        if (got != exp) begin
          failures++;
          $display("point %0d row %0d: output line differs", p, m);
        end
      end
    // ---- timing -----------------------------------------------------
    for (int p = 0; p < NPTS; p++) begin
      int dt;
      dt = (p == 0) ? t_done[0] : t_done[p] - t_done[p - 1];
      $display("%0d%% zero activations: %0d matches, %0d cycles", ZERO_PCT[p], n_match[p], dt);
      checks++;
      if (dt * (2 * 16) < n_match[p]) failures++;
      if (p > 0) begin
        int dprev;
        dprev = (p == 1) ? t_done[0] : t_done[p - 1] - t_done[p - 2];
        checks++;
        if (dt <= dprev) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
