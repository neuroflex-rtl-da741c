// End-to-end test of neuroflex_top at its default size (16 ANN PEs, 16 SNN
// PEs, 32 banks, 4096 lines = 512 KB, two 32x32 crossbars).
//
// Two chained layers run back to back from the command queue:
//   layer 1: A1 (M=4 x K=384, three lines per row) times B1 (K=384 x N=160)
//   layer 2: its own output (4 x 160, read back as fibers) times B2 (160 x 96)
// Each column runs on the ANN or SNN core according to a random bitmask.
// The host loads A1, B1, B2 and the masks, pushes both commands, waits for
// two layer_done pulses and reads every output line back. Expected lines are
// the bitmap encoding of QCFS(A*B) computed here with integer arithmetic, so
// ANN and SNN columns are both held to the same exact result.
// Row 3 of A1 is non-zero only in the top 16 positions of each chunk, which
// makes the SNN PEs' FIFOs fill while the laggy prefix catches up.
// The test counts every mechanism of the design and fails if one never
// happened: ANN and SNN jobs, both cores busy at once, dispatch stalls, chunk
// bubbles, SNN FIFO stalls, inhibitory spikes, crossbar bank conflicts,
// continuation lines, zero outputs and both QCFS clipping ends.
module tb_neuroflex_top;
  import nf_pkg::*;
  import tb_nf_util::*;
  localparam int M = 4, K1 = 384, N1 = 160, N2 = 96;
  localparam int TH1 = 12, TH2 = 4;
  localparam int A1_BASE = 0, B1_BASE = 16, O1_BASE = 600, B2_BASE = 700, O2_BASE = 1000;

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
  int n_ann = 0, n_snn = 0, n_both = 0, n_dstall = 0, n_bub = 0, n_fstall = 0, n_inh = 0;
  int n_conf = 0, n_zero = 0, n_cw = 0, n_hi = 0, n_lo = 0, n_cont = 0;
  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (st_ann) n_ann++;
    if (st_snn) n_snn++;
    if (st_dstall) n_dstall++;
    if (st_bub) n_bub++;
    if (st_fstall) n_fstall++;
    if (st_inh) n_inh++;
    if (st_conf) n_conf++;
    if (st_zero) n_zero++;
    if (st_cw) n_cw++;
    if (layer_done) layers_done++;
    if (dut.u_ann.pe_busy != '0 && dut.u_snn.pe_busy != '0) n_both++;
  end

  logic [7:0] a1 [M][K1];
  logic [7:0] b1 [K1][N1];
  logic [7:0] b2 [N1][N2];
  int         o1 [M][N1];
  int         o2 [M][N2];
  logic       mode1 [N1];
  logic       mode2 [N2];

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

  // write a fiber of nseg lines for a dense vector given as a function of index
  task automatic put_fiber(int base, int nseg, logic [7:0] v [], int len);
    for (int s = 0; s < nseg; s++) begin
      logic [CHUNK-1:0][7:0] d;
      d = '0;
      for (int i = 0; i < CHUNK; i++) if (s * CHUNK + i < len) d[i] = v[s * CHUNK + i];
      host_write(base + s, pack_line(d, s == nseg - 1, ptr_t'(base + s + 1)));
    end
  endtask

  task automatic check_output(int base, int nseg, int ncols, int m, int ref_row []);
    for (int s = 0; s < nseg; s++) begin
      logic [CHUNK-1:0][7:0] d;
      line_t got, exp;
      d = '0;
      for (int i = 0; i < CHUNK; i++) if (s * CHUNK + i < ncols) d[i] = 8'(ref_row[s * CHUNK + i]);
      exp = pack_line(d, s == nseg - 1, ptr_t'(base + m * nseg + s + 1));
      host_read(base + m * nseg + s, got);
      checks++;
      if (got != exp) begin
        failures++;
        if (failures < 6)
          for (int i = 0; i < CHUNK; i++)
            if (got.mask[i] != exp.mask[i]) $display("row %0d seg %0d pos %0d mask got %0d exp %0d", m, s, i, got.mask[i], exp.mask[i]);
      end
      if (!got.last) n_cont++;
    end
  endtask

  initial begin
    logic [7:0] v [];
    int ref_row [];
    cmd = '0; host_wline = '0;
    // ---- data -------------------------------------------------------
    for (int m = 0; m < M; m++)
      for (int k = 0; k < K1; k++) begin
        if (m == 3) a1[m][k] = (k % 128 >= 112) ? 8'(1 + $urandom_range(7)) : 8'd0;
        else a1[m][k] = ($urandom_range(99) < 55) ? 8'(1 + $urandom_range(7)) : 8'd0;
      end
    for (int k = 0; k < K1; k++)
      for (int n = 0; n < N1; n++)
        b1[k][n] = (($urandom_range(99) < 50) || (k % 128 >= 112 && $urandom_range(9) < 8))
                   ? 8'(int'($urandom_range(6)) - 3) : 8'd0;
    for (int k = 0; k < N1; k++)
      for (int n = 0; n < N2; n++)
        b2[k][n] = ($urandom_range(99) < 60) ? 8'(int'($urandom_range(6)) - 3) : 8'd0;
    for (int n = 0; n < N1; n++) mode1[n] = ($urandom_range(1) == 1);
    for (int n = 0; n < N2; n++) mode2[n] = ($urandom_range(1) == 1);
    // ---- reference --------------------------------------------------
    for (int m = 0; m < M; m++)
      for (int n = 0; n < N1; n++) begin
        int dot;
        dot = 0;
        for (int k = 0; k < K1; k++) dot += int'(a1[m][k]) * int'($signed(b1[k][n]));
        o1[m][n] = qcfs_ref(dot, TH1, 8);
        if (o1[m][n] == 8) n_hi++;
        if (o1[m][n] == 0) n_lo++;
      end
    for (int m = 0; m < M; m++)
      for (int n = 0; n < N2; n++) begin
        int dot;
        dot = 0;
        for (int k = 0; k < N1; k++) dot += o1[m][k] * int'($signed(b2[k][n]));
        o2[m][n] = qcfs_ref(dot, TH2, 8);
        if (o2[m][n] == 8) n_hi++;
        if (o2[m][n] == 0) n_lo++;
      end
    // ---- load -------------------------------------------------------
    repeat (3) @(posedge clk);
    rst_n = 1;
    v = new[K1];
    for (int m = 0; m < M; m++) begin
      for (int k = 0; k < K1; k++) v[k] = a1[m][k];
      put_fiber(A1_BASE + 3 * m, 3, v, K1);
    end
    for (int n = 0; n < N1; n++) begin
      for (int k = 0; k < K1; k++) v[k] = b1[k][n];
      put_fiber(B1_BASE + 3 * n, 3, v, K1);
    end
    v = new[N1];
    for (int n = 0; n < N2; n++) begin
      for (int k = 0; k < N1; k++) v[k] = b2[k][n];
      put_fiber(B2_BASE + 2 * n, 2, v, N1);
    end
    for (int n = 0; n < N1 + N2; n++) begin
      @(negedge clk);
      mask_we = 1; mask_addr = IDX_W'(n); mask_bit = (n < N1) ? mode1[n] : mode2[n - N1];
    end
    @(negedge clk);
    mask_we = 0;
    // ---- run --------------------------------------------------------
    @(negedge clk);
    cmd = '{m_rows: IDX_W'(M), n_cols: IDX_W'(N1), kseg: 16'd3, a_base: ptr_t'(A1_BASE),
            b_base: ptr_t'(B1_BASE), out_base: ptr_t'(O1_BASE), theta: 16'(TH1), mask_base: 16'd0};
    cmd_valid = 1;
    @(negedge clk);
    cmd = '{m_rows: IDX_W'(M), n_cols: IDX_W'(N2), kseg: 16'd2, a_base: ptr_t'(O1_BASE),
            b_base: ptr_t'(B2_BASE), out_base: ptr_t'(O2_BASE), theta: 16'(TH2), mask_base: 16'(N1)};
    @(negedge clk);
    cmd_valid = 0;
    cycles = 0;
    while (layers_done < 2) @(negedge clk);
    $display("two layers took %0d cycles", cycles);
    repeat (5) @(negedge clk);
    checks++;
    if (busy) failures++;
    // ---- check outputs ----------------------------------------------
    ref_row = new[N1];
    for (int m = 0; m < M; m++) begin
      for (int n = 0; n < N1; n++) ref_row[n] = o1[m][n];
      check_output(O1_BASE, 2, N1, m, ref_row);
    end
    ref_row = new[N2];
    for (int m = 0; m < M; m++) begin
      for (int n = 0; n < N2; n++) ref_row[n] = o2[m][n];
      check_output(O2_BASE, 1, N2, m, ref_row);
    end
    // ---- mechanism coverage -----------------------------------------
    $display("ann_jobs=%0d snn_jobs=%0d both_busy=%0d dispatch_stall=%0d bubbles=%0d snn_fifo_stall=%0d",
             n_ann, n_snn, n_both, n_dstall, n_bub, n_fstall);
    $display("inhibit=%0d xbar_conflict=%0d zero_out=%0d continuation=%0d clip_hi=%0d clip_lo=%0d cw_stall=%0d",
             n_inh, n_conf, n_zero, n_cont, n_hi, n_lo, n_cw);
    checks++; if (n_ann + n_snn != M * (N1 + N2)) failures++;
    checks++; if (n_ann == 0)    failures++;
    checks++; if (n_snn == 0)    failures++;
    checks++; if (n_both == 0)   failures++;
    checks++; if (n_dstall == 0) failures++;
    checks++; if (n_bub == 0)    failures++;
    checks++; if (n_fstall == 0) failures++;
    checks++; if (n_inh == 0)    failures++;
    checks++; if (n_conf == 0)   failures++;
    checks++; if (n_zero == 0)   failures++;
    checks++; if (n_cont == 0)   failures++;
    checks++; if (n_hi == 0 || n_lo == 0) failures++;
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
