// Self-checking test of nf_membrane_unit: P and C are built from random
// matched (activation level, weight) pairs exactly as the SNN PE builds them;
// the emitted spike count must equal QCFS of the dot product, after exactly
// T = 23 busy cycles. Inhibitory spikes must occur at least once.
module tb_nf_membrane_unit;
  import tb_nf_util::*;
  localparam int L = 8, T = 23;
  logic clk = 0, rst_n = 0, start = 0, out_ready = 0;
  logic signed [11:0] pseudo;
  logic [6:0][9:0] corr;
  logic [15:0] theta;
  logic busy, out_valid, fired_neg;
  logic [7:0] q;
  int checks = 0, failures = 0, n_inh = 0, n_hi = 0, n_lo = 0;
  always #5 clk = ~clk;
  always @(posedge clk) if (fired_neg) n_inh++;
  nf_membrane_unit #(.L(L), .T(T), .PACC_W(12), .CACC_W(10), .V_W(18), .TH_W(16)) dut (
    .clk, .rst_n, .start, .pseudo, .corr, .theta, .busy, .out_valid, .out_ready, .q, .fired_neg);

  initial begin
    pseudo = '0; corr = '0; theta = 16'd1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      int nm, a, w, dot, p, cyc, r, th;
      int c [2:8];
      nm = int'($urandom_range(40));
      th = 1 + int'($urandom_range(30));
      dot = 0; p = 0;
      for (int t = 2; t <= 8; t++) c[t] = 0;
      // bias the weights per test so both clipping ends and cancellation occur
      for (int k = 0; k < nm; k++) begin
        a = 1 + int'($urandom_range(7));
        w = int'($urandom_range(14)) - 7;
        if (it % 3 == 1 && w < 0) w = -w;
        dot += a * w; p += w;
        for (int t = 2; t <= 8; t++) if (a < t) c[t] += w;
      end
      @(negedge clk);
      pseudo = 12'(p);
      for (int t = 2; t <= 8; t++) corr[t-2] = 10'(c[t]);
      theta = 16'(th);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!out_valid) begin
        checks += 0;
        cyc++;
        @(negedge clk);
      end
      r = qcfs_ref(dot, th, L);
      if (r == L) n_hi++;
      if (r == 0) n_lo++;
      checks++;
      if (int'(q) != r) begin
        failures++;
        if (failures < 5) $display("dot=%0d th=%0d q=%0d ref=%0d", dot, th, q, r);
      end
      checks++;
      if (cyc != T) begin
        failures++;
        if (failures < 5) $display("latency %0d", cyc);
      end
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
    end
    checks++;
    if (n_inh == 0 || n_hi == 0 || n_lo == 0) begin
      failures++;
      $display("coverage inh=%0d hi=%0d lo=%0d", n_inh, n_hi, n_lo);
    end
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
