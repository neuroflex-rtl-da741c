// Self-checking test of nf_qcfs against a floor-division QCFS reference,
// including both clipping ends and odd steps.
module tb_nf_qcfs;
  import tb_nf_util::*;
  logic signed [23:0] acc;
  logic [15:0] theta;
  logic [7:0] q;
  int checks = 0, failures = 0, clip_hi = 0, clip_lo = 0;
  nf_qcfs #(.L(8), .ACC_W(24), .TH_W(16)) dut (.acc, .theta, .q);
  initial begin
    for (int it = 0; it < 5000; it++) begin
      int a, th, r;
      th = 1 + int'($urandom_range(200));
      a  = int'($urandom_range(12 * th)) - 2 * th;
      if (it % 7 == 0) a = int'($urandom_range(2000000)) - 1000000;
      acc = 24'(a); theta = 16'(th);
      #1;
      r = qcfs_ref(a, th, 8);
      if (r == 8) clip_hi++;
      if (r == 0) clip_lo++;
      checks++;
      if (int'(q) != r) begin
        failures++;
        if (failures < 5) $display("acc=%0d th=%0d q=%0d ref=%0d", a, th, q, r);
      end
    end
    checks++;
    if (clip_hi == 0 || clip_lo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
