// Self-checking test of nf_inner_join: lowest remaining match, last flag and
// both prefix offsets against a bit-by-bit scan of random bitmaps.
module tb_nf_inner_join;
  import nf_pkg::*;
  logic [127:0] bm_a, bm_b, done_mask;
  logic any, last;
  logic [6:0] pos;
  logic [7:0] off_a, off_b;
  int checks = 0, failures = 0;
  nf_inner_join #(.FAST_A(1'b1)) dut (.bm_a, .bm_b, .done_mask, .any, .last, .pos, .off_a, .off_b);
  initial begin
    for (int it = 0; it < 3000; it++) begin
      int ref_pos, nmatch, ea, eb;
      bm_a = {$urandom, $urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom, $urandom};
      bm_b = {$urandom, $urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom, $urandom};
      done_mask = (it % 4 == 0) ? '0 : {$urandom, $urandom, $urandom, $urandom} | {$urandom, $urandom, $urandom, $urandom};
      #1;
      ref_pos = -1; nmatch = 0;
      for (int i = 127; i >= 0; i--)
        if (bm_a[i] && bm_b[i] && !done_mask[i]) begin ref_pos = i; nmatch++; end
      checks++;
      if (any != (ref_pos >= 0) || (ref_pos >= 0 && (int'(pos) != ref_pos || last != (nmatch == 1)))) begin
        failures++;
        if (failures < 5) $display("join mismatch ref=%0d pos=%0d", ref_pos, pos);
      end
      if (ref_pos >= 0) begin
        ea = 0; eb = 0;
        for (int i = 0; i < ref_pos; i++) begin ea += int'(bm_a[i]); eb += int'(bm_b[i]); end
        checks++;
        if (int'(off_a) != ea || int'(off_b) != eb) failures++;
      end
    end
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
