// Self-checking test of nf_fast_prefix: random bitmaps and positions against
// a population count of the masked bitmap.
module tb_nf_fast_prefix;
  logic [127:0] mask;
  logic [6:0]   pos;
  logic [7:0]   offset;
  int checks = 0, failures = 0;
  nf_fast_prefix #(.W(128)) dut (.mask, .pos, .offset);
  initial begin
    for (int it = 0; it < 2000; it++) begin
      mask = {$urandom, $urandom, $urandom, $urandom};
      if (it % 3 == 0) mask = mask & {$urandom, $urandom, $urandom, $urandom};
      pos = 7'($urandom);
      #1;
      checks++;
      if (int'(offset) != $countones(mask & ((128'd1 << pos) - 128'd1))) begin
        failures++;
        if (failures < 5) $display("mismatch pos=%0d off=%0d", pos, offset);
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
