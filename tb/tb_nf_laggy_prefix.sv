// Self-checking test of nf_laggy_prefix: after start, position p must become
// ready exactly p/16 + 1 cycles later with offset = popcount of the bits below
// p (segment s ready once s+1 compute cycles have passed after the loading
// edge), and done must rise after the 8 compute cycles.
module tb_nf_laggy_prefix;
  logic clk = 0, rst_n = 0, start = 0;
  logic [127:0] mask;
  logic [6:0] pos;
  logic [7:0] offset;
  logic ready, done;
  int checks = 0, failures = 0;
  always #25 clk = ~clk;
  nf_laggy_prefix #(.W(128), .ADDERS(16)) dut (.clk, .rst_n, .start, .mask, .pos, .offset, .ready, .done);

  initial begin
    mask = '0; pos = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      @(negedge clk);
      mask = {$urandom, $urandom, $urandom, $urandom};
      start = 1;
      @(negedge clk);
      start = 0;
      // cycle c (c = 1..8 after the start edge): segments 0..c-1 ready
      for (int c = 1; c <= 10; c++) begin
        for (int q = 0; q < 8; q++) begin
          pos = 7'(q * 16 + int'($urandom_range(15)));
          #1;
          checks++;
          if (ready != (q < c - 1)) begin
            failures++;
            if (failures < 5) $display("ready wrong c=%0d pos=%0d", c, pos);
          end
          if (q < c - 1) begin
            checks++;
            if (int'(offset) != $countones(mask & ((128'd1 << pos) - 128'd1))) failures++;
          end
        end
        checks++;
        if (done != (c >= 9)) begin
          failures++;
          if (failures < 5) $display("done wrong c=%0d", c);
        end
        @(negedge clk);
      end
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
