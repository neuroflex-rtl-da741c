// Self-checking test of nf_spike_gen: every INT8 level gives min(act, L)
// spikes, all in the earliest timesteps (thermometer code).
module tb_nf_spike_gen;
  logic [7:0] act;
  logic [7:0] spikes;
  int checks = 0, failures = 0;
  nf_spike_gen #(.L(8)) dut (.act, .spikes);
  initial begin
    for (int a = 0; a < 256; a++) begin
      int n;
      act = 8'(a);
      #1;
      n = (a > 8) ? 8 : a;
      checks++;
      if ($countones(spikes) != n) failures++;
      checks++;
      if (spikes != 8'((16'd1 << n) - 16'd1)) begin
        failures++;
        if (failures < 5) $display("act=%0d spikes=%b", a, spikes);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
