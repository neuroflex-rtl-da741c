// Self-checking test of nf_fiber_cache: the host fills lines, the two bank
// read ports and the host read port must return them one cycle later, a
// compressor write must land unless the host writes the same bank in that
// cycle (then cw_ready is low and nothing is written).
module tb_nf_fiber_cache;
  import nf_pkg::*;
  localparam int NBANK = 32, LINES = 4096;
  logic clk = 0, rst_n = 0;
  logic  [NBANK-1:0] ra_re, rb_re;
  ptr_t  [NBANK-1:0] ra_addr, rb_addr;
  line_t [NBANK-1:0] ra_rdata, rb_rdata;
  logic cw_valid, cw_ready, host_we, host_re, host_rvalid;
  ptr_t cw_addr, host_waddr, host_raddr;
  line_t cw_line, host_wline, host_rline;
  int checks = 0, failures = 0;
  line_t shadow [LINES];
  always #5 clk = ~clk;
  nf_fiber_cache #(.NBANK(NBANK), .LINES(LINES)) dut (.clk, .rst_n, .ra_re, .ra_addr, .ra_rdata,
    .rb_re, .rb_addr, .rb_rdata, .cw_valid, .cw_ready, .cw_addr, .cw_line,
    .host_we, .host_waddr, .host_wline, .host_re, .host_raddr, .host_rvalid, .host_rline);

  function automatic line_t mk(int a, int salt);
    line_t l;
    l = '0;
    l.mask = {4{32'(a * 2654435761 + salt)}};
    l.vals[0] = 8'(a); l.vals[127] = 8'(salt);
    l.next = ptr_t'(a);
    return l;
  endfunction

  initial begin
    ra_re = '0; rb_re = '0; ra_addr = '0; rb_addr = '0; cw_valid = 0; cw_addr = '0; cw_line = '0;
    host_we = 0; host_re = 0; host_waddr = '0; host_raddr = '0; host_wline = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill 512 lines through the host port
    for (int a = 0; a < 512; a++) begin
      @(negedge clk);
      host_we = 1; host_waddr = ptr_t'(a * 8 + 3); host_wline = mk(a * 8 + 3, 1);
      shadow[a * 8 + 3] = host_wline;
    end
    @(negedge clk);
    host_we = 0;
    // random reads on bank ports A and B
    for (int it = 0; it < 300; it++) begin
      int ga, gb;
      ga = (int'($urandom_range(511)) * 8 + 3);
      gb = (int'($urandom_range(511)) * 8 + 3);
      ra_re = '0; rb_re = '0;
      ra_re[ga % NBANK] = 1; ra_addr[ga % NBANK] = ptr_t'(ga / NBANK);
      rb_re[gb % NBANK] = 1; rb_addr[gb % NBANK] = ptr_t'(gb / NBANK);
      host_re = 1; host_raddr = ptr_t'(ga);
      @(negedge clk);
      checks += 3;
      if (ra_rdata[ga % NBANK] != shadow[ga]) failures++;
      if (rb_rdata[gb % NBANK] != shadow[gb]) failures++;
      if (!host_rvalid || host_rline != shadow[ga]) failures++;
    end
    ra_re = '0; rb_re = '0; host_re = 0;
    // compressor writes, some colliding with host writes on the same bank
    for (int it = 0; it < 100; it++) begin
      int a, h;
      a = 2048 + it;
      h = (it % 4 == 0) ? (a + 32 * 5) : (a + 1);
      cw_valid = 1; cw_addr = ptr_t'(a); cw_line = mk(a, 7);
      host_we = 1; host_waddr = ptr_t'(h); host_wline = mk(h, 9);
      #1;
      checks++;
      if (cw_ready != (it % 4 != 0)) failures++;
      if (cw_ready) shadow[a] = cw_line; else shadow[a] = '0;
      shadow[h] = host_wline;
      @(negedge clk);
      cw_valid = 0; host_we = 0;
      // clear a's slot in the shadow when not written: read back compares only written ones
      host_re = 1; host_raddr = ptr_t'(a);
      @(negedge clk);
      host_re = 0;
      if (it % 4 != 0) begin
        checks++;
        if (host_rline != shadow[a]) failures++;
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
