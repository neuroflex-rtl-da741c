// Self-checking test of nf_ann_core (16 PEs): the testbench plays crossbar
// and cache, granting every request and returning the addressed line one
// cycle later. 120 random neurons of two chunks each are dispatched; every
// result must match the reference QCFS of the dot product, each exactly once.
// The first job must go to PE 0 and, while PE 0 is busy, the second to PE 1
// (greedy lowest-idle dispatch), and PEs must work in parallel.
module tb_nf_ann_core;
  import nf_pkg::*;
  import tb_nf_util::*;
  localparam int NPE = 16, NJOB = 120;
  logic clk = 0, rst_n = 0;
  logic job_valid = 0, job_ready, res_valid, res_ready = 1, idle, bubble;
  job_t job;
  result_t res;
  logic  [NPE-1:0] ra_valid, ra_ready, ra_rsp, rb_valid, rb_ready, rb_rsp, pe_busy;
  ptr_t  [NPE-1:0] ra_addr, rb_addr;
  line_t [NPE-1:0] ra_line, rb_line;
  line_t mem [1024];
  int    expq [NJOB];
  bit    seen [NJOB];
  int checks = 0, failures = 0, max_par = 0, nres = 0;
  always #5 clk = ~clk;
  nf_ann_core #(.NPE(NPE)) dut (.clk, .rst_n, .job_valid, .job_ready, .job,
    .ra_valid, .ra_addr, .ra_ready, .ra_rsp, .ra_line, .rb_valid, .rb_addr, .rb_ready, .rb_rsp, .rb_line,
    .res_valid, .res_ready, .res, .idle, .pe_busy, .bubble);

  assign ra_ready = ra_valid;
  assign rb_ready = rb_valid;
  always_ff @(posedge clk) begin
    ra_rsp <= ra_valid;
    rb_rsp <= rb_valid;
    for (int p = 0; p < NPE; p++) begin
      ra_line[p] <= mem[ra_addr[p][9:0]];
      rb_line[p] <= mem[rb_addr[p][9:0]];
    end
  end
  always @(posedge clk) if (rst_n) begin
    if ($countones(pe_busy) > max_par) max_par = $countones(pe_busy);
    if (res_valid && res_ready) begin
      int j;
      j = int'(res.col);
      nres++;
      checks++;
      if (j >= NJOB || seen[j] || int'(res.q) != expq[j] || int'(res.row) != j + 1) begin
        failures++;
        if (failures < 5) $display("bad result col=%0d q=%0d", res.col, res.q);
      end else seen[j] = 1;
    end
  end

  initial begin
    job = '0;
    // job j: A lines at 4j, 4j+1; B lines at 4j+2, 4j+3
    for (int j = 0; j < NJOB; j++) begin
      int dot;
      logic [CHUNK-1:0][7:0] da, db;
      dot = 0;
      for (int c = 0; c < 2; c++) begin
        da = rand_dense(40, 1, 8);
        db = rand_dense(40, -3, 3);
        for (int i = 0; i < CHUNK; i++) dot += int'(da[i]) * int'($signed(db[i]));
        mem[4 * j + c]     = pack_line(da, c == 1, ptr_t'(4 * j + 1));
        mem[4 * j + 2 + c] = pack_line(db, c == 1, ptr_t'(4 * j + 3));
      end
      expq[j] = qcfs_ref(dot, 10, 8);
      seen[j] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < NJOB; j++) begin
      @(negedge clk);
      job = '{row: IDX_W'(j + 1), col: IDX_W'(j), a_ptr: ptr_t'(4 * j), b_ptr: ptr_t'(4 * j + 2), theta: 16'd10};
      job_valid = 1;
      #1;
      while (!job_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      job_valid = 0;
      if (j == 0) begin checks++; if (pe_busy != 16'h0001) failures++; end
      if (j == 1) begin checks++; if (pe_busy != 16'h0003) failures++; end
    end
    while (nres < NJOB) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (!idle || max_par < 8) begin failures++; $display("idle=%0d max_par=%0d", idle, max_par); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
