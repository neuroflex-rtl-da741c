// Self-checking test of nf_xbar (32 x 32): 32 requesters each keep one
// random line request in flight; every response must carry the requested
// line, arrive exactly one cycle after the grant, and at most one requester
// may win a bank per cycle. A fairness phase makes requesters 0 and 1 fight
// for one bank: least-recently-granted arbitration must alternate them.
module tb_nf_xbar;
  import nf_pkg::*;
  localparam int NREQ = 32, NBANK = 32;
  logic clk = 0, rst_n = 0;
  logic  [NREQ-1:0] req_valid, req_ready, rsp_valid;
  ptr_t  [NREQ-1:0] req_addr;
  line_t [NREQ-1:0] rsp_line;
  logic  [NBANK-1:0] bank_re;
  ptr_t  [NBANK-1:0] bank_addr;
  line_t [NBANK-1:0] bank_rdata;
  logic conflict;
  int checks = 0, failures = 0, n_conf = 0, responses = 0;
  always #5 clk = ~clk;
  nf_xbar #(.NREQ(NREQ), .NBANK(NBANK)) dut (.clk, .rst_n, .req_valid, .req_addr, .req_ready,
    .rsp_valid, .rsp_line, .bank_re, .bank_addr, .bank_rdata, .conflict);

  // bank model: a line carries its own global address in next
  always_ff @(posedge clk)
    for (int b = 0; b < NBANK; b++)
      if (bank_re[b]) begin
        bank_rdata[b] <= '0;
        bank_rdata[b].next <= ptr_t'((32'(bank_addr[b]) << 5) | b);
      end

  logic [NREQ-1:0] waiting;
  ptr_t [NREQ-1:0] want;
  logic fair_phase = 0;
  int last_winner = -1, alternations = 0, fair_grants = 0;

  always @(posedge clk) if (rst_n) begin
    if (conflict) n_conf++;
    for (int r = 0; r < NREQ; r++) begin
      if (rsp_valid[r]) begin
        checks++;
        responses++;
        if (!waiting[r] || rsp_line[r].next != want[r]) begin
          failures++;
          if (failures < 5) $display("bad rsp r=%0d", r);
        end
        waiting[r] <= 1'b0;
      end else if (waiting[r]) begin
        failures++;               // response must come the cycle after grant
        waiting[r] <= 1'b0;
      end
      if (req_valid[r] && req_ready[r]) begin
        waiting[r] <= 1'b1;
        want[r] <= req_addr[r];
      end
    end
    for (int b = 0; b < NBANK; b++) begin
      int n;
      n = 0;
      for (int r = 0; r < NREQ; r++)
        if (req_valid[r] && req_ready[r] && int'(req_addr[r][4:0]) == b) n++;
      if (n > 1) failures++;
    end
    if (fair_phase) begin
      for (int r = 0; r < 2; r++)
        if (req_ready[r]) begin
          fair_grants++;
          if (last_winner >= 0 && last_winner != r) alternations++;
          last_winner = r;
        end
    end
  end

  initial begin
    req_valid = '0; req_addr = '0; waiting = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      for (int r = 0; r < NREQ; r++) begin
        if (req_valid[r] && req_ready[r]) req_valid[r] = 1'b0;
        else if (!req_valid[r] && !waiting[r] && !rsp_valid[r] && $urandom_range(3) != 0) begin
          req_valid[r] = 1'b1;
          req_addr[r]  = ptr_t'($urandom_range(4095));
        end
      end
    end
    @(negedge clk);
    req_valid = '0;
    repeat (3) @(negedge clk);
    // fairness: requesters 0 and 1 hammer line 5
    fair_phase = 1;
    for (int cyc = 0; cyc < 40; cyc++) begin
      req_valid[1:0] = 2'b11;
      req_addr[0] = ptr_t'(5);
      req_addr[1] = ptr_t'(5 + 32);
      @(negedge clk);
    end
    fair_phase = 0;
    req_valid = '0;
    checks++;
    if (fair_grants != 40 || alternations != 39) begin
      failures++;
      $display("fairness grants=%0d alternations=%0d", fair_grants, alternations);
    end
    checks++;
    if (n_conf == 0 || responses < 1000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
