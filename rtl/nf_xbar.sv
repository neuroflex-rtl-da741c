// nf_xbar: swizzle-switch style crossbar between PE fetchers and cache banks.
//
// NREQ requesters (PE fiber fetchers) read lines from NBANK FiberCache banks.
// A request carries a global line address; its bank is addr mod NBANK and
// its row inside the bank addr / NBANK (interleaving is this design's
// choice). Each bank output has a least-recently-granted arbiter, as a
// swizzle-switch crossbar does at its crosspoints. The winner sees req_ready
// in the same cycle, the bank is read at the clock edge and the line comes
// back on rsp_valid/rsp_line of the winner in the next cycle. Each requester
// must keep at most one request in flight (the paper's one credit per
// chunk), which the fetchers guarantee; responses are then unambiguous.
// The paper instantiates two 32x32 crossbars; this design uses one for
// activation lines and one for weight lines.
module nf_xbar
  import nf_pkg::*;
#(
  parameter int NREQ  = 32,
  parameter int NBANK = 32
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic  [NREQ-1:0]                     req_valid,
  input  ptr_t  [NREQ-1:0]                     req_addr,
  output logic  [NREQ-1:0]                     req_ready,
  output logic  [NREQ-1:0]                     rsp_valid,
  output line_t [NREQ-1:0]                     rsp_line,
  output logic  [NBANK-1:0]                    bank_re,
  output ptr_t  [NBANK-1:0]                    bank_addr,
  input  line_t [NBANK-1:0]                    bank_rdata,
  output logic                                 conflict   // two requests met at a bank (statistics)
);
  localparam int BW = $clog2(NBANK);
  localparam int RW = $clog2(NREQ);

  logic [NBANK-1:0][NREQ-1:0] breq, bgnt;
  logic [NBANK-1:0][RW-1:0]   bidx;
  logic [NBANK-1:0]           gv_q;
  logic [NBANK-1:0][RW-1:0]   gi_q;

  always_comb begin
    for (int b = 0; b < NBANK; b++)
      for (int r = 0; r < NREQ; r++)
        breq[b][r] = req_valid[r] && (int'(req_addr[r][BW-1:0]) == b);
  end

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    nf_lrg_arbiter #(.N(NREQ)) u_arb (
      .clk, .rst_n, .req(breq[b]), .advance(1'b1), .gnt(bgnt[b]), .gnt_idx(bidx[b]));
    assign bank_re[b]   = |breq[b];
    assign bank_addr[b] = ptr_t'(req_addr[bidx[b]] >> BW);
  end

  always_comb begin
    req_ready = '0;
    conflict  = 1'b0;
    for (int b = 0; b < NBANK; b++) begin
      req_ready = req_ready | bgnt[b];
      if ((breq[b] & (breq[b] - 1'b1)) != '0) conflict = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      gv_q <= '0; gi_q <= '0;
    end else begin
      for (int b = 0; b < NBANK; b++) begin
        gv_q[b] <= |breq[b];
        gi_q[b] <= bidx[b];
      end
    end
  end

  always_comb begin
    rsp_valid = '0;
    for (int r = 0; r < NREQ; r++) rsp_line[r] = '0;
    for (int b = 0; b < NBANK; b++)
      if (gv_q[b]) begin
        rsp_valid[gi_q[b]] = 1'b1;
        rsp_line[gi_q[b]]  = bank_rdata[b];
      end
  end
endmodule
