// nf_ann_core: the ANN core, NPE ANN processing elements.
//
// Each PE has its own fiber fetcher (nf_fiber_fetch) that reads activation
// and weight lines through the two crossbars. The scheduler hands jobs to
// the core one at a time; the core gives each to the lowest-numbered idle
// PE (the paper's greedy filling of idle PEs; lowest index first is this
// design's choice). job_ready is high while some PE is idle. Results of the
// PEs leave through a least-recently-granted merge, one per cycle, to the
// shared compressor. The ANN and SNN cores have identical control and
// interfaces, so a column can run on either.
//
// Crossbar ports are per PE: request valid/address, grant, response.
// Statistic output: bubble (some PE loaded a chunk this cycle).
module nf_ann_core
  import nf_pkg::*;
#(
  parameter int NPE = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               job_valid,
  output logic               job_ready,
  input  job_t               job,
  output logic  [NPE-1:0]    ra_valid,
  output ptr_t  [NPE-1:0]    ra_addr,
  input  logic  [NPE-1:0]    ra_ready,
  input  logic  [NPE-1:0]    ra_rsp,
  input  line_t [NPE-1:0]    ra_line,
  output logic  [NPE-1:0]    rb_valid,
  output ptr_t  [NPE-1:0]    rb_addr,
  input  logic  [NPE-1:0]    rb_ready,
  input  logic  [NPE-1:0]    rb_rsp,
  input  line_t [NPE-1:0]    rb_line,
  output logic               res_valid,
  input  logic               res_ready,
  output result_t            res,
  output logic               idle,
  output logic  [NPE-1:0]    pe_busy,
  output logic               bubble
);
  localparam int PW = (NPE > 1) ? $clog2(NPE) : 1;

  logic    [NPE-1:0] pe_free, pe_start, f_idle, pe_jready;
  logic    [NPE-1:0] c_valid, c_ready, r_valid, r_ready, pe_bub;
  chunk_t  [NPE-1:0] c_data;
  result_t [NPE-1:0] r_data;
  logic    [NPE-1:0] sel;

  // greedy dispatch to the lowest idle PE
  assign pe_free = pe_jready & f_idle;
  always_comb begin
    sel = '0;
    for (int p = NPE - 1; p >= 0; p--)
      if (pe_free[p]) sel = NPE'(1) << p;
  end
  assign job_ready = |pe_free;
  assign pe_start  = sel & {NPE{job_valid}};

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    nf_fiber_fetch u_fetch (
      .clk, .rst_n, .start(pe_start[p]), .a_ptr(job.a_ptr), .b_ptr(job.b_ptr), .idle(f_idle[p]),
      .ra_valid(ra_valid[p]), .ra_addr(ra_addr[p]), .ra_ready(ra_ready[p]), .ra_rsp(ra_rsp[p]), .ra_line(ra_line[p]),
      .rb_valid(rb_valid[p]), .rb_addr(rb_addr[p]), .rb_ready(rb_ready[p]), .rb_rsp(rb_rsp[p]), .rb_line(rb_line[p]),
      .chunk_valid(c_valid[p]), .chunk_ready(c_ready[p]), .chunk(c_data[p]));
    nf_ann_pe u_pe (
      .clk, .rst_n, .job_valid(pe_start[p]), .job_ready(pe_jready[p]), .job(job),
      .chunk_valid(c_valid[p]), .chunk_ready(c_ready[p]), .chunk(c_data[p]),
      .res_valid(r_valid[p]), .res_ready(r_ready[p]), .res(r_data[p]),
      .busy(pe_busy[p]), .bubble(pe_bub[p]));
  end

  // result merge
  logic [NPE-1:0] r_gnt;
  logic [PW-1:0]  r_idx;
  nf_lrg_arbiter #(.N(NPE)) u_rarb (
    .clk, .rst_n, .req(r_valid), .advance(res_ready), .gnt(r_gnt), .gnt_idx(r_idx));
  assign res_valid = |r_valid;
  assign res       = r_data[r_idx];
  assign r_ready   = r_gnt & {NPE{res_ready}};

  assign idle   = !(|pe_busy) && (&f_idle);
  assign bubble = |pe_bub;
endmodule
