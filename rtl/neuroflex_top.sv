// neuroflex_top: the NeuroFlex column-level hybrid ANN/SNN accelerator.
//
// Every output column of a layer runs either as an ANN neuron (MAC + QCFS)
// or as its integer-exact SNN equivalent (spike generation, accumulate-only
// integration, 23-step integrate-and-fire), chosen per column by an offline
// bitmask, and both kinds run at the same time on two cores. Blocks:
//   nf_scheduler    command queue, mode bitmask, column dispatch
//   nf_ann_core     NPE_ANN ANN PEs (default 16) with fiber fetchers
//   nf_snn_core     NPE_SNN SNN PEs (default 16) with fiber fetchers
//   nf_xbar  x2     32x32 crossbars: activation lines, weight lines
//   nf_fiber_cache  NBANK banks, LINES lines (default 32 banks, 512 KB)
//   nf_compressor   bitmap encoding of the INT8 outputs back to the cache
// Fig. 2 of the paper draws FiberCache -> Scheduler -> cores; here the
// scheduler sends fiber pointers and each PE's fetcher reads the lines
// through the crossbars, which is how that path is realised.
// Crossbar requester r < NPE_ANN is ANN PE r, the rest are SNN PEs.
//
// Host interface (standing for the HBM side and the host control, which are
// outside this design): line write/read ports into the cache, mode-mask
// bit writes, and the layer command queue. busy is high while a layer is
// queued or running; layer_done pulses when a layer's last output line is
// written. The stat_* outputs pulse on internal events for monitoring.
module neuroflex_top
  import nf_pkg::*;
#(
  parameter int NPE_ANN   = 16,
  parameter int NPE_SNN   = 16,
  parameter int NBANK     = 32,
  parameter int LINES     = 4096,
  parameter int MASK_BITS = 8192
) (
  input  logic             clk,
  input  logic             rst_n,
  // layer commands
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  cmd_t             cmd,
  // mode bitmask
  input  logic             mask_we,
  input  logic [IDX_W-1:0] mask_addr,
  input  logic             mask_bit,
  // host / HBM line access
  input  logic             host_we,
  input  ptr_t             host_waddr,
  input  line_t            host_wline,
  input  logic             host_re,
  input  ptr_t             host_raddr,
  output logic             host_rvalid,
  output line_t            host_rline,
  // status
  output logic             busy,
  output logic             layer_done,
  output logic             stat_ann_job,
  output logic             stat_snn_job,
  output logic             stat_dispatch_stall,
  output logic             stat_bubble,
  output logic             stat_snn_fifo_stall,
  output logic             stat_inhibit,
  output logic             stat_xbar_conflict,
  output logic             stat_zero_out,
  output logic             stat_cw_stall
);
  localparam int NREQ = NPE_ANN + NPE_SNN;

  // scheduler
  logic ann_jv, ann_jr, snn_jv, snn_jr;
  job_t job;
  logic seg_start, seg_last, seg_busy, seg_done, sched_busy;
  ptr_t seg_addr, seg_next;
  logic [IDX_W-1:0] seg_col0;
  logic [POS_W:0]   seg_count;

  nf_scheduler #(.MASK_BITS(MASK_BITS)) u_sched (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .mask_we, .mask_addr, .mask_bit,
    .ann_job_valid(ann_jv), .ann_job_ready(ann_jr), .snn_job_valid(snn_jv), .snn_job_ready(snn_jr),
    .job(job), .seg_start, .seg_addr, .seg_col0, .seg_count, .seg_last, .seg_next,
    .seg_busy, .seg_done, .busy(sched_busy), .layer_done, .dispatch_stall(stat_dispatch_stall));

  // crossbar request/response per requester
  logic  [NREQ-1:0] xa_v, xa_r, xa_rsp, xb_v, xb_r, xb_rsp;
  ptr_t  [NREQ-1:0] xa_a, xb_a;
  line_t [NREQ-1:0] xa_l, xb_l;

  // cores
  logic    a_rv, a_rr, s_rv, s_rr, a_idle, s_idle, a_bub, s_bub;
  result_t a_res, s_res;
  logic [NPE_ANN-1:0] a_busy;
  logic [NPE_SNN-1:0] s_busy;

  nf_ann_core #(.NPE(NPE_ANN)) u_ann (
    .clk, .rst_n, .job_valid(ann_jv), .job_ready(ann_jr), .job(job),
    .ra_valid(xa_v[NPE_ANN-1:0]), .ra_addr(xa_a[NPE_ANN-1:0]), .ra_ready(xa_r[NPE_ANN-1:0]),
    .ra_rsp(xa_rsp[NPE_ANN-1:0]), .ra_line(xa_l[NPE_ANN-1:0]),
    .rb_valid(xb_v[NPE_ANN-1:0]), .rb_addr(xb_a[NPE_ANN-1:0]), .rb_ready(xb_r[NPE_ANN-1:0]),
    .rb_rsp(xb_rsp[NPE_ANN-1:0]), .rb_line(xb_l[NPE_ANN-1:0]),
    .res_valid(a_rv), .res_ready(a_rr), .res(a_res), .idle(a_idle), .pe_busy(a_busy),
    .bubble(a_bub));

  nf_snn_core #(.NPE(NPE_SNN)) u_snn (
    .clk, .rst_n, .job_valid(snn_jv), .job_ready(snn_jr), .job(job),
    .ra_valid(xa_v[NREQ-1:NPE_ANN]), .ra_addr(xa_a[NREQ-1:NPE_ANN]), .ra_ready(xa_r[NREQ-1:NPE_ANN]),
    .ra_rsp(xa_rsp[NREQ-1:NPE_ANN]), .ra_line(xa_l[NREQ-1:NPE_ANN]),
    .rb_valid(xb_v[NREQ-1:NPE_ANN]), .rb_addr(xb_a[NREQ-1:NPE_ANN]), .rb_ready(xb_r[NREQ-1:NPE_ANN]),
    .rb_rsp(xb_rsp[NREQ-1:NPE_ANN]), .rb_line(xb_l[NREQ-1:NPE_ANN]),
    .res_valid(s_rv), .res_ready(s_rr), .res(s_res), .idle(s_idle), .pe_busy(s_busy),
    .bubble(s_bub), .fifo_stall(stat_snn_fifo_stall), .inhibit(stat_inhibit));

  // crossbars and cache
  logic  [NBANK-1:0] ba_re, bb_re;
  ptr_t  [NBANK-1:0] ba_addr, bb_addr;
  line_t [NBANK-1:0] ba_data, bb_data;
  logic              conf_a, conf_b;

  nf_xbar #(.NREQ(NREQ), .NBANK(NBANK)) u_xbar_a (
    .clk, .rst_n, .req_valid(xa_v), .req_addr(xa_a), .req_ready(xa_r), .rsp_valid(xa_rsp),
    .rsp_line(xa_l), .bank_re(ba_re), .bank_addr(ba_addr), .bank_rdata(ba_data), .conflict(conf_a));
  nf_xbar #(.NREQ(NREQ), .NBANK(NBANK)) u_xbar_b (
    .clk, .rst_n, .req_valid(xb_v), .req_addr(xb_a), .req_ready(xb_r), .rsp_valid(xb_rsp),
    .rsp_line(xb_l), .bank_re(bb_re), .bank_addr(bb_addr), .bank_rdata(bb_data), .conflict(conf_b));

  logic  cw_valid, cw_ready;
  ptr_t  cw_addr;
  line_t cw_line;

  nf_fiber_cache #(.NBANK(NBANK), .LINES(LINES)) u_cache (
    .clk, .rst_n, .ra_re(ba_re), .ra_addr(ba_addr), .ra_rdata(ba_data),
    .rb_re(bb_re), .rb_addr(bb_addr), .rb_rdata(bb_data),
    .cw_valid, .cw_ready, .cw_addr, .cw_line,
    .host_we, .host_waddr, .host_wline, .host_re, .host_raddr, .host_rvalid, .host_rline);

  // result merge of the two cores into the shared compressor
  logic [1:0] m_gnt;
  logic       m_idx;
  logic       c_rv, c_rr;
  result_t    c_res;
  nf_lrg_arbiter #(.N(2)) u_marb (
    .clk, .rst_n, .req({s_rv, a_rv}), .advance(c_rr), .gnt(m_gnt), .gnt_idx(m_idx));
  assign c_rv  = a_rv || s_rv;
  assign c_res = m_idx ? s_res : a_res;
  assign a_rr  = m_gnt[0] && c_rr;
  assign s_rr  = m_gnt[1] && c_rr;

  nf_compressor u_comp (
    .clk, .rst_n, .seg_start, .seg_addr, .seg_col0, .seg_count, .seg_last, .seg_next,
    .seg_busy, .seg_done, .res_valid(c_rv), .res_ready(c_rr), .res(c_res),
    .cw_valid, .cw_ready, .cw_addr, .cw_line, .zero_skipped(stat_zero_out));

  assign busy               = sched_busy || !a_idle || !s_idle || seg_busy;
  assign stat_ann_job       = ann_jv && ann_jr;
  assign stat_snn_job       = snn_jv && snn_jr;
  assign stat_bubble        = a_bub || s_bub;
  assign stat_xbar_conflict = conf_a || conf_b;
  assign stat_cw_stall      = cw_valid && !cw_ready;
endmodule
