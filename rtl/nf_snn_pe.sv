// nf_snn_pe: PASCAL-equivalent sparse SNN processing element.
//
// Produces the same INT8 level as the ANN PE for one neuron, but by
// accumulate-only spiking arithmetic (paper Fig. 4 and Sec. 5.1):
//  * inner join with one fast prefix (weight offsets, single cycle) and one
//    laggy prefix (activation offsets, 16 per cycle, 8 cycles per chunk);
//  * each cycle the lowest remaining match is issued: its position goes to
//    FIFO A and its weight (read at the fast-prefix offset) to FIFO B, both
//    depth 8;
//  * once the laggy prefix covers the head position, both FIFOs pop: the
//    activation is read at the laggy offset and turned into a spike train
//    by nf_spike_gen (only matched activations are ever spike-encoded);
//    the 12-bit pseudo-accumulator adds the weight (every match spikes at
//    t=1) and each of the seven 10-bit correction accumulators t = 2..L adds
//    the weight when the train has no spike at t;
//  * when the last chunk has drained, P and C are handed to the membrane
//    unit, which runs the 3L-1 = 23 step spike count and membrane
//    reinitialisation, while this PE can already take its next neuron.
// A new chunk is loaded only once FIFO A has drained, because the FIFO
// entries still index the current chunk's activation buffer (this design's
// choice; it costs the laggy latency at chunk boundaries with few matches).
// The loading cycle issues nothing (the single inter-chunk bubble).
// Accumulators wrap at the paper's widths; workloads must keep per-neuron
// weight sums within 12 / 10 bits signed.
//
// Interface: identical to nf_ann_pe (job, chunk, result handshakes).
module nf_snn_pe
  import nf_pkg::*;
#(
  parameter int FIFO_DEPTH = 8,
  parameter int L          = 8,
  parameter int PACC_W     = 12,
  parameter int CACC_W     = 10
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    job_valid,
  output logic    job_ready,
  input  job_t    job,
  input  logic    chunk_valid,
  output logic    chunk_ready,
  input  chunk_t  chunk,
  output logic    res_valid,
  input  logic    res_ready,
  output result_t res,
  output logic    busy,
  output logic    bubble,      // a chunk was loaded this cycle (statistics)
  output logic    fifo_stall,  // a match waited for FIFO space (statistics)
  output logic    inhibit      // the membrane unit fired an inhibitory spike
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FIRE} state_e;
  state_e state;

  job_t                  job_r;
  logic [IDX_W-1:0]      f_row, f_col;        // neuron in the membrane unit
  logic                  have_chunk, last_chunk, issue_done;
  logic [CHUNK-1:0]      bm_a, bm_b, done_mask;
  logic [CHUNK-1:0][7:0] va, vb;
  logic signed [PACC_W-1:0]   pacc;
  logic [L-2:0][CACC_W-1:0]   cacc;

  // inner join with fast prefix on the weights only
  logic             j_any, j_last;
  logic [POS_W-1:0] j_pos;
  logic [OFF_W-1:0] j_off_b;
  nf_inner_join #(.FAST_A(1'b0)) u_join (
    .bm_a(bm_a), .bm_b(bm_b), .done_mask(done_mask),
    .any(j_any), .last(j_last), .pos(j_pos), .off_a(), .off_b(j_off_b));

  // FIFO A (positions) and FIFO B (weights)
  logic             fa_empty, fa_full, fb_empty, fb_full, issue, pop, load;
  logic [POS_W-1:0] fa_q;
  logic [7:0]       fb_q;
  assign issue = have_chunk && j_any && !fa_full;
  nf_fifo #(.WIDTH(POS_W), .DEPTH(FIFO_DEPTH)) u_fifo_a (
    .clk, .rst_n, .push(issue), .wdata(j_pos), .pop(pop),
    .rdata(fa_q), .empty(fa_empty), .full(fa_full), .count());
  nf_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) u_fifo_b (
    .clk, .rst_n, .push(issue), .wdata(vb[j_off_b[POS_W-1:0]]), .pop(pop),
    .rdata(fb_q), .empty(fb_empty), .full(fb_full), .count());

  // laggy prefix over the activation bitmap
  logic [OFF_W-1:0] l_off;
  logic             l_ready;
  nf_laggy_prefix #(.W(CHUNK), .ADDERS(16)) u_laggy (
    .clk, .rst_n, .start(load), .mask(chunk.a.mask), .pos(fa_q),
    .offset(l_off), .ready(l_ready), .done());
  assign pop = !fa_empty && !fb_empty && l_ready;

  // spike generation of the popped activation
  logic [L-1:0] spikes;
  nf_spike_gen #(.L(L)) u_sgen (.act(va[l_off[POS_W-1:0]]), .spikes(spikes));

  // membrane unit
  logic       m_busy, m_valid, m_start;
  logic [7:0] m_q;
  nf_membrane_unit #(.L(L), .T(3*L-1), .PACC_W(PACC_W), .CACC_W(CACC_W), .V_W(18), .TH_W(TH_W)) u_mem (
    .clk, .rst_n, .start(m_start), .pseudo(pacc), .corr(cacc), .theta(job_r.theta),
    .busy(m_busy), .out_valid(m_valid), .out_ready(res_ready), .q(m_q), .fired_neg(inhibit));

  assign job_ready   = (state == S_IDLE);
  assign chunk_ready = (state == S_RUN) && !have_chunk && !issue_done && fa_empty;
  assign load        = chunk_valid && chunk_ready;
  assign m_start     = (state == S_FIRE) && !m_busy && !m_valid;
  assign busy        = (state != S_IDLE) || m_busy || m_valid;
  assign bubble      = load;
  assign fifo_stall  = have_chunk && j_any && fa_full;
  assign res_valid   = m_valid;
  assign res         = '{row: f_row, col: f_col, q: m_q};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; have_chunk <= 1'b0; last_chunk <= 1'b0; issue_done <= 1'b0;
      done_mask <= '0; pacc <= '0; cacc <= '0; job_r <= '0; f_row <= '0; f_col <= '0;
      bm_a <= '0; bm_b <= '0; va <= '0; vb <= '0;
    end else begin
      if (pop) begin
        pacc <= pacc + PACC_W'($signed(fb_q));
        for (int t = 2; t <= L; t++)
          if (!spikes[t-1]) cacc[t-2] <= cacc[t-2] + CACC_W'($signed(fb_q));
      end
      case (state)
        S_IDLE: if (job_valid) begin
          job_r <= job; state <= S_RUN; issue_done <= 1'b0; have_chunk <= 1'b0;
          pacc <= '0; cacc <= '0;
        end
        S_RUN: begin
          if (load) begin
            bm_a <= chunk.a.mask; bm_b <= chunk.b.mask;
            va <= chunk.a.vals;   vb <= chunk.b.vals;
            done_mask  <= '0;
            last_chunk <= chunk.a.last;
            if ((chunk.a.mask & chunk.b.mask) == '0) begin
              have_chunk <= 1'b0;
              issue_done <= chunk.a.last;
            end else
              have_chunk <= 1'b1;
          end else if (issue) begin
            done_mask[j_pos] <= 1'b1;
            if (j_last) begin
              have_chunk <= 1'b0;
              issue_done <= last_chunk;
            end
          end
          if (issue_done && fa_empty) state <= S_FIRE;
        end
        S_FIRE: if (m_start) begin
          f_row <= job_r.row; f_col <= job_r.col;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
