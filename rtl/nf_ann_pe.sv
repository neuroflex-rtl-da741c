// nf_ann_pe: sparse inner-product ANN processing element.
//
// Computes one output neuron C[row][col] = QCFS(sum_k A[row][k] * B[k][col])
// over the matched non-zeros of the activation and weight fibers, following
// the SparTen-style PE of the paper (Fig. 3): bitmap inner join with two fast
// prefix circuits, FIFO A / FIFO B (depth 128), a MAC and a QCFS stage.
//
// Pipeline, per chunk: cycle 0 loads the chunk (bitmaps and packed values)
// and issues nothing - this is the single bubble between consecutive chunks;
// each following cycle issues the lowest remaining match, reading the
// activation and weight at their prefix offsets into FIFO A / FIFO B; the MAC
// pops both FIFOs one cycle later. The first product is thus accumulated two
// cycles after the chunk arrives (two-cycle warm-up), and a chunk with m
// matches occupies the join for m+1 cycles (1 if it has none). When the last
// chunk of the neuron is issued and the FIFOs are empty, the QCFS stage
// registers the level into the result register, held until res_ready.
//
// Interface: job_valid/job_ready accepts a neuron (only when idle);
// chunk_valid/chunk_ready delivers its chunks in order, chunk.a.last marking
// the final one; res_valid/res_ready returns the INT8 level with row/col.
// The 24-bit accumulator width is this design's choice.
module nf_ann_pe
  import nf_pkg::*;
#(
  parameter int FIFO_DEPTH = 128,
  parameter int ACC_W      = 24,
  parameter int L          = 8
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
  output logic    bubble      // a chunk was loaded this cycle (statistics)
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_OUT} state_e;
  state_e state;

  job_t                  job_r;
  logic                  have_chunk, last_chunk, issue_done;
  logic [CHUNK-1:0]      bm_a, bm_b, done_mask;
  logic [CHUNK-1:0][7:0] va, vb;
  logic signed [ACC_W-1:0] acc;

  // inner join
  logic             j_any, j_last;
  logic [POS_W-1:0] j_pos;
  logic [OFF_W-1:0] j_off_a, j_off_b;
  nf_inner_join #(.FAST_A(1'b1)) u_join (
    .bm_a(bm_a), .bm_b(bm_b), .done_mask(done_mask),
    .any(j_any), .last(j_last), .pos(j_pos), .off_a(j_off_a), .off_b(j_off_b));

  // FIFO A / FIFO B
  logic       fa_empty, fa_full, fb_empty, fb_full, issue, mac_pop;
  logic [7:0] fa_q, fb_q;
  assign issue   = have_chunk && j_any && !fa_full;
  assign mac_pop = !fa_empty && !fb_empty;
  nf_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) u_fifo_a (
    .clk, .rst_n, .push(issue), .wdata(va[j_off_a[POS_W-1:0]]), .pop(mac_pop),
    .rdata(fa_q), .empty(fa_empty), .full(fa_full), .count());
  nf_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) u_fifo_b (
    .clk, .rst_n, .push(issue), .wdata(vb[j_off_b[POS_W-1:0]]), .pop(mac_pop),
    .rdata(fb_q), .empty(fb_empty), .full(fb_full), .count());

  // QCFS stage
  logic [7:0] q_c;
  nf_qcfs #(.L(L), .ACC_W(ACC_W), .TH_W(TH_W)) u_qcfs (.acc(acc), .theta(job_r.theta), .q(q_c));

  logic load;
  assign job_ready   = (state == S_IDLE);
  assign chunk_ready = (state == S_RUN) && !have_chunk && !issue_done;
  assign load        = chunk_valid && chunk_ready;
  assign busy        = (state != S_IDLE);
  assign bubble      = load;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; have_chunk <= 1'b0; last_chunk <= 1'b0; issue_done <= 1'b0;
      done_mask <= '0; acc <= '0; res_valid <= 1'b0; res <= '0; job_r <= '0;
      bm_a <= '0; bm_b <= '0; va <= '0; vb <= '0;
    end else begin
      // MAC
      if (mac_pop) acc <= acc + ACC_W'($signed(fa_q) * $signed(fb_q));
      case (state)
        S_IDLE: if (job_valid) begin
          job_r <= job; state <= S_RUN; acc <= '0; issue_done <= 1'b0; have_chunk <= 1'b0;
        end
        S_RUN: begin
          if (load) begin
            bm_a <= chunk.a.mask; bm_b <= chunk.b.mask;
            va <= chunk.a.vals;   vb <= chunk.b.vals;
            done_mask  <= '0;
            last_chunk <= chunk.a.last;
            if ((chunk.a.mask & chunk.b.mask) == '0) begin  // nothing to join
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
          if (issue_done && fa_empty && !mac_pop) begin
            res.row <= job_r.row; res.col <= job_r.col; res.q <= q_c;
            res_valid <= 1'b1;
            state <= S_OUT;
          end
        end
        S_OUT: if (res_ready) begin
          res_valid <= 1'b0;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
