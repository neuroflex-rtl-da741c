// nf_scheduler: runtime dispatcher of column jobs to the ANN and SNN cores.
//
// The column-to-core assignment is decided offline by the compiler's cost
// model and deployed as a per-layer bitmask, bit n = 1 sending column n to
// the SNN core. The host writes those bits into the mode-mask memory and
// pushes layer commands into the unified command queue. For each layer the
// scheduler walks output rows m and, within a row, segments of up to 128
// columns: it opens the segment in the compressor, then issues one job per
// column with the mode token read from the bitmask, to the ANN or SNN core,
// waiting while that core has no idle PE (the core itself picks the PE).
// After the last job of a segment it waits until the compressor has written
// the segment's line, then moves on; layer_done pulses after the last one.
// Fiber addresses follow a fixed layout: row m of A at a_base + m*kseg,
// column n of B at b_base + n*kseg, output row m segment j at
// out_base + m*nseg + j, nseg = ceil(N/128). The layout, the segment barrier
// and the queue depth are this design's choices; the paper gives only the
// queue, the mode token and the greedy dispatch. The compiler's packing
// seeds are not used: any idle PE of the selected core takes the job.
module nf_scheduler
  import nf_pkg::*;
#(
  parameter int MASK_BITS = 8192,
  parameter int QDEPTH    = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  // command queue
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  cmd_t             cmd,
  // mode bitmask memory
  input  logic             mask_we,
  input  logic [IDX_W-1:0] mask_addr,
  input  logic             mask_bit,
  // dispatch
  output logic             ann_job_valid,
  input  logic             ann_job_ready,
  output logic             snn_job_valid,
  input  logic             snn_job_ready,
  output job_t             job,
  // compressor segment control
  output logic             seg_start,
  output ptr_t             seg_addr,
  output logic [IDX_W-1:0] seg_col0,
  output logic [POS_W:0]   seg_count,
  output logic             seg_last,
  output ptr_t             seg_next,
  input  logic             seg_busy,
  input  logic             seg_done,
  // status
  output logic             busy,
  output logic             layer_done,
  output logic             dispatch_stall   // a job waited for a PE of its core
);
  localparam int CW = $bits(cmd_t);
  typedef enum logic [1:0] {P_IDLE, P_SEG, P_DISP, P_WAIT} pstate_e;
  pstate_e st;

  logic [MASK_BITS-1:0] modemask;
  always_ff @(posedge clk)
    if (mask_we) modemask[mask_addr[$clog2(MASK_BITS)-1:0]] <= mask_bit;

  // unified command queue
  logic          q_empty, q_full, q_pop;
  logic [CW-1:0] q_data;
  nf_fifo #(.WIDTH(CW), .DEPTH(QDEPTH)) u_cmdq (
    .clk, .rst_n, .push(cmd_valid && !q_full), .wdata(cmd), .pop(q_pop),
    .rdata(q_data), .empty(q_empty), .full(q_full), .count());
  assign cmd_ready = !q_full;
  assign q_pop     = (st == P_IDLE) && !q_empty;

  cmd_t             c, q_cmd;
  assign q_cmd = cmd_t'(q_data);
  logic [IDX_W-1:0] m, n, seg_end;
  ptr_t             a_row, b_col, out_p;
  logic [IDX_W-1:0] left;
  mode_e            mode;

  assign left      = c.n_cols - n;
  assign mode      = mode_e'(modemask[$clog2(MASK_BITS)'(c.mask_base + n)]);
  assign job       = '{row: m, col: n, a_ptr: a_row, b_ptr: b_col, theta: c.theta};
  assign ann_job_valid = (st == P_DISP) && (mode == MODE_ANN);
  assign snn_job_valid = (st == P_DISP) && (mode == MODE_SNN);

  logic take;
  assign take = (ann_job_valid && ann_job_ready) || (snn_job_valid && snn_job_ready);
  assign dispatch_stall = (st == P_DISP) && !take;

  assign seg_start = (st == P_SEG) && !seg_busy;
  assign seg_addr  = out_p;
  assign seg_col0  = n;
  assign seg_count = (left >= IDX_W'(CHUNK)) ? (POS_W+1)'(CHUNK) : left[POS_W:0];
  assign seg_last  = (left <= IDX_W'(CHUNK));
  assign seg_next  = out_p + 1'b1;
  assign busy      = (st != P_IDLE) || !q_empty;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= P_IDLE; c <= '0; m <= '0; n <= '0; seg_end <= '0;
      a_row <= '0; b_col <= '0; out_p <= '0; layer_done <= 1'b0;
    end else begin
      layer_done <= 1'b0;
      case (st)
        P_IDLE: if (!q_empty) begin
          c <= q_cmd;
          m <= '0; n <= '0;
          a_row <= q_cmd.a_base;
          b_col <= q_cmd.b_base;
          out_p <= q_cmd.out_base;
          st <= P_SEG;
        end
        P_SEG: if (seg_start) begin
          seg_end <= n + IDX_W'(seg_count);
          st <= P_DISP;
        end
        P_DISP: if (take) begin
          n     <= n + 1'b1;
          b_col <= b_col + ptr_t'(c.kseg);
          if (n + 1'b1 == seg_end) st <= P_WAIT;
        end
        P_WAIT: if (seg_done) begin
          out_p <= out_p + 1'b1;
          if (n == c.n_cols) begin
            n     <= '0;
            b_col <= c.b_base;
            a_row <= a_row + ptr_t'(c.kseg);
            m     <= m + 1'b1;
            if (m + 1'b1 == c.m_rows) begin
              st <= P_IDLE;
              layer_done <= 1'b1;
            end else st <= P_SEG;
          end else st <= P_SEG;
        end
        default: st <= P_IDLE;
      endcase
    end
  end

  a_one_core: assert property (@(posedge clk) disable iff (!rst_n) !(ann_job_valid && snn_job_valid));
endmodule
