// nf_compressor: shared output compressor.
//
// Both cores' INT8 results are bitmap-encoded here before they go back to
// the FiberCache, so the next layer reads them as fibers. The scheduler opens
// a segment: one output row and up to 128 consecutive columns, its line
// address, and the continuation pointer of the line. Results of that segment
// arrive in any order and are placed in a dense 128-byte staging buffer by
// column. When all seg_count results are in, the line is built in one cycle:
// mask bit i = (value i != 0), the non-zeros packed lowest position first by
// a prefix-count scatter, and written (cw_valid until cw_ready). seg_done
// pulses when the write is accepted. One segment is open at a time; the
// segment protocol and single-cycle packing are this design's choices, the
// paper giving only the compressor's role and the bitmap format.
module nf_compressor
  import nf_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             seg_start,
  input  ptr_t             seg_addr,
  input  logic [IDX_W-1:0] seg_col0,
  input  logic [POS_W:0]   seg_count,   // 1..CHUNK
  input  logic             seg_last,
  input  ptr_t             seg_next,
  output logic             seg_busy,
  output logic             seg_done,
  input  logic             res_valid,
  output logic             res_ready,
  input  result_t          res,
  output logic             cw_valid,
  input  logic             cw_ready,
  output ptr_t             cw_addr,
  output line_t            cw_line,
  output logic             zero_skipped   // the written line had zero entries (statistics)
);
  typedef enum logic [1:0] {C_IDLE, C_COLLECT, C_WRITE} cstate_e;
  cstate_e st;

  logic [CHUNK-1:0][7:0] dense;
  logic [POS_W:0]        got, need;
  logic [IDX_W-1:0]      col0;
  logic                  last_r;
  ptr_t                  addr_r, next_r;

  // packing
  line_t packed_line;
  logic  has_zero;
  always_comb begin
    int unsigned k;
    packed_line = '0;
    has_zero = 1'b0;
    k = 0;
    for (int i = 0; i < CHUNK; i++) begin
      if (i < int'(need) && dense[i] != 8'd0) begin
        packed_line.mask[i] = 1'b1;
        packed_line.vals[k[POS_W-1:0]] = dense[i];
        k++;
      end else if (i < int'(need)) has_zero = 1'b1;
    end
    packed_line.last = last_r;
    packed_line.next = next_r;
  end

  assign res_ready = (st == C_COLLECT) && (got != need);
  assign seg_busy  = (st != C_IDLE);
  assign cw_valid  = (st == C_WRITE);
  assign cw_addr   = addr_r;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= C_IDLE; got <= '0; need <= '0; col0 <= '0; last_r <= 1'b0;
      addr_r <= '0; next_r <= '0; seg_done <= 1'b0; dense <= '0;
      cw_line <= '0; zero_skipped <= 1'b0;
    end else begin
      seg_done <= 1'b0;
      zero_skipped <= 1'b0;
      case (st)
        C_IDLE: if (seg_start) begin
          addr_r <= seg_addr; col0 <= seg_col0; need <= seg_count;
          last_r <= seg_last; next_r <= seg_next; got <= '0; dense <= '0;
          st <= C_COLLECT;
        end
        C_COLLECT: begin
          if (res_valid && res_ready) begin
            dense[POS_W'(res.col - col0)] <= res.q;
            got <= got + 1'b1;
          end
          if (got == need) begin
            cw_line <= packed_line;
            zero_skipped <= has_zero;
            st <= C_WRITE;
          end
        end
        C_WRITE: if (cw_ready) begin
          seg_done <= 1'b1;
          st <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  a_col_in_segment: assert property (@(posedge clk) disable iff (!rst_n)
    (res_valid && res_ready) |-> (res.col >= col0 && res.col - col0 < IDX_W'(need)));
endmodule
