// nf_fiber_fetch: per-PE line fetcher on the two crossbars.
//
// On start it reads the first activation line (crossbar A) and weight line
// (crossbar B) of a neuron, holds them as one chunk for the PE and, as soon
// as the PE takes the chunk into its own buffers, follows both continuation
// pointers to fetch the next pair while the PE computes, which hides the
// fetch latency. One chunk is held at a time (one credit per chunk). The
// activation line's last flag ends the fiber pair; both fibers of a neuron
// have the same number of lines. This helper is this design's own way of
// feeding the PEs; the paper only says PEs receive chunks from the
// FiberCache over the crossbar.
module nf_fiber_fetch
  import nf_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  ptr_t   a_ptr,
  input  ptr_t   b_ptr,
  output logic   idle,
  // crossbar A
  output logic   ra_valid,
  output ptr_t   ra_addr,
  input  logic   ra_ready,
  input  logic   ra_rsp,
  input  line_t  ra_line,
  // crossbar B
  output logic   rb_valid,
  output ptr_t   rb_addr,
  input  logic   rb_ready,
  input  logic   rb_rsp,
  input  line_t  rb_line,
  // chunk to the PE
  output logic   chunk_valid,
  input  logic   chunk_ready,
  output chunk_t chunk
);
  typedef enum logic [1:0] {H_NONE, H_REQ, H_WAIT, H_HAVE} half_e;
  half_e sa, sb;
  ptr_t  pa, pb;
  line_t la, lb;
  logic  active;

  assign ra_valid    = (sa == H_REQ);
  assign rb_valid    = (sb == H_REQ);
  assign ra_addr     = pa;
  assign rb_addr     = pb;
  assign chunk_valid = (sa == H_HAVE) && (sb == H_HAVE);
  assign chunk       = '{a: la, b: lb};
  assign idle        = !active;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sa <= H_NONE; sb <= H_NONE; pa <= '0; pb <= '0; la <= '0; lb <= '0; active <= 1'b0;
    end else begin
      if (start && !active) begin
        pa <= a_ptr; pb <= b_ptr; sa <= H_REQ; sb <= H_REQ; active <= 1'b1;
      end else begin
        case (sa)
          H_REQ:  if (ra_ready) sa <= H_WAIT;
          H_WAIT: if (ra_rsp) begin la <= ra_line; sa <= H_HAVE; end
          default: ;
        endcase
        case (sb)
          H_REQ:  if (rb_ready) sb <= H_WAIT;
          H_WAIT: if (rb_rsp) begin lb <= rb_line; sb <= H_HAVE; end
          default: ;
        endcase
        if (chunk_valid && chunk_ready) begin
          if (la.last) begin
            sa <= H_NONE; sb <= H_NONE; active <= 1'b0;
          end else begin
            pa <= la.next; pb <= lb.next; sa <= H_REQ; sb <= H_REQ;
          end
        end
      end
    end
  end
endmodule
