// nf_fifo: synchronous first-in first-out buffer.
//
// Used for the FIFO A / FIFO B pairs between the inner join and the
// accumulate stage of both PE types (depth 128 in the ANN PE, depth 8 in the
// SNN PE, as the paper sizes them) and for the scheduler's command queue.
// push and pop may happen in the same cycle; the head is visible on rdata
// while empty is low (first-word fall-through). Pushing when full or popping
// when empty is a protocol error and is flagged by assertions.
module nf_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wdata,
  input  logic             pop,
  output logic [WIDTH-1:0] rdata,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign empty = (count == 0);
  assign full  = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign rdata = mem[rp];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) begin
        mem[wp] <= wdata;
        wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (pop) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      if (push && !pop)      count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
