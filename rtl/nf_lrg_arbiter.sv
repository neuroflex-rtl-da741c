// nf_lrg_arbiter: least-recently-granted arbiter.
//
// Keeps an N x N priority matrix, prio[i][j] = 1 meaning requester i wins
// over j, which is the arbitration a swizzle-switch crossbar keeps at each
// crosspoint. Requester i is granted when it requests and beats every other
// requester. When grant is accepted (advance), the winner drops to lowest
// priority: its row is cleared and its column set. Reset priority is by
// index (0 highest). Grant is combinational; the update is registered.
module nf_lrg_arbiter #(
  parameter int N = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt,
  output logic [$clog2(N)-1:0] gnt_idx
);
  logic [N-1:0] prio [N];

  always_comb begin
    gnt = '0;
    gnt_idx = '0;
    for (int i = 0; i < N; i++) begin
      if (req[i] && ((req & ~prio[i] & ~(N'(1) << i)) == '0)) begin
        gnt[i]  = 1'b1;
        gnt_idx = $clog2(N)'(i);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          prio[i][j] <= (i < j);
    end else if (advance && |gnt) begin
      for (int i = 0; i < N; i++) begin
        if (gnt[i]) prio[i] <= '0;                 // winner loses to all
        else        prio[i][gnt_idx] <= 1'b1;      // everyone beats winner
      end
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
endmodule
