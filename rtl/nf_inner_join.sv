// nf_inner_join: bitmap intersection and match issue for one chunk.
//
// The inner join ANDs the activation bitmap (A) with the weight bitmap (B),
// removes the matches already issued (done_mask) and presents the lowest
// remaining match position. A fast prefix circuit on B gives the weight's
// offset in the packed weight array. With FAST_A = 1 (ANN PE, which the
// paper gives two fast prefix circuits) a second fast prefix gives the
// activation offset as well; with FAST_A = 0 (SNN PE) off_a is not produced
// and the activation offset comes later from the laggy prefix.
// Lowest-position-first order is this design's choice. Combinational: the
// owning PE registers done_mask and so issues one match per cycle.
module nf_inner_join
  import nf_pkg::*;
#(
  parameter bit FAST_A = 1'b1
) (
  input  logic [CHUNK-1:0] bm_a,
  input  logic [CHUNK-1:0] bm_b,
  input  logic [CHUNK-1:0] done_mask,
  output logic             any,
  output logic             last,
  output logic [POS_W-1:0] pos,
  output logic [OFF_W-1:0] off_a,
  output logic [OFF_W-1:0] off_b
);
  logic [CHUNK-1:0] match;
  assign match = bm_a & bm_b & ~done_mask;
  assign any   = |match;
  assign last  = any && ((match & (match - 1'b1)) == '0);

  always_comb begin
    pos = '0;
    for (int i = CHUNK - 1; i >= 0; i--)
      if (match[i]) pos = POS_W'(i);
  end

  nf_fast_prefix #(.W(CHUNK)) u_pfx_b (.mask(bm_b), .pos(pos), .offset(off_b));

  if (FAST_A) begin : g_fast_a
    nf_fast_prefix #(.W(CHUNK)) u_pfx_a (.mask(bm_a), .pos(pos), .offset(off_a));
  end else begin : g_no_fast_a
    assign off_a = '0;
  end
endmodule
