// nf_fast_prefix: single-cycle prefix count over a chunk bitmap.
//
// offset = number of set bits of mask strictly below position pos, which is
// where element pos sits in the packed non-zero array of its line. The paper
// uses a "fast prefix" parallel-prefix circuit that produces offsets in one
// cycle; its internal tree is not given, so this is written as a masked
// population count and left to synthesis to build the adder tree.
// Purely combinational.
module nf_fast_prefix #(
  parameter int W = 128
) (
  input  logic [W-1:0]           mask,
  input  logic [$clog2(W)-1:0]   pos,
  output logic [$clog2(W):0]     offset
);
  always_comb begin
    offset = '0;
    for (int i = 0; i < W; i++)
      if (i < int'(pos) && mask[i]) offset = offset + 1'b1;
  end
endmodule
