// nf_qcfs: integer Quantization-Clip-Floor-Shift activation.
//
// q = clip(floor((acc + floor(theta/2)) / theta), 0, L), with theta the
// integer quantisation step (threshold / L). This is the ANN activation the
// paper applies after the MAC in one pipeline stage; the SNN path reproduces
// the same value by integrate-and-fire. Instead of a divider the level is
// counted with a ladder of L comparators, q = sum_k [acc + theta/2 >= k*theta],
// which yields floor and both clips at once (this design's choice).
// theta must be at least 1. Purely combinational; the ANN PE registers q.
module nf_qcfs #(
  parameter int L     = 8,
  parameter int ACC_W = 24,
  parameter int TH_W  = 16
) (
  input  logic signed [ACC_W-1:0] acc,
  input  logic [TH_W-1:0]         theta,
  output logic [7:0]              q
);
  localparam int EW = ACC_W + TH_W + 2;
  logic signed [EW-1:0] th_s, shifted;
  assign th_s    = EW'(theta);
  assign shifted = EW'(acc) + (th_s >>> 1);

  always_comb begin
    q = '0;
    for (int k = 1; k <= L; k++)
      if (shifted >= th_s * EW'(k)) q = q + 1'b1;
  end
endmodule
