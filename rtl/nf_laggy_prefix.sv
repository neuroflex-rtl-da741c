// nf_laggy_prefix: multi-cycle prefix sum over a chunk bitmap.
//
// The paper's SNN inner-join unit pairs the fast prefix with a "laggy"
// prefix-sum circuit that uses 16 adders and a 128-bit buffer and produces
// the offsets in 8 cycles. This module keeps the bitmap in a 128-bit buffer
// and, in each cycle after start, computes the 16 offsets of one 16-bit
// segment with 16 chained adders, carrying the running count into the next
// segment. Offsets are stored in an offset buffer; a position can be looked
// up (offset/ready) as soon as its segment is done, so consumers can start
// before all 8 cycles have passed. The chained-adder arrangement inside a
// segment and the early per-segment readiness are this design's choices.
//
// Timing: the clock edge with start high loads the mask (cycle 0); the next
// W/ADDERS edges each finish one segment, so segment s can be read from
// cycle s+2 on and done is high from cycle W/ADDERS+1 on.
module nf_laggy_prefix #(
  parameter int W      = 128,
  parameter int ADDERS = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [W-1:0]         mask,
  input  logic [$clog2(W)-1:0] pos,
  output logic [$clog2(W):0]   offset,
  output logic                 ready,
  output logic                 done
);
  localparam int NSEG = W / ADDERS;
  localparam int OW   = $clog2(W) + 1;
  localparam int SW   = $clog2(NSEG + 1);

  logic [W-1:0]  mbuf;
  logic [OW-1:0] offs [W];
  logic [SW-1:0] seg;     // number of finished segments
  logic [OW-1:0] carry;
  logic [OW-1:0] run [ADDERS+1];

  // 16 chained adders for the current segment
  always_comb begin
    run[0] = carry;
    for (int j = 0; j < ADDERS; j++)
      run[j+1] = run[j] + OW'(mbuf[(int'(seg) % NSEG) * ADDERS + j]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      seg   <= SW'(NSEG);
      carry <= '0;
      mbuf  <= '0;
    end else if (start) begin
      mbuf  <= mask;
      seg   <= '0;
      carry <= '0;
    end else if (int'(seg) < NSEG) begin
      for (int j = 0; j < ADDERS; j++)
        offs[int'(seg) * ADDERS + j] <= run[j];
      carry <= run[ADDERS];
      seg   <= seg + 1'b1;
    end
  end

  assign done   = (int'(seg) == NSEG) && !start;
  assign ready  = (int'(pos) / ADDERS < int'(seg)) && !start;
  assign offset = offs[pos];
endmodule
