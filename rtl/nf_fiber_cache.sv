// nf_fiber_cache: banked on-chip fiber store (the paper's FiberCache).
//
// LINES lines of line_t (128-bit bitmask, 128 packed INT8 values,
// continuation pointer) spread over NBANK banks, line address a living in
// bank a mod NBANK at row a / NBANK. With 128 value bytes per line the
// default 4096 lines are the paper's 512 KB. Each bank has two read ports,
// one per crossbar (activation and weight fibers, so A reads overlap B
// broadcasts), and one write port shared by the compressor and the host.
// A host line read port and the host write port stand for the HBM side.
// Reads return data one cycle after the enable. Host writes win a bank
// against the compressor, which then sees cw_ready low.
// The paper's cache is 32-way set associative with reuse-based replacement
// against HBM; this design has no tags and is used as a software-managed,
// double-buffered global buffer whose contents the host places.
module nf_fiber_cache
  import nf_pkg::*;
#(
  parameter int NBANK = 32,
  parameter int LINES = 4096
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // crossbar A / B bank ports (row inside bank)
  input  logic  [NBANK-1:0]        ra_re,
  input  ptr_t  [NBANK-1:0]        ra_addr,
  output line_t [NBANK-1:0]        ra_rdata,
  input  logic  [NBANK-1:0]        rb_re,
  input  ptr_t  [NBANK-1:0]        rb_addr,
  output line_t [NBANK-1:0]        rb_rdata,
  // compressor write (global line address)
  input  logic                     cw_valid,
  output logic                     cw_ready,
  input  ptr_t                     cw_addr,
  input  line_t                    cw_line,
  // host / HBM side
  input  logic                     host_we,
  input  ptr_t                     host_waddr,
  input  line_t                    host_wline,
  input  logic                     host_re,
  input  ptr_t                     host_raddr,
  output logic                     host_rvalid,
  output line_t                    host_rline
);
  localparam int BW    = $clog2(NBANK);
  localparam int DEPTH = LINES / NBANK;
  localparam int AW    = $clog2(DEPTH);

  logic host_hit_cw;
  assign host_hit_cw = host_we && (host_waddr[BW-1:0] == cw_addr[BW-1:0]);
  assign cw_ready    = !host_hit_cw;

  logic [BW-1:0] hr_bank_q;
  line_t [NBANK-1:0] hr_data;

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    line_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (host_we && int'(host_waddr[BW-1:0]) == b)
        mem[host_waddr[BW+AW-1:BW]] <= host_wline;
      else if (cw_valid && int'(cw_addr[BW-1:0]) == b)
        mem[cw_addr[BW+AW-1:BW]] <= cw_line;
      if (ra_re[b]) ra_rdata[b] <= mem[ra_addr[b][AW-1:0]];
      if (rb_re[b]) rb_rdata[b] <= mem[rb_addr[b][AW-1:0]];
      if (host_re && int'(host_raddr[BW-1:0]) == b) hr_data[b] <= mem[host_raddr[BW+AW-1:BW]];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      host_rvalid <= 1'b0;
      hr_bank_q   <= '0;
    end else begin
      host_rvalid <= host_re;
      hr_bank_q   <= host_raddr[BW-1:0];
    end
  end
  assign host_rline = hr_data[hr_bank_q];
endmodule
