// nf_membrane_unit: temporal integrate-and-fire window of one SNN neuron.
//
// Implements the paper's Spike Count and Membrane Potential Reinitialization
// steps. The SNN PE hands over its pseudo-accumulator P and the correction
// accumulators C[t] (t = 2..L). The input current of timestep t is
//   O[1] = P,  O[t] = P - C[t] for t = 2..L,  O[t] = 0 for t > L,
// which is the per-timestep weighted spike sum of the paper's Algorithm 1
// rebuilt from the LoAS-style pseudo/correction split.
// The window has T = 3L-1 timesteps, one per clock. The membrane starts at
// floor(theta/2) (the QCFS shift). Each step adds O[t]; then the neuron fires
// one +1 spike and subtracts theta (soft reset) if V >= theta and fewer than
// L spikes have been counted, or one -1 inhibitory spike and adds theta back
// if V < 0 and the count is positive. After the L input steps, 2L-1 further
// steps let the count settle, so the final count equals the ANN QCFS level
// clip(floor((sum + theta/2)/theta), 0, L) exactly. At the end the count is
// emitted and the membrane is reinitialised to floor(theta/2).
// The one-spike-per-step rule, the inhibitory spike and one timestep per
// clock are this design's reading of PASCAL's "spike accumulation and
// inhibition"; the paper does not spell out these update equations.
//
// Interface: start (only while !busy && !out_valid) latches P and C;
// busy for T cycles; out_valid/q held until out_ready.
module nf_membrane_unit #(
  parameter int L      = 8,
  parameter int T      = 3 * L - 1,
  parameter int PACC_W = 12,
  parameter int CACC_W = 10,
  parameter int V_W    = 18,
  parameter int TH_W   = 16
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  input  logic signed [PACC_W-1:0]        pseudo,
  input  logic [L-2:0][CACC_W-1:0]        corr,     // corr[t-2] for t = 2..L
  input  logic [TH_W-1:0]                 theta,
  output logic                            busy,
  output logic                            out_valid,
  input  logic                            out_ready,
  output logic [7:0]                      q,
  output logic                            fired_neg  // an inhibitory spike occurred (statistics)
);
  localparam int TW = $clog2(T + 1);

  logic signed [PACC_W-1:0]        p_r;
  logic [L-2:0][CACC_W-1:0]        c_r;
  logic [TH_W-1:0]                 th_r;
  logic [TW-1:0]                   t;      // current timestep 1..T
  logic signed [V_W-1:0]           v;
  logic [7:0]                      cnt;

  logic signed [V_W-1:0] o_t, v_in, v_nx, th_s;
  logic [7:0]            cnt_nx;
  logic                  neg_nx;

  assign th_s = V_W'(th_r);

  always_comb begin
    if (int'(t) == 1)       o_t = V_W'(p_r);
    else if (int'(t) <= L)  o_t = V_W'(p_r) - V_W'($signed(c_r[int'(t) - 2]));
    else                    o_t = '0;
    v_in   = v + o_t;
    v_nx   = v_in;
    cnt_nx = cnt;
    neg_nx = 1'b0;
    if (v_in >= th_s && int'(cnt) < L) begin        // excitatory spike, soft reset
      v_nx   = v_in - th_s;
      cnt_nx = cnt + 1'b1;
    end else if (v_in < 0 && cnt != 0) begin        // inhibitory spike
      v_nx   = v_in + th_s;
      cnt_nx = cnt - 1'b1;
      neg_nx = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; out_valid <= 1'b0; t <= '0; v <= '0; cnt <= '0; q <= '0;
      p_r <= '0; c_r <= '0; th_r <= '0; fired_neg <= 1'b0;
    end else begin
      fired_neg <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (start && !busy && !out_valid) begin
        p_r  <= pseudo;
        c_r  <= corr;
        th_r <= theta;
        v    <= V_W'(theta >> 1);                   // membrane initial value
        cnt  <= '0;
        t    <= TW'(1);
        busy <= 1'b1;
      end else if (busy) begin
        fired_neg <= neg_nx;
        cnt <= cnt_nx;
        if (int'(t) == T) begin                      // end of window
          busy      <= 1'b0;
          out_valid <= 1'b1;
          q         <= cnt_nx;
          v         <= V_W'(th_r >> 1);             // reinitialise membrane
        end else begin
          v <= v_nx;
          t <= t + 1'b1;
        end
      end
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> (!busy && !out_valid));
endmodule
