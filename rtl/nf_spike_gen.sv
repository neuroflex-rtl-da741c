// nf_spike_gen: spike generation for one matched activation.
//
// Turns an INT8 activation level into a deterministic binary spike train
// over the L input timesteps with exactly that many spikes. The paper states
// only that the train is deterministic and preserves the magnitude; this
// design uses a thermometer code, spikes[t-1] = (act >= t), so a level-a
// activation spikes in the first a timesteps. That choice is what lets the
// SNN PE use one pseudo-accumulator plus L-1 correction accumulators.
// Activation levels above L saturate at L (QCFS outputs never exceed L).
// Purely combinational.
module nf_spike_gen #(
  parameter int L = 8
) (
  input  logic [7:0]   act,
  output logic [L-1:0] spikes
);
  always_comb
    for (int t = 1; t <= L; t++)
      spikes[t-1] = (int'(act) >= t);
endmodule
