// hit_discriminator: reduces a 12-bit ADC sample to a 1-bit "fired" flag.
//
// An electrode is fired when its sample is strictly larger than the noise
// threshold, as the paper describes; only this bit is used to decide which
// electrodes belong together, the charge itself is only summed. Purely
// combinational: the flag is valid in the same cycle as the sample.
// The threshold is a run-time input shared by all electrodes (a choice of
// this design; the paper does not say where the threshold comes from).
module hit_discriminator
  import cluster_pkg::*;
(
  input  sample_t sample,     // ADC value of the electrode
  input  sample_t threshold,  // noise threshold
  output logic    hit         // 1: sample > threshold
);

  always_comb hit = (sample > threshold);

endmodule
