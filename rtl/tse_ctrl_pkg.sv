// tse_ctrl_pkg: phases of the post-processing sequencer, shared by the
// controller and the top so that the phase can be observed from outside.
//   PH_IDLE     waiting for a full sample
//   PH_ENTROPY  streaming the sample through the min-entropy evaluation
//   PH_LENGTH   computing the output length m
//   PH_TSGEN    generating the Toeplitz string with the LFSR
//   PH_LOAD     one cycle per batch: batch read, Toeplitz window reset
//   PH_COMPUTE  m cycles per batch, K output bits per cycle
//   PH_FINAL    last output write after the final batch
package tse_ctrl_pkg;
  typedef enum logic [2:0] {
    PH_IDLE, PH_ENTROPY, PH_LENGTH, PH_TSGEN, PH_LOAD, PH_COMPUTE, PH_FINAL
  } phase_t;
endpackage
