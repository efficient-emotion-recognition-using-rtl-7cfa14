// hdc_pkg - shared types and constants of the early-fusion HDC emotion classifier.
//
// The hypervector dimension, n-gram size and per-modality channel counts below
// are the figures of the AMIGOS configuration (10,000-bit hypervectors,
// GSR/ECG/EEG with 32/77/105 feature channels, n-gram of 3, two classes).
// The mapping mode selects how channel vectors {iM, PFP, NFP} are obtained:
//   MAP_RULE90 - the per-modality PFP/NFP pairs are generated once from the seed
//                and stored; each channel's iM vector is the next rule-90 step.
//   MAP_HYBRID - a small bank is burst-filled with rule-90 steps and every
//                channel takes a fresh combinatorial pair set {iM, PFP, NFP}
//                from it; the bank is refilled when its pairs run out.
// rho(v, k) is the cyclic shift used for permutation: a shift "right" by k,
// so that bit i of the result is bit (i+k) mod D of the input.
package hdc_pkg;

  localparam int unsigned HV_DIM_DEFAULT = 10000;
  localparam int unsigned N_MOD_DEFAULT  = 3;
  localparam int unsigned NGRAM_DEFAULT  = 3;
  localparam int unsigned N_CLASS_DEFAULT = 2;

  typedef enum logic {
    MAP_RULE90 = 1'b0,
    MAP_HYBRID = 1'b1
  } map_mode_e;

  // Number of {iM, PFP, NFP} channel sets one bank of v vectors yields:
  // TFC(v) = sum_{n=1}^{v-2} floor((v-n)/2).
  function automatic int unsigned tfc(input int unsigned v);
    int unsigned s;
    s = 0;
    for (int unsigned n = 1; n + 2 <= v; n++) s += (v - n) / 2;
    return s;
  endfunction

endpackage
