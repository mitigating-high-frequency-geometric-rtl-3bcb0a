// sparse_pkg: sizes, widths and shared types of the 1-bit sparse population
// transform.
//
// The pipeline maps a dense 128-element vector of signed 8-bit samples onto an
// overcomplete dictionary of 1024 basis functions, thresholds each projection
// into a 1-bit population code, rebuilds a 128-element signal by adding up the
// basis functions of the active neurons, scales it and low-pass filters it.
//
// DIM, NEURONS and DATA_W are the published sizes (128 elements, 1024 neurons,
// 8-bit dictionary and samples). LANES, the number of vector elements handled
// per clock, and the accumulator and register widths are choices of this
// design; the widths are the smallest that cannot overflow at these sizes.
package sparse_pkg;

  // Published sizes.
  localparam int unsigned DIM     = 128;   // elements of the input / output vector
  localparam int unsigned NEURONS = 1024;  // basis functions (population size)
  localparam int unsigned DATA_W  = 8;     // sample and dictionary entry width

  // Design choices.
  localparam int unsigned LANES   = 16;    // vector elements per clock
  // |D^T x| <= 128 * 128 * 127 < 2^21: 24 bits leave margin for tau.
  localparam int unsigned PROJ_W  = 24;
  // |sum of up to 1024 entries of magnitude <= 128| <= 2^17: 20 bits signed.
  localparam int unsigned ACC_W   = 20;
  localparam int unsigned SHIFT_W = 5;     // scale exponent: C = 2^-shift
  localparam int unsigned FILT_W  = 4;     // low-pass passes, 0 .. 15

  // Largest magnitude of a sample (the published bound is [-127, 127]).
  localparam int SAMPLE_MAX = 127;

  // Phases of a frame; also selects which engine owns the dictionary port.
  typedef enum logic [2:0] {
    PH_IDLE    = 3'd0,
    PH_PROJECT = 3'd1,
    PH_RECON   = 3'd2,
    PH_FILTER  = 3'd3,
    PH_OUTPUT  = 3'd4
  } phase_e;

endpackage
