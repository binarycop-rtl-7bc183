// bincop_pkg: types, constants and helper functions shared by the BinaryCoP
// binary neural network accelerator.
//
// The accelerator is a streaming pipeline: one matrix-vector-threshold unit
// (MVTU) per convolutional or fully-connected layer, a sliding-window unit
// (SWU) in front of every convolution, and OR-based max-pooling. This
// package holds the pieces several of those modules need: the popcount used
// by every processing element, an address-width helper that never returns
// zero, and the encoding of the parameter-load (configuration) port.
package bincop_pkg;

  // Width of an index into n entries; at least 1 so that a depth of 1 still
  // gives a legal (unused) address port.
  function automatic int unsigned idx_w(int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

  // Width of a counter that holds 0..n inclusive.
  function automatic int unsigned cnt_w(int unsigned n);
    return $clog2(n + 1);
  endfunction

  // What a configuration write targets inside an MVTU.
  typedef enum logic {
    CFG_WEIGHT = 1'b0,   // one SIMD-wide weight word of one PE
    CFG_THRESH = 1'b1    // one threshold of one PE
  } cfg_kind_e;

  // Width of the configuration data bus (a weight word is at most this wide).
  localparam int unsigned CFG_DATA_W = 32;
  // Width of the configuration address bus (per PE memory word index).
  localparam int unsigned CFG_ADDR_W = 16;
  // Width of the PE select on the configuration bus.
  localparam int unsigned CFG_PE_W   = 8;

endpackage
