// memhd_pkg: constants and types shared by the MEMHD inference engine.
//
// The default sizes are the main configuration of the design: a binary
// projection encoder for f = 784 input features (MNIST), hypervector
// dimension D = 128, a multi-centroid associative memory of C = 128 centroid
// columns for k = 10 classes, all mapped onto 128 x 128 in-memory-computing
// arrays. The feature width (8 bit, one unsigned pixel) is this design's own
// choice; the other numbers follow the MNIST "128x128" model.
package memhd_pkg;

  // In-memory-computing array geometry (rows = inputs, columns = outputs).
  localparam int unsigned ARR_ROWS = 128;
  localparam int unsigned ARR_COLS = 128;

  // Model size of the main configuration.
  localparam int unsigned N_FEAT  = 784;  // f, input features
  localparam int unsigned DIM     = 128;  // D, hypervector dimension
  localparam int unsigned N_COL   = 128;  // C, centroid columns of the AM
  localparam int unsigned N_CLASS = 10;   // k, classes
  localparam int unsigned FEAT_W  = 8;    // bits per input feature

  // Number of b-sized blocks needed to cover a.
  function automatic int unsigned ceil_div(int unsigned a, int unsigned b);
    return (a + b - 1) / b;
  endfunction

  // Width of an index that counts n things (at least one bit).
  function automatic int unsigned idx_w(int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

  // Phases of one inference.
  typedef enum logic [2:0] {
    ST_IDLE   = 3'd0,  // waiting for start
    ST_ENCODE = 3'd1,  // projection encoding on the EM arrays
    ST_BINARY = 3'd2,  // mean-threshold binarisation of the query
    ST_SEARCH = 3'd3,  // dot similarity on the AM arrays and argmax
    ST_DONE   = 3'd4   // result presented for one cycle
  } phase_e;

endpackage
