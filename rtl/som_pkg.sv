// som_pkg: constants and default map contents shared by the SOM classifier.
//
// The classifier compares one feature vector against every neuron of a
// trained self-organising map (SOM) and reports the cluster of the
// best-matching unit (BMU). The sizes below are the configuration built for
// the eco-driving assessment: 4 features (mean gas-pedal percentage, mean
// engine RPM, mean gas-pedal pressure and variance of positive longitudinal
// acceleration), an 11 x 11 map (121 neurons) and 8-bit unsigned fixed-point
// data with all 8 bits fractional. Five driving-style clusters are used
// (very low, low, medium, high, very high fuel consumption).
//
// The trained weights and the neuron-to-cluster labels of the original map
// were never published, so som_weight() and som_cluster() give synthetic
// defaults of this design's own choosing:
//   weight(i, j) = ((i + 1) * (2*j + 37) * 73 + 151 * j) mod 256
//   cluster(i)   = floor(i * K / M)   (K clusters in contiguous index bands)
// Replace the bodies of these two functions with the trained map to obtain
// the real classifier; everything else is independent of the contents.
package som_pkg;

  // Configuration of the eco-driving classifier.
  localparam int unsigned N_FEATURES   = 4;    // inputs per sample
  localparam int unsigned MAP_ROWS     = 11;
  localparam int unsigned MAP_COLS     = 11;
  localparam int unsigned N_NEURONS    = MAP_ROWS * MAP_COLS;  // 121
  localparam int unsigned DATA_W       = 8;    // Q0.8 unsigned features/weights
  localparam int unsigned N_CLUSTERS   = 5;    // five driving-style classes
  localparam int unsigned CLUSTER_W    = 3;

  // Squared distance needs 2*DATA_W bits per term plus ceil(log2 N) carry
  // bits for the sum, so no overflow can occur (18 bits for N = 4).
  function automatic int unsigned dist_width(int unsigned n, int unsigned w);
    return 2 * w + ((n > 1) ? $clog2(n) : 0);
  endfunction

  function automatic int unsigned idx_width(int unsigned m);
    return (m > 1) ? $clog2(m) : 1;
  endfunction

  // Driving-style labels in the order of the cluster ROM codes.
  typedef enum logic [CLUSTER_W-1:0] {
    DS_VERY_LOW  = 3'd0,
    DS_LOW       = 3'd1,
    DS_MEDIUM    = 3'd2,
    DS_HIGH      = 3'd3,
    DS_VERY_HIGH = 3'd4
  } driving_style_e;

  // Default (synthetic) weight j of neuron i, an 8-bit code.
  function automatic logic [7:0] som_weight(int unsigned i, int unsigned j);
    logic [7:0] v;
    v = 8'(((i + 1) * (2 * j + 37) * 73 + 151 * j) % 256);
    return v;
  endfunction

  // Default (synthetic) cluster of neuron i out of m neurons and k clusters.
  function automatic int unsigned som_cluster(int unsigned i, int unsigned m,
                                              int unsigned k);
    return (i * k) / m;
  endfunction

endpackage
