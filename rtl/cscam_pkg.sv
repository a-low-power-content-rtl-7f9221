// cscam_pkg: shared constants of the clustered-sparse-network CAM.
//
// The reference configuration is a 512-entry by 128-bit binary CAM whose
// compare-enables are predicted by a clustered neural network (CNN) that looks
// at a 9-bit reduced tag split into 3 clusters of 8 neurons. The CAM is cut
// into 64 sub-blocks of 8 rows. These numbers are the reference design point
// of the paper this design follows; every module takes them as parameter
// defaults so that smaller or larger instances can be built.
//
// Derived quantities: KAPPA = Q / C bits per cluster, L = 2**KAPPA neurons
// per cluster, BETA = M / ZETA sub-blocks.
package cscam_pkg;
  localparam int unsigned CSCAM_M     = 512;  // CAM entries (P_II neurons)
  localparam int unsigned CSCAM_N     = 128;  // tag / data width in bits
  localparam int unsigned CSCAM_ZETA  = 8;    // CAM rows per sub-block
  localparam int unsigned CSCAM_Q     = 9;    // reduced-length tag bits
  localparam int unsigned CSCAM_C     = 3;    // P_I clusters
  localparam int unsigned CSCAM_L     = 8;    // neurons per cluster
  localparam int unsigned CSCAM_KAPPA = CSCAM_Q / CSCAM_C;      // 3
  localparam int unsigned CSCAM_BETA  = CSCAM_M / CSCAM_ZETA;   // 64

  // Search pipeline depth: clock edges from accepting a search to the
  // registered result (weight read, compare-enable, matchlines, data read).
  localparam int unsigned CSCAM_LATENCY = 4;
endpackage
