// global_decoder: global decoding of the CNN and sub-block grouping.
//
// Input: the C weight rows read for one search, each M bits wide (row i comes
// from cluster i's weight SRAM at the row of that cluster's active neuron).
// Step 1, the paper's Eq. (1): a P_II neuron i' is active when every cluster
// has an active connection to it, so v'_n[i'] is the C-input AND of bit i' of
// all rows. Only the rows of active P_I neurons are read, so the OR over the
// l neurons of a cluster in Eq. (1) has already been done by the SRAM read.
// Step 2: the M neurons are grouped ZETA at a time (entries k*ZETA ..
// k*ZETA+ZETA-1 form group k) and each group is ORed into the compare-enable
// en[k] of CAM sub-block k. BETA = M / ZETA.
//
// Interface: rows (C x M) in; neuron (M) and en (BETA) out.
// Timing: purely combinational; the caller registers en.
module global_decoder #(
  parameter int unsigned C    = cscam_pkg::CSCAM_C,
  parameter int unsigned M    = cscam_pkg::CSCAM_M,
  parameter int unsigned ZETA = cscam_pkg::CSCAM_ZETA,
  parameter int unsigned BETA = M / ZETA
) (
  input  logic [C-1:0][M-1:0] rows,
  output logic [M-1:0]        neuron,
  output logic [BETA-1:0]     en
);
  initial begin
    assert (BETA * ZETA == M) else $error("global_decoder: M must be a multiple of ZETA");
  end

  always_comb begin
    neuron = '1;
    for (int unsigned i = 0; i < C; i++) neuron &= rows[i];
  end

  always_comb begin
    for (int unsigned k = 0; k < BETA; k++) begin
      en[k] = |neuron[k*ZETA +: ZETA];
    end
  end
endmodule
