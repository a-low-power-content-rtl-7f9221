// onehot_decoder: kappa-to-l local decoder of one P_I cluster.
//
// A kappa-bit slice of the reduced-length tag is read as an unsigned integer
// and the neuron with that index (counted from 0) is activated: output bit
// onehot[bin] is 1, all others are 0. In the CNN this vector is the wordline
// select of the cluster's weight SRAM, so only the one row that can hold a
// useful connection is read. This is the paper's "direct binary-to-integer
// mapping"; counting neurons from 0 is this design's convention.
//
// Interface: bin (KAPPA bits) in, onehot (L = 2**KAPPA bits) out.
// Timing: purely combinational.
module onehot_decoder #(
  parameter int unsigned KAPPA = cscam_pkg::CSCAM_KAPPA,
  parameter int unsigned L     = 2 ** KAPPA
) (
  input  logic [KAPPA-1:0] bin,
  output logic [L-1:0]     onehot
);
  initial begin
    assert (L == 2 ** KAPPA) else $error("onehot_decoder: L must equal 2**KAPPA");
  end

  always_comb begin
    for (int unsigned j = 0; j < L; j++) begin
      onehot[j] = (bin == KAPPA'(j));
    end
  end
endmodule
