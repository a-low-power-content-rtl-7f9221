// cnn: clustered-neural-network classifier that predicts which CAM sub-blocks
// can hold a searched tag.
//
// Tag reduction: the Q tag bits whose positions are set in the mask TAG_MASK
// form the reduced tag, in ascending order (the lowest selected tag bit
// becomes reduced-tag bit 0). As the paper suggests, the pattern can be chosen
// per application to pick bits with little correlation; the default, the Q
// least significant bits, is this design's choice. The reduced tag is cut
// into C partitions of KAPPA bits;
// partition i (cluster i, counted from 0) is the i-th field from the most
// significant end, so the paper's example tag '101110' with C = 2 activates
// neuron 5 of cluster 0 and neuron 6 of cluster 1.
//
// Search (two clock edges):
//   edge 1 (srch_valid = 1): each cluster's onehot_decoder selects a row of its
//     weight_sram, and the C rows are registered (the paper's clk1).
//   edge 2: global_decoder ANDs the rows into the M P_II neuron values and ORs
//     them in groups of ZETA into the BETA compare-enables, registered into
//     en / neuron with en_valid = 1 (the register stands in for the paper's
//     clk2 gating; the paper uses wave pipelining and names registered
//     pipelining as an alternative, which is what is built here).
// A new search may be accepted on every edge.
//
// Training (one edge, wr_en = 1): for each cluster, column wr_addr of its
// weight SRAM is overwritten with the one-hot code of wr_tag's partition, which
// sets w(i,j)(wr_addr) = 1 for the active neuron j and clears the rest. A
// search accepted on the same edge as a write sees the old weights.
//
// Reset (asynchronous, active low) clears all weights and outputs.
module cnn #(
  parameter int unsigned M       = cscam_pkg::CSCAM_M,
  parameter int unsigned N       = cscam_pkg::CSCAM_N,
  parameter int unsigned ZETA    = cscam_pkg::CSCAM_ZETA,
  parameter int unsigned Q       = cscam_pkg::CSCAM_Q,
  parameter int unsigned C       = cscam_pkg::CSCAM_C,
  parameter logic [N-1:0] TAG_MASK = {{(N-Q){1'b0}}, {Q{1'b1}}},
  parameter int unsigned KAPPA   = Q / C,
  parameter int unsigned L       = 2 ** KAPPA,
  parameter int unsigned BETA    = M / ZETA,
  parameter int unsigned AW      = $clog2(M)
) (
  input  logic            clk,
  input  logic            rst_n,
  // search
  input  logic            srch_valid,
  input  logic [N-1:0]    srch_tag,
  output logic            en_valid,
  output logic [BETA-1:0] en,
  output logic [M-1:0]    neuron,
  // training
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_addr,
  input  logic [N-1:0]    wr_tag
);
  initial begin
    assert (KAPPA * C == Q) else $error("cnn: Q must be a multiple of C");
    assert ($countones(TAG_MASK) == Q) else $error("cnn: TAG_MASK must select exactly Q bits");
  end

  // gather the masked tag bits, lowest position first
  function automatic logic [Q-1:0] reduce_tag(logic [N-1:0] tag);
    logic [Q-1:0] red;
    int unsigned  j;
    red = '0;
    j = 0;
    for (int unsigned b = 0; b < N; b++) begin
      if (TAG_MASK[b]) begin
        if (j < Q) red[j] = tag[b];
        j++;
      end
    end
    return red;
  endfunction

  logic [Q-1:0] srch_red, wr_red;
  assign srch_red = reduce_tag(srch_tag);
  assign wr_red   = reduce_tag(wr_tag);

  logic [C-1:0][M-1:0] rows;
  logic                rows_valid;

  for (genvar i = 0; i < C; i++) begin : g_cluster
    logic [L-1:0] rd_wl, wr_bits;

    onehot_decoder #(.KAPPA(KAPPA), .L(L)) u_rd_dec (
      .bin    (srch_red[Q-1-i*KAPPA -: KAPPA]),
      .onehot (rd_wl)
    );
    onehot_decoder #(.KAPPA(KAPPA), .L(L)) u_wr_dec (
      .bin    (wr_red[Q-1-i*KAPPA -: KAPPA]),
      .onehot (wr_bits)
    );
    weight_sram #(.L(L), .M(M), .AW(AW)) u_sram (
      .clk     (clk),
      .rst_n   (rst_n),
      .rd_en   (srch_valid),
      .rd_wl   (rd_wl),
      .rd_row  (rows[i]),
      .wr_en   (wr_en),
      .wr_col  (wr_addr),
      .wr_bits (wr_bits)
    );
  end

  logic [M-1:0]    neuron_d;
  logic [BETA-1:0] en_d;

  global_decoder #(.C(C), .M(M), .ZETA(ZETA), .BETA(BETA)) u_gd (
    .rows   (rows),
    .neuron (neuron_d),
    .en     (en_d)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rows_valid <= 1'b0;
      en_valid   <= 1'b0;
      en         <= '0;
      neuron     <= '0;
    end else begin
      rows_valid <= srch_valid;
      en_valid   <= rows_valid;
      if (rows_valid) begin
        en     <= en_d;
        neuron <= neuron_d;
      end
    end
  end
endmodule
