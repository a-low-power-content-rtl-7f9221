// cscam_top: low-power binary CAM whose compare-enables are predicted by a
// clustered neural network (CNN).
//
// A conventional CAM compares the search tag with all M stored tags. Here the
// CAM is split into BETA = M / ZETA sub-blocks, and a small CNN trained on a
// Q-bit slice of each stored tag predicts which sub-blocks can hold the
// searched tag. Only those sub-blocks compare; with uniformly distributed
// reduced tags about two P_II neurons (candidate entries) are active per
// search, so nearly all matchlines stay idle. The prediction never misses a
// stored tag, so the result equals that of a full CAM search; a poor
// prediction only costs more enabled sub-blocks.
//
// Datapath (one clock, registered pipeline, one search accepted per cycle):
//   edge 1  cnn: local decoders select one weight row per cluster; rows read
//   edge 2  cnn: AND over clusters, OR per ZETA-group -> cmp_en registered
//   edge 3  cam_array: enabled sub-blocks compare, matchlines + miss registered
//   edge 4  data_sram: matchlines act as wordlines, data word registered
// rsp_valid / rsp_miss / rsp_data appear after edge 4, counting the edge that
// accepts srch_valid as edge 1 (cscam_pkg::CSCAM_LATENCY). cmp_en and
// cmp_en_valid show the compare-enables after edge 2, for energy accounting.
// The paper integrates the CNN and CAM by wave pipelining with two clocks;
// this registered pipeline is the alternative the paper mentions.
//
// Write (training), one edge with wr_en = 1: entry wr_addr gets tag wr_tag in
// the CAM, data wr_data in the data SRAM, and its CNN weights are retrained
// from wr_tag. Rewriting an address replaces the old entry. A search sees a
// write if it is accepted after the write edge and no other write happens
// during its four edges; the user must not store the same tag at two
// addresses. Both rules are this design's, not the paper's.
//
// Reset: asynchronous, active low; all entries become invalid and untrained.
//
// Parameters: M entries of N bits, ZETA rows per sub-block, a Q-bit reduced
// tag in C clusters, gathered from the tag bits set in TAG_MASK (default: the
// Q lowest bits). Defaults are the paper's reference point (512 x 128, ZETA 8,
// Q 9, C 3); the mask default is this design's.
module cscam_top #(
  parameter int unsigned M       = cscam_pkg::CSCAM_M,
  parameter int unsigned N       = cscam_pkg::CSCAM_N,
  parameter int unsigned ZETA    = cscam_pkg::CSCAM_ZETA,
  parameter int unsigned Q       = cscam_pkg::CSCAM_Q,
  parameter int unsigned C       = cscam_pkg::CSCAM_C,
  parameter logic [N-1:0] TAG_MASK = {{(N-Q){1'b0}}, {Q{1'b1}}},
  parameter int unsigned BETA    = M / ZETA,
  parameter int unsigned AW      = $clog2(M)
) (
  input  logic            clk,
  input  logic            rst_n,
  // write / training
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_addr,
  input  logic [N-1:0]    wr_tag,
  input  logic [N-1:0]    wr_data,
  // search
  input  logic            srch_valid,
  input  logic [N-1:0]    srch_tag,
  output logic            rsp_valid,
  output logic            rsp_miss,
  output logic [N-1:0]    rsp_data,
  // compare-enables produced by the CNN (observation)
  output logic            cmp_en_valid,
  output logic [BETA-1:0] cmp_en,
  output logic [M-1:0]    cand
);
  logic [N-1:0] tag_s1, tag_s2;
  logic         cmp_valid_s3, rd_valid_s4;
  logic [M-1:0] ml;
  logic         miss_s3;

  cnn #(
    .M(M), .N(N), .ZETA(ZETA), .Q(Q), .C(C), .TAG_MASK(TAG_MASK),
    .BETA(BETA), .AW(AW)
  ) u_cnn (
    .clk        (clk),
    .rst_n      (rst_n),
    .srch_valid (srch_valid),
    .srch_tag   (srch_tag),
    .en_valid   (cmp_en_valid),
    .en         (cmp_en),
    .neuron     (cand),
    .wr_en      (wr_en),
    .wr_addr    (wr_addr),
    .wr_tag     (wr_tag)
  );

  // full-length tag travels beside the CNN to the CAM search lines
  always_ff @(posedge clk) begin
    if (srch_valid) tag_s1 <= srch_tag;
    tag_s2 <= tag_s1;
  end

  cam_array #(.M(M), .N(N), .ZETA(ZETA), .BETA(BETA), .AW(AW)) u_cam (
    .clk       (clk),
    .rst_n     (rst_n),
    .cmp_valid (cmp_en_valid),
    .en        (cmp_en),
    .key       (tag_s2),
    .ml        (ml),
    .miss      (miss_s3),
    .wr_en     (wr_en),
    .wr_addr   (wr_addr),
    .wr_tag    (wr_tag)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmp_valid_s3 <= 1'b0;
      rd_valid_s4  <= 1'b0;
      rsp_miss     <= 1'b0;
    end else begin
      cmp_valid_s3 <= cmp_en_valid;
      rd_valid_s4  <= cmp_valid_s3;
      if (cmp_valid_s3) rsp_miss <= miss_s3;
    end
  end
  assign rsp_valid = rd_valid_s4;

  data_sram #(.M(M), .N(N), .AW(AW)) u_data (
    .clk     (clk),
    .rd_en   (cmp_valid_s3),
    .rd_wl   (ml),
    .rd_data (rsp_data),
    .wr_en   (wr_en),
    .wr_addr (wr_addr),
    .wr_data (wr_data)
  );
endmodule
