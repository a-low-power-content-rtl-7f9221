// cam_subblock: one compare-enabled sub-block of the binary CAM.
//
// ZETA rows of N bits each, written one row at a time, each with a valid bit.
// Each stored bit is compared with the search key by an XOR (the behaviour of
// the XOR-type CAM cell), and a row's matchline is the NOR of its N mismatch
// bits, i.e. it stays high only if every bit matches (NOR-type matchline).
// The whole sub-block evaluates only when its compare-enable en is 1; with
// en = 0 every matchline reads 0, which is how the circuit saves the search
// energy of that sub-block. The XOR cell and NOR matchline follow the paper;
// the per-row valid bit, which keeps never-written rows from matching, is
// this design's addition.
//
// Interface: key, en in; ml (ZETA matchlines) out, combinational from key,
// en and the stored rows. Write: wr_en, wr_row, wr_tag, taken on the rising
// clock edge; the row becomes valid. Reset (asynchronous, active low) clears
// the valid bits; stored tags are not reset.
module cam_subblock #(
  parameter int unsigned N    = cscam_pkg::CSCAM_N,
  parameter int unsigned ZETA = cscam_pkg::CSCAM_ZETA,
  parameter int unsigned RW   = (ZETA > 1) ? $clog2(ZETA) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // compare
  input  logic            en,
  input  logic [N-1:0]    key,
  output logic [ZETA-1:0] ml,
  // write
  input  logic            wr_en,
  input  logic [RW-1:0]   wr_row,
  input  logic [N-1:0]    wr_tag
);
  logic [N-1:0]    row_tag [ZETA];
  logic [ZETA-1:0] valid;

  always_ff @(posedge clk) begin
    if (wr_en) row_tag[wr_row] <= wr_tag;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     valid         <= '0;
    else if (wr_en) valid[wr_row] <= 1'b1;
  end

  always_comb begin
    for (int unsigned r = 0; r < ZETA; r++) begin
      ml[r] = en && valid[r] && !(|(row_tag[r] ^ key));
    end
  end
endmodule
