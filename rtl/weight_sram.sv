// weight_sram: connection-weight memory of one P_I cluster of the CNN.
//
// Holds the binary weights w(i,j)(i') between the L neurons of one cluster
// (rows) and the M neurons of P_II (columns, one per CAM entry). The array is
// L rows by M columns, as in the paper.
//
// Search read: the one-hot wordline vector rd_wl from the local decoder
// selects one row; on the clock edge with rd_en = 1 that M-bit row is
// registered into rd_row (this edge plays the role of the paper's clk1). With
// rd_en = 0 rd_row holds. Because rd_wl is one-hot, rd_row is the OR of the
// selected rows, exactly what a shared bitline would produce.
//
// Training write: with wr_en = 1, column wr_col (the entry address, selected
// by the column "data decoder") is overwritten with the L-bit vector wr_bits,
// which is the one-hot code of the entry's tag partition. Writing the whole
// column at once clears the entry's previous association while setting the
// new one; the paper only says that a weight is 1 where an association exists,
// so the column-wide write is this design's choice. A read and a write on the
// same edge return the old contents.
//
// Reset (asynchronous, active low) clears every weight so that an untrained
// entry never enables its sub-block. That is also this design's choice.
module weight_sram #(
  parameter int unsigned L  = cscam_pkg::CSCAM_L,
  parameter int unsigned M  = cscam_pkg::CSCAM_M,
  parameter int unsigned AW = $clog2(M)
) (
  input  logic          clk,
  input  logic          rst_n,
  // search read port
  input  logic          rd_en,
  input  logic [L-1:0]  rd_wl,
  output logic [M-1:0]  rd_row,
  // training write port
  input  logic          wr_en,
  input  logic [AW-1:0] wr_col,
  input  logic [L-1:0]  wr_bits
);
  logic [M-1:0] mem [L];
  logic [M-1:0] row_sel;

  always_comb begin
    row_sel = '0;
    for (int unsigned j = 0; j < L; j++) begin
      if (rd_wl[j]) row_sel |= mem[j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned j = 0; j < L; j++) mem[j] <= '0;
      rd_row <= '0;
    end else begin
      if (rd_en) rd_row <= row_sel;
      if (wr_en) begin
        for (int unsigned j = 0; j < L; j++) mem[j][wr_col] <= wr_bits[j];
      end
    end
  end

  rd_wl_onehot: assert property (@(posedge clk) disable iff (!rst_n)
                                 rd_en |-> $onehot0(rd_wl))
    else $error("weight_sram: more than one wordline active");
endmodule
