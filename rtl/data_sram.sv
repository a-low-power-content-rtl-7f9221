// data_sram: M x N data memory read through the CAM matchlines.
//
// Word a holds the data associated with CAM entry a. A search read drives the
// M matchlines of the CAM as wordlines: on the rising edge with rd_en = 1 the
// word whose wordline is high is registered into rd_data. The one-hot
// wordlines are encoded to an address inside the block so the array maps onto
// an ordinary single-port-read memory; with no wordline high, word 0 is read
// and the caller ignores it (Miss). At most one wordline may be high, which
// holds when the CAM stores each tag once; an assertion checks it.
// Write: wr_en, wr_addr, wr_data on the rising edge; a read on the same edge
// returns the old word. The memory has no reset.
//
// The paper only names this block (an M x N data SRAM fed by the matchlines);
// everything beyond that is this design's choice.
module data_sram #(
  parameter int unsigned M  = cscam_pkg::CSCAM_M,
  parameter int unsigned N  = cscam_pkg::CSCAM_N,
  parameter int unsigned AW = $clog2(M)
) (
  input  logic          clk,
  // read through wordlines
  input  logic          rd_en,
  input  logic [M-1:0]  rd_wl,
  output logic [N-1:0]  rd_data,
  // write
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [N-1:0]  wr_data
);
  logic [N-1:0]  mem [M];
  logic [AW-1:0] rd_addr;

  // one-hot to binary: address bit b is the OR of the wordlines whose index
  // has bit b set
  always_comb begin
    rd_addr = '0;
    for (int unsigned a = 0; a < M; a++) begin
      if (rd_wl[a]) rd_addr |= AW'(a);
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  wl_onehot: assert property (@(posedge clk) rd_en |-> $onehot0(rd_wl))
    else $error("data_sram: more than one wordline active (duplicate tag stored)");
endmodule
