// cam_array: the M x N CAM, divided into BETA = M / ZETA compare-enabled
// sub-blocks.
//
// Entry a lives in sub-block a / ZETA, row a % ZETA, so sub-block k holds the
// entries that P_II neuron group k of the CNN stands for. Each sub-block
// compares the key only when its enable en[k] is 1. The M matchlines and the
// Miss flag (no matchline high) are registered on the rising edge with
// cmp_valid = 1 and held otherwise; this register models the matchline sense
// latch and is this design's pipeline choice.
//
// Interface: cmp_valid, en (BETA), key (N) in; ml (M), miss out, registered.
// Write: wr_en, wr_addr, wr_tag on the rising edge; only the addressed
// sub-block is written. Reset (asynchronous, active low) invalidates every
// entry and clears ml / miss.
module cam_array #(
  parameter int unsigned M    = cscam_pkg::CSCAM_M,
  parameter int unsigned N    = cscam_pkg::CSCAM_N,
  parameter int unsigned ZETA = cscam_pkg::CSCAM_ZETA,
  parameter int unsigned BETA = M / ZETA,
  parameter int unsigned AW   = $clog2(M)
) (
  input  logic            clk,
  input  logic            rst_n,
  // compare
  input  logic            cmp_valid,
  input  logic [BETA-1:0] en,
  input  logic [N-1:0]    key,
  output logic [M-1:0]    ml,
  output logic            miss,
  // write
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_addr,
  input  logic [N-1:0]    wr_tag
);
  localparam int unsigned RW = (ZETA > 1) ? $clog2(ZETA) : 1;

  initial begin
    assert (BETA * ZETA == M) else $error("cam_array: M must be a multiple of ZETA");
    assert (ZETA == 2 ** $clog2(ZETA)) else $error("cam_array: ZETA must be a power of two");
  end

  logic [M-1:0] ml_d;
  logic [RW-1:0] wr_row;

  if (ZETA > 1) begin : g_row
    assign wr_row = wr_addr[RW-1:0];
  end else begin : g_row1
    assign wr_row = 1'b0;
  end

  for (genvar k = 0; k < BETA; k++) begin : g_blk
    cam_subblock #(.N(N), .ZETA(ZETA), .RW(RW)) u_blk (
      .clk    (clk),
      .rst_n  (rst_n),
      .en     (en[k]),
      .key    (key),
      .ml     (ml_d[k*ZETA +: ZETA]),
      .wr_en  (wr_en && (wr_addr / AW'(ZETA) == AW'(k))),
      .wr_row (wr_row),
      .wr_tag (wr_tag)
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ml   <= '0;
      miss <= 1'b0;
    end else if (cmp_valid) begin
      ml   <= ml_d;
      miss <= ~|ml_d;
    end
  end
endmodule
