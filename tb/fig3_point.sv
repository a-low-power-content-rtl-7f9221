// fig3_point: one point of the "expected comparisons versus reduced-tag
// length" sweep, used by fig3_workload_tb.
//
// Builds a CAM with M entries of 32-bit tags, one entry per sub-block row
// group of 8, and a Q-bit reduced tag in C clusters. All M entries are
// written with tags whose low 16 bits (which hold the reduced tag) are
// uniformly random and whose high 16 bits are the address, so tags are
// distinct. Then SEARCHES stored tags, drawn at random, are searched back to
// back and the number of candidate entries (active P_II neurons) of each
// search is summed. Every response must be a hit with the right data.
// Outputs: done, the candidate sum, the search count and the error count.
module fig3_point #(
  parameter int unsigned M        = 512,
  parameter int unsigned Q        = 9,
  parameter int unsigned C        = 3,
  parameter int unsigned SEARCHES = 2000
) (
  input  logic   clk,
  input  logic   rst_n,
  output logic   done,
  output longint cand_sum,
  output int     searched,
  output int     errors
);
  localparam int unsigned N = 32, ZETA = 8, BETA = M / ZETA, AW = $clog2(M);

  logic wr_en = 0, srch_valid = 0;
  logic [AW-1:0] wr_addr = '0;
  logic [N-1:0] wr_tag = '0, wr_data = '0, srch_tag = '0;
  logic rsp_valid, rsp_miss, cmp_en_valid;
  logic [N-1:0] rsp_data;
  logic [BETA-1:0] cmp_en;
  logic [M-1:0] cand;

  cscam_top #(.M(M), .N(N), .ZETA(ZETA), .Q(Q), .C(C)) dut (.*);

  logic [N-1:0] mtag [M];
  logic [N-1:0] q_data [$];

  initial begin
    done = 0; cand_sum = 0; searched = 0; errors = 0;
  end

  always @(negedge clk) begin
    if (rst_n && cmp_en_valid) begin
      cand_sum += longint'($countones(cand));
      searched++;
    end
    if (rst_n && rsp_valid) begin
      logic [N-1:0] d;
      d = q_data.pop_front();
      if (rsp_miss || rsp_data !== d) errors++;
    end
  end

  initial begin
    int a;
    @(posedge rst_n);
    for (a = 0; a < M; a++) begin
      @(negedge clk);
      mtag[a] = {16'(a), 16'($urandom)};
      wr_en = 1; wr_addr = AW'(a); wr_tag = mtag[a]; wr_data = ~mtag[a];
    end
    @(negedge clk); wr_en = 0;
    repeat (4) @(negedge clk);
    for (int s = 0; s < SEARCHES; s++) begin
      @(negedge clk);
      a = $urandom_range(0, M - 1);
      srch_valid = 1; srch_tag = mtag[a];
      q_data.push_back(~mtag[a]);
    end
    @(negedge clk); srch_valid = 0;
    repeat (6) @(negedge clk);
    if (q_data.size() != 0) errors++;
    done = 1;
  end
endmodule
