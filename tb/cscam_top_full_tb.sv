// cscam_top_full_tb: the CAM at its reference size (512 entries x 128 bits,
// 64 sub-blocks of 8, 9-bit reduced tag in 3 clusters of 8 neurons), with no
// parameter changed.
//
// All 512 entries are written with distinct random tags and random data.
// Then every stored tag is searched back to back in random order, followed by
// 512 random tags that are not stored. Each response is checked against a
// model for hit/miss, data and the four-edge latency. The testbench also
// measures the average number of candidate entries per search of a stored
// tag (1 + E(lambda)); for uniform 9-bit reduced tags the expected value is
// 1 + 511/512 = 2.0, and the measured value must fall within 1.7 .. 2.3.
module cscam_top_full_tb;
  localparam int unsigned M = cscam_pkg::CSCAM_M;
  localparam int unsigned N = cscam_pkg::CSCAM_N;
  localparam int unsigned BETA = cscam_pkg::CSCAM_BETA;
  localparam int unsigned AW = $clog2(M);

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  logic wr_en = 0, srch_valid = 0;
  logic [AW-1:0] wr_addr = '0;
  logic [N-1:0] wr_tag = '0, wr_data = '0, srch_tag = '0;
  logic rsp_valid, rsp_miss, cmp_en_valid;
  logic [N-1:0] rsp_data;
  logic [BETA-1:0] cmp_en;
  logic [M-1:0] cand;

  cscam_top dut (.*);

  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // reset asserted by an edge so async resets act

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N-1:0] mtag [M], mdata [M];

  typedef struct { int issue; bit hit; logic [N-1:0] data; } exp_t;
  exp_t q [$];
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  longint cand_sum = 0, en_sum = 0;
  int n_stored_searches = 0, n_hits = 0, n_miss = 0;
  bit stored_phase = 0;

  always @(negedge clk) begin
    if (rst_n && cmp_en_valid && stored_phase) begin
      cand_sum += $countones(cand);
      en_sum   += $countones(cmp_en);
      n_stored_searches++;
    end
    if (rst_n && rsp_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("FAIL unexpected response"); end
      else begin
        e = q.pop_front();
        if (cycle - e.issue != 4 || rsp_miss !== !e.hit || (e.hit && rsp_data !== e.data)) begin
          failures++;
          $display("FAIL search at %0d: latency %0d miss %b exp hit %b", e.issue,
                   cycle - e.issue, rsp_miss, e.hit);
        end
        if (e.hit) n_hits++; else n_miss++;
      end
    end
  end

  task automatic issue(logic [N-1:0] tag, bit hit, logic [N-1:0] data);
    exp_t e;
    e.issue = cycle; e.hit = hit; e.data = data;
    q.push_back(e);
    srch_valid = 1; srch_tag = tag;
  endtask

  initial begin
    int order [M];
    logic [N-1:0] t;
    #12 rst_n = 1;
    // distinct tags: the upper 9 bits carry the address, the rest is random
    for (int a = 0; a < M; a++) begin
      @(negedge clk);
      t = {$urandom, $urandom, $urandom, $urandom};
      t[N-1 -: AW] = AW'(a);
      mtag[a] = t; mdata[a] = {$urandom, $urandom, $urandom, $urandom};
      wr_en = 1; wr_addr = AW'(a); wr_tag = mtag[a]; wr_data = mdata[a];
    end
    @(negedge clk); wr_en = 0;
    repeat (4) @(negedge clk);
    for (int a = 0; a < M; a++) order[a] = a;
    order.shuffle();
    stored_phase = 1;
    foreach (order[i]) begin
      @(negedge clk);
      issue(mtag[order[i]], 1, mdata[order[i]]);
    end
    @(negedge clk); srch_valid = 0;
    repeat (3) @(negedge clk);
    stored_phase = 0;
    // random tags; any that happens to be stored is expected to hit
    for (int i = 0; i < M; i++) begin
      bit h; logic [N-1:0] d;
      h = 0; d = '0;
      @(negedge clk);
      t = {$urandom, $urandom, $urandom, $urandom};
      for (int a = 0; a < M; a++) if (mtag[a] == t) begin h = 1; d = mdata[a]; end
      issue(t, h, d);
    end
    @(negedge clk); srch_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d responses missing", q.size()); end
    $display("hits %0d misses %0d", n_hits, n_miss);
    $display("average candidate entries per stored-tag search: %0d.%03d (expected 2.0)",
             int'(cand_sum / longint'(n_stored_searches)), int'((cand_sum * 1000 / longint'(n_stored_searches)) % 1000));
    $display("average enabled sub-blocks per stored-tag search: %0d.%03d of %0d",
             int'(en_sum / longint'(n_stored_searches)), int'((en_sum * 1000 / longint'(n_stored_searches)) % 1000), BETA);
    checks++;
    if (n_stored_searches != M || cand_sum * 10 < 17 * M || cand_sum * 10 > 23 * M) begin
      failures++; $display("FAIL average candidates outside 1.7 .. 2.3");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
