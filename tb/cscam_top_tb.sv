// cscam_top_tb: end-to-end test of the CNN-based CAM at a reduced size
// (64 entries x 16 bits, 8 sub-blocks of 8 rows, 6-bit reduced tag in 2
// clusters of 8 neurons) so that every mechanism occurs often.
//
// A model keeps the stored tag and data of each address. For every search it
// computes, independently of the RTL: the candidate entries (valid and equal
// 6-bit reduced tag), the sub-block enables (OR per group of 8), hit or miss
// and the data of the matching entry. The compare-enables must appear two
// edges and the response four edges after the accepting edge (the pipeline
// depth of the design); searches are issued back to back.
//
// Mechanisms counted, each of which must occur at least once:
//   hit, miss with no sub-block enabled (the CNN rules the tag out),
//   miss after an enabled compare (reduced tag equal, full tag different),
//   ambiguity (several candidate entries), several sub-blocks enabled,
//   entry overwrite (old tag of a rewritten address no longer found),
//   back-to-back searches, search after reset (nothing stored).
// A twin instance with one entry per sub-block (ZETA = 1), the finest
// grouping, gets the same stimulus: its enables must equal the candidate
// entries and its responses must equal those of the main instance.
module cscam_top_tb;
  localparam int unsigned M = 64, N = 16, ZETA = 8, Q = 6, C = 2, BETA = 8, AW = 6;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  logic wr_en = 0, srch_valid = 0;
  logic [AW-1:0] wr_addr = '0;
  logic [N-1:0] wr_tag = '0, wr_data = '0, srch_tag = '0;
  logic rsp_valid, rsp_miss, cmp_en_valid;
  logic [N-1:0] rsp_data;
  logic [BETA-1:0] cmp_en;
  logic [M-1:0] cand;

  cscam_top #(.M(M), .N(N), .ZETA(ZETA), .Q(Q), .C(C)) dut (.*);

  // twin with one entry per sub-block (ZETA = 1): same stimulus, so its
  // responses must equal dut's and its enables must equal the candidates
  logic z1_rsp_valid, z1_rsp_miss, z1_cmp_en_valid;
  logic [N-1:0] z1_rsp_data;
  logic [M-1:0] z1_cmp_en, z1_cand;
  int n_z1 = 0;
  cscam_top #(.M(M), .N(N), .ZETA(1), .Q(Q), .C(C)) dut_z1 (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_addr(wr_addr), .wr_tag(wr_tag),
    .wr_data(wr_data), .srch_valid(srch_valid), .srch_tag(srch_tag),
    .rsp_valid(z1_rsp_valid), .rsp_miss(z1_rsp_miss), .rsp_data(z1_rsp_data),
    .cmp_en_valid(z1_cmp_en_valid), .cmp_en(z1_cmp_en), .cand(z1_cand));

  always @(negedge clk) begin
    if (rst_n && z1_cmp_en_valid) begin
      checks++;
      if (z1_cmp_en !== cand || z1_cand !== cand) begin
        failures++; $display("FAIL ZETA=1 enables %h exp %h", z1_cmp_en, cand);
      end
    end
    if (rst_n && z1_rsp_valid) begin
      checks++;
      n_z1++;
      if (z1_rsp_miss !== rsp_miss || (!rsp_miss && z1_rsp_data !== rsp_data)) begin
        failures++; $display("FAIL ZETA=1 response differs");
      end
    end
  end

  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // reset asserted by an edge so async resets act

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model
  logic [N-1:0] mtag [M], mdata [M];
  bit           mval [M];

  typedef struct {
    int              issue;
    logic [M-1:0]    cand;
    logic [BETA-1:0] en;
    bit              hit;
    logic [N-1:0]    data;
    bit              overwrite_probe;
  } exp_t;
  exp_t q_en [$], q_rsp [$];

  int cycle = 0, last_issue = -10;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int n_hit = 0, n_miss_noen = 0, n_miss_en = 0, n_ambig = 0, n_multi_blk = 0;
  int n_overwrite = 0, n_b2b = 0, n_after_reset = 0;
  bit after_reset_phase = 1;

  task automatic issue(logic [N-1:0] tag, bit probe = 0);
    exp_t e;
    e.issue = cycle;
    e.hit = 0; e.data = '0; e.overwrite_probe = probe;
    for (int a = 0; a < M; a++) begin
      e.cand[a] = mval[a] && (mtag[a][Q-1:0] == tag[Q-1:0]);
      if (mval[a] && mtag[a] == tag) begin e.hit = 1; e.data = mdata[a]; end
    end
    for (int k = 0; k < BETA; k++) e.en[k] = |e.cand[k*ZETA +: ZETA];
    if (cycle == last_issue + 1) n_b2b++;
    last_issue = cycle;
    if (after_reset_phase) n_after_reset++;
    q_en.push_back(e);
    q_rsp.push_back(e);
    srch_valid = 1; srch_tag = tag;
  endtask

  always @(negedge clk) begin
    if (rst_n && cmp_en_valid) begin
      exp_t e;
      checks++;
      if (q_en.size() == 0) begin failures++; $display("FAIL unexpected cmp_en_valid"); end
      else begin
        e = q_en.pop_front();
        if (cycle - e.issue != 2) begin failures++; $display("FAIL enable latency %0d", cycle - e.issue); end
        checks++;
        if (cmp_en !== e.en || cand !== e.cand) begin
          failures++; $display("FAIL enables %b exp %b", cmp_en, e.en);
        end
        if ($countones(e.cand) > 1) n_ambig++;
        if ($countones(e.en) > 1) n_multi_blk++;
      end
    end
    if (rst_n && rsp_valid) begin
      exp_t e;
      checks++;
      if (q_rsp.size() == 0) begin failures++; $display("FAIL unexpected rsp_valid"); end
      else begin
        e = q_rsp.pop_front();
        if (cycle - e.issue != 4) begin failures++; $display("FAIL response latency %0d", cycle - e.issue); end
        checks++;
        if (rsp_miss !== !e.hit || (e.hit && rsp_data !== e.data)) begin
          failures++;
          $display("FAIL search at %0d: miss %b data %h, exp hit %b data %h",
                   e.issue, rsp_miss, rsp_data, e.hit, e.data);
        end
        if (e.hit) n_hit++;
        else if (e.en == 0) n_miss_noen++;
        else n_miss_en++;
        if (e.overwrite_probe && !e.hit) n_overwrite++;
      end
    end
  end

  function automatic bit tag_used(logic [N-1:0] t, int except);
    for (int a = 0; a < M; a++) if (a != except && mval[a] && mtag[a] == t) return 1;
    return 0;
  endfunction

  task automatic drain();
    @(negedge clk); srch_valid = 0; wr_en = 0;
    repeat (5) @(negedge clk);
  endtask

  task automatic write(int a, logic [N-1:0] t, logic [N-1:0] d);
    @(negedge clk);
    srch_valid = 0;
    wr_en = 1; wr_addr = AW'(a); wr_tag = t; wr_data = d;
    mtag[a] = t; mdata[a] = d; mval[a] = 1;
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    logic [N-1:0] t, old;
    int a;
    for (int i = 0; i < M; i++) begin mtag[i] = '0; mdata[i] = '0; mval[i] = 0; end
    #12 rst_n = 1;
    // searches right after reset: everything misses, nothing enabled
    for (int i = 0; i < 4; i++) begin @(negedge clk); issue(N'($urandom)); end
    drain();
    after_reset_phase = 0;
    for (int round = 0; round < 40; round++) begin
      // a few writes with unique tags
      for (int w = 0; w < 4; w++) begin
        a = $urandom_range(0, M - 1);
        do t = N'($urandom); while (tag_used(t, a));
        write(a, t, N'($urandom));
      end
      // overwrite: rewrite an address, then probe its old tag
      if (round % 4 == 3) begin
        a = $urandom_range(0, M - 1);
        if (mval[a]) begin
          old = mtag[a];
          do t = N'($urandom); while (tag_used(t, a) || t == old);
          write(a, t, N'($urandom));
          @(negedge clk); issue(old, 1);
          @(negedge clk); issue(t);
          drain();
        end
      end
      // burst of back-to-back searches
      for (int s = 0; s < 40; s++) begin
        @(negedge clk);
        if ($urandom_range(0, 5) == 0) begin srch_valid = 0; continue; end
        case ($urandom_range(0, 2))
          0: issue(mtag[$urandom_range(0, M - 1)]);
          1: issue({N'($urandom) & ~N'((1 << Q) - 1)} | N'(mtag[$urandom_range(0, M - 1)][Q-1:0]));
          default: issue(N'($urandom));
        endcase
      end
      drain();
    end
    drain();
    checks++;
    if (q_rsp.size() != 0 || q_en.size() != 0) begin
      failures++; $display("FAIL %0d responses missing", q_rsp.size());
    end
    $display("hit %0d, miss/no-enable %0d, miss/enabled %0d, ambiguous %0d, multi-block %0d",
             n_hit, n_miss_noen, n_miss_en, n_ambig, n_multi_blk);
    $display("overwrite %0d, back-to-back %0d, after-reset %0d", n_overwrite, n_b2b, n_after_reset);
    checks++; if (n_z1 == 0)         begin failures++; $display("FAIL ZETA=1 twin never answered"); end
    checks++; if (n_hit == 0)        begin failures++; $display("FAIL no hit"); end
    checks++; if (n_miss_noen == 0)  begin failures++; $display("FAIL no miss without enable"); end
    checks++; if (n_miss_en == 0)    begin failures++; $display("FAIL no miss after enabled compare"); end
    checks++; if (n_ambig == 0)      begin failures++; $display("FAIL no ambiguity"); end
    checks++; if (n_multi_blk == 0)  begin failures++; $display("FAIL no multi-block enable"); end
    checks++; if (n_overwrite == 0)  begin failures++; $display("FAIL no overwrite probe"); end
    checks++; if (n_b2b == 0)        begin failures++; $display("FAIL no back-to-back search"); end
    checks++; if (n_after_reset == 0) begin failures++; $display("FAIL no search after reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
