// fig3_workload_tb: average number of comparisons per search versus the
// reduced-tag length q, for 512- and 128-entry CAMs, at q = 3, 6, 9 and 12
// (3 clusters of 2, 4, 8 and 16 neurons).
//
// With uniformly random reduced tags, a search for a stored tag activates its
// own entry plus every other entry whose reduced tag is the same, so the
// expected number of candidates is 1 + (M - 1) / 2**q. The measured average
// of each point must lie within 10 % (plus 0.1) of that value; every search
// must also hit with the right data. The published curve for these points
// reads about 64, 9, 2, 2 (M = 512) and 17, 3, 2, 2 (M = 128).
module fig3_workload_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // reset asserted by an edge so async resets act

  localparam int NP = 8;
  localparam int PM [NP] = '{512, 512, 512, 512, 128, 128, 128, 128};
  localparam int PQ [NP] = '{3, 6, 9, 12, 3, 6, 9, 12};

  logic   done [NP];
  longint sum  [NP];
  int     cnt  [NP];
  int     err  [NP];

  for (genvar p = 0; p < NP; p++) begin : g_pt
    fig3_point #(.M(PM[p]), .Q(PQ[p]), .C(3)) u_pt (
      .clk(clk), .rst_n(rst_n), .done(done[p]), .cand_sum(sum[p]),
      .searched(cnt[p]), .errors(err[p]));
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all;
    #12 rst_n = 1;
    do begin
      @(posedge clk);
      all = 1;
      for (int p = 0; p < NP; p++) if (!done[p]) all = 0;
    end while (!all);
    for (int p = 0; p < NP; p++) begin
      real avg, expv;
      avg  = real'(sum[p]) / real'(cnt[p]);
      expv = 1.0 + real'(PM[p] - 1) / real'(2 ** PQ[p]);
      $display("M=%0d q=%0d: average comparisons %f, expected %f, searches %0d",
               PM[p], PQ[p], avg, expv, cnt[p]);
      checks++;
      if (err[p] != 0) begin failures++; $display("FAIL M=%0d q=%0d: %0d wrong responses", PM[p], PQ[p], err[p]); end
      checks++;
      if (avg < 0.9 * expv - 0.1 || avg > 1.1 * expv + 0.1) begin
        failures++; $display("FAIL M=%0d q=%0d average out of range", PM[p], PQ[p]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
