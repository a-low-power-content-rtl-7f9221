// cnn_tb: training and search of the clustered neural network.
//
// Part 1, reference size (M = 512, N = 128, ZETA = 8, Q = 9, C = 3): random
// entries are trained, then back-to-back searches are issued. The expected
// P_II neurons are computed from the stored tags alone: entry a is a
// candidate when it was trained and its 9-bit reduced tag equals the
// search's. The expected enables are the OR of each group of 8 candidates.
// The result must appear exactly two edges after the search is accepted.
// Retraining an address must drop its old association.
// Part 2 replays the worked example of the text: C = 2, Q = 6, reduced tag
// '101110' trained at entry 4 sets weight (cluster 0, neuron 5, entry 4) and
// (cluster 1, neuron 6, entry 4), and nothing else in column 4.
// Part 3 repeats it with the reduced tag gathered from scattered tag bits
// (TAG_MASK) and checks that unselected bits do not affect the search.
module cnn_tb;
  localparam int unsigned M = 512, N = 128, ZETA = 8, Q = 9, BETA = 64, AW = 9;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  logic srch_valid = 0, wr_en = 0;
  logic [N-1:0] srch_tag = '0, wr_tag = '0;
  logic [AW-1:0] wr_addr = '0;
  logic en_valid;
  logic [BETA-1:0] en;
  logic [M-1:0] neuron;

  cnn dut (.*);

  // small instance for the worked example
  logic ex_wr_en = 0;
  logic [3:0] ex_wr_addr = '0;
  logic [7:0] ex_tag = '0;
  logic ex_en_valid;
  logic [3:0] ex_en;
  logic [15:0] ex_neuron;
  cnn #(.M(16), .N(8), .ZETA(4), .Q(6), .C(2)) dut_ex (
    .clk(clk), .rst_n(rst_n), .srch_valid(1'b0), .srch_tag(8'h0),
    .en_valid(ex_en_valid), .en(ex_en), .neuron(ex_neuron),
    .wr_en(ex_wr_en), .wr_addr(ex_wr_addr), .wr_tag(ex_tag));

  // instance with a scattered reduced tag: tag bits 0,1,3,4,6,7 selected
  logic mk_wr_en = 0, mk_srch = 0;
  logic [7:0] mk_tag = '0, mk_stag = '0;
  logic mk_en_valid;
  logic [3:0] mk_en;
  logic [15:0] mk_neuron;
  cnn #(.M(16), .N(8), .ZETA(4), .Q(6), .C(2), .TAG_MASK(8'b1101_1011)) dut_mk (
    .clk(clk), .rst_n(rst_n), .srch_valid(mk_srch), .srch_tag(mk_stag),
    .en_valid(mk_en_valid), .en(mk_en), .neuron(mk_neuron),
    .wr_en(mk_wr_en), .wr_addr(4'd9), .wr_tag(mk_tag));

  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // reset asserted by an edge so async resets act

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [Q-1:0] red [M];
  bit           trained [M];

  // expected outputs, queued when a search is accepted
  logic [M-1:0]    q_neuron [$];
  logic [BETA-1:0] q_en [$];
  int              q_issue [$];
  int cycle = 0;
  int multi = 0;

  always @(posedge clk) cycle <= cycle + 1;

  task automatic expect_search(logic [N-1:0] tag);
    logic [M-1:0] n;
    logic [BETA-1:0] e;
    for (int a = 0; a < M; a++) n[a] = trained[a] && (red[a] == tag[Q-1:0]);
    for (int k = 0; k < BETA; k++) e[k] = |n[k*ZETA +: ZETA];
    q_neuron.push_back(n);
    q_en.push_back(e);
    q_issue.push_back(cycle);
  endtask

  // checker: compare every valid output with the oldest expectation
  always @(negedge clk) begin
    if (rst_n && en_valid) begin
      logic [M-1:0] n; logic [BETA-1:0] e; int iss;
      checks++;
      if (q_en.size() == 0) begin
        failures++; $display("FAIL unexpected en_valid");
      end else begin
        n = q_neuron.pop_front(); e = q_en.pop_front(); iss = q_issue.pop_front();
        if (neuron !== n || en !== e) begin
          failures++;
          $display("FAIL search issued at %0d: en %h exp %h", iss, en, e);
        end
        checks++;
        if (cycle - iss != 2) begin
          failures++;
          $display("FAIL latency %0d, expected 2", cycle - iss);
        end
        if ($countones(n) > 1) multi++;
      end
    end
  end

  task automatic train(int a, logic [N-1:0] tag);
    @(negedge clk);
    wr_en = 1; wr_addr = AW'(a); wr_tag = tag;
    red[a] = tag[Q-1:0]; trained[a] = 1;
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    logic [N-1:0] t;
    for (int a = 0; a < M; a++) begin red[a] = '0; trained[a] = 0; end
    #12 rst_n = 1;
    // search before any training: nothing enabled
    @(negedge clk); srch_valid = 1; srch_tag = '0; expect_search(srch_tag);
    @(negedge clk); srch_valid = 0;
    repeat (3) @(negedge clk);
    // train 300 random entries
    for (int n = 0; n < 300; n++) begin
      t = {$urandom, $urandom, $urandom, $urandom};
      train($urandom_range(0, M - 1), t);
    end
    // retrain entry 10 twice: the first association must disappear
    train(10, 128'h1A5);
    train(10, 128'h0F3);
    // back-to-back searches: stored tags, random tags and the retrained ones
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk);
      srch_valid = ($urandom_range(0, 4) != 0);
      case ($urandom_range(0, 2))
        0: srch_tag = {$urandom, $urandom, $urandom, 23'(0), red[$urandom_range(0, M - 1)]};
        1: srch_tag = {$urandom, $urandom, $urandom, $urandom};
        default: srch_tag = (n % 2) ? 128'h1A5 : 128'h0F3;
      endcase
      if (srch_valid) expect_search(srch_tag);
    end
    @(negedge clk); srch_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (q_en.size() != 0) begin failures++; $display("FAIL %0d searches lost", q_en.size()); end
    checks++;
    if (multi == 0) begin failures++; $display("FAIL no search had several candidates"); end
    $display("searches with several candidate entries: %0d", multi);

    // part 2: worked example of the text
    @(negedge clk); ex_wr_en = 1; ex_wr_addr = 4'd4; ex_tag = 8'b00_101110;
    @(negedge clk); ex_wr_en = 0;
    for (int j = 0; j < 8; j++) begin
      checks += 2;
      if (dut_ex.g_cluster[0].u_sram.mem[j][4] !== (j == 5)) begin
        failures++; $display("FAIL example cluster 0 neuron %0d", j);
      end
      if (dut_ex.g_cluster[1].u_sram.mem[j][4] !== (j == 6)) begin
        failures++; $display("FAIL example cluster 1 neuron %0d", j);
      end
    end

    // part 3: scattered tag bits. Tag 1011_1110 has selected bits
    // t7 t6 t4 t3 t1 t0 = 1 0 1 1 1 0, i.e. reduced tag 101110 again; the
    // unselected bits 5 and 2 must not matter.
    @(negedge clk); mk_wr_en = 1; mk_tag = 8'b1011_1110;
    @(negedge clk); mk_wr_en = 0;
    for (int j = 0; j < 8; j++) begin
      checks += 2;
      if (dut_mk.g_cluster[0].u_sram.mem[j][9] !== (j == 5)) begin
        failures++; $display("FAIL mask cluster 0 neuron %0d", j);
      end
      if (dut_mk.g_cluster[1].u_sram.mem[j][9] !== (j == 6)) begin
        failures++; $display("FAIL mask cluster 1 neuron %0d", j);
      end
    end
    // search differing only in unselected bits: entry 9 is a candidate;
    // search differing in selected bit 3: it is not
    @(negedge clk); mk_srch = 1; mk_stag = 8'b1001_1010;
    @(negedge clk); mk_stag = 8'b1011_0110;
    @(negedge clk); mk_srch = 0;
    checks++;
    if (!mk_en_valid || mk_neuron !== 16'h0200 || mk_en !== 4'b0100) begin
      failures++; $display("FAIL mask search 1: neuron %h en %b", mk_neuron, mk_en);
    end
    @(negedge clk);
    checks++;
    if (!mk_en_valid || mk_neuron !== 16'h0000 || mk_en !== 4'b0000) begin
      failures++; $display("FAIL mask search 2: neuron %h en %b", mk_neuron, mk_en);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
