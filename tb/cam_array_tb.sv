// cam_array_tb: CAM array of 64 entries x 16 bits in 8 sub-blocks of 8 rows,
// against an entry model. Random entries are written, then keys (stored,
// one-bit-off and random) are compared under random sub-block enables. The
// expected matchline of entry a is: enable of sub-block a/8, entry valid and
// tag equal. Miss is the NOR of all expected matchlines. The registered
// outputs must appear one edge after cmp_valid and hold when it is low.
module cam_array_tb;
  localparam int unsigned M = 64, N = 16, ZETA = 8, BETA = 8, AW = 6;

  int checks = 0, failures = 0;
  int hits = 0, misses = 0, masked = 0;
  logic clk = 0, rst_n = 1;
  logic cmp_valid = 0, wr_en = 0;
  logic [BETA-1:0] en = '0;
  logic [N-1:0] key = '0, wr_tag = '0;
  logic [AW-1:0] wr_addr = '0;
  logic [M-1:0] ml;
  logic miss;

  logic [N-1:0] mtag [M];
  bit           mval [M];

  cam_array #(.M(M), .N(N), .ZETA(ZETA)) dut (.*);

  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // reset asserted by an edge so async resets act

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [M-1:0] exp, held_ml;
    logic held_miss;
    bit any_full;
    for (int a = 0; a < M; a++) begin mtag[a] = '0; mval[a] = 0; end
    #12 rst_n = 1;
    // write 48 random addresses
    for (int n = 0; n < 48; n++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'($urandom_range(0, M - 1)); wr_tag = N'($urandom_range(0, 1023));
      mtag[wr_addr] = wr_tag; mval[wr_addr] = 1;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      cmp_valid = ($urandom_range(0, 4) != 0);
      en = BETA'($urandom);
      case ($urandom_range(0, 2))
        0: key = mtag[$urandom_range(0, M - 1)];
        1: key = mtag[$urandom_range(0, M - 1)] ^ (N'(1) << $urandom_range(0, N - 1));
        default: key = N'($urandom_range(0, 1023));
      endcase
      any_full = 0;
      for (int a = 0; a < M; a++) begin
        exp[a] = en[a / ZETA] && mval[a] && (mtag[a] == key);
        if (mval[a] && mtag[a] == key && !en[a / ZETA]) any_full = 1;
      end
      held_ml = ml; held_miss = miss;
      @(negedge clk);
      cmp_valid = 0;
      checks++;
      if (ml !== (cmp_valid_q() ? exp : held_ml)) begin
        failures++; $display("FAIL ml n=%0d", n);
      end
      checks++;
      if (miss !== (cmp_valid_q() ? (exp == 0) : held_miss)) begin
        failures++; $display("FAIL miss n=%0d", n);
      end
      if (cmp_valid_q()) begin
        if (exp != 0) hits++; else misses++;
        if (any_full) masked++;
      end
    end
    checks++;
    if (hits == 0 || misses == 0 || masked == 0) begin
      failures++; $display("FAIL coverage hits %0d misses %0d masked %0d", hits, misses, masked);
    end
    $display("hits %0d misses %0d disabled-matches %0d", hits, misses, masked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cmp_valid as sampled by the last rising edge
  logic cmp_valid_d = 0;
  always @(posedge clk) cmp_valid_d <= cmp_valid;
  function automatic bit cmp_valid_q();
    return cmp_valid_d;
  endfunction
endmodule
