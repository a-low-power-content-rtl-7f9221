// cam_subblock_tb: one sub-block of 8 rows x 16 bits (narrow tags so that
// matches are frequent) against a row model. Checks: no row matches after
// reset (valid bits clear), a written row matches its own tag and nothing
// that differs in one bit, an unwritten row never matches, and with en = 0
// every matchline stays low.
module cam_subblock_tb;
  localparam int unsigned N = 16, ZETA = 8, RW = 3;

  int checks = 0, failures = 0;
  int matches_seen = 0, disabled_seen = 0;
  logic clk = 0, rst_n = 1;
  logic en = 0, wr_en = 0;
  logic [N-1:0] key = '0, wr_tag = '0;
  logic [RW-1:0] wr_row = '0;
  logic [ZETA-1:0] ml;

  logic [N-1:0] mtag [ZETA];
  bit           mval [ZETA];

  cam_subblock #(.N(N), .ZETA(ZETA)) dut (.*);

  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // reset asserted by an edge so async resets act

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what);
    logic [ZETA-1:0] exp;
    for (int r = 0; r < ZETA; r++) exp[r] = en && mval[r] && (mtag[r] == key);
    #1;
    checks++;
    if (ml !== exp) begin
      failures++;
      $display("FAIL %s: key %h en %b ml %b exp %b", what, key, en, ml, exp);
    end
    if (exp != 0) matches_seen++;
    if (!en) disabled_seen++;
  endtask

  initial begin
    for (int r = 0; r < ZETA; r++) begin mtag[r] = '0; mval[r] = 0; end
    #12 rst_n = 1;
    @(negedge clk);
    en = 1;
    for (int v = 0; v < 64; v++) begin key = N'(v); check("after reset"); end
    // write rows 0..5 only, rows 6 and 7 stay invalid
    for (int r = 0; r < 6; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = RW'(r); wr_tag = N'($urandom_range(0, 255));
      mtag[r] = wr_tag; mval[r] = 1;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 3000; n++) begin
      en = ($urandom_range(0, 3) != 0);
      case ($urandom_range(0, 2))
        0: key = mtag[$urandom_range(0, ZETA - 1)];
        1: key = mtag[$urandom_range(0, ZETA - 1)] ^ (N'(1) << $urandom_range(0, N - 1));
        default: key = N'($urandom_range(0, 255));
      endcase
      check("random");
      if (n % 200 == 0) begin
        @(negedge clk);
        wr_en = 1; wr_row = RW'($urandom_range(0, 5)); wr_tag = N'($urandom_range(0, 255));
        mtag[wr_row] = wr_tag; mval[wr_row] = 1;
        @(negedge clk); wr_en = 0;
      end
    end
    checks++;
    if (matches_seen == 0 || disabled_seen == 0) begin
      failures++; $display("FAIL coverage: matches %0d disabled %0d", matches_seen, disabled_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
